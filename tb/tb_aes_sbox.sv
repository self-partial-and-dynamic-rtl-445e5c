// tb_aes_sbox -- exhaustive check of the S-box and inverse S-box against the
// behavioural reference (inverse found by search), plus published S-box entries.
module tb_aes_sbox;
  import aes_ref_pkg::*;

  logic [7:0] din, dout;
  logic       inv;
  logic       clk = 0;
  int checks = 0, failures = 0;

  aes_sbox dut (.din, .inv, .dout);

  always #5 clk = ~clk;

  task automatic check(logic [7:0] got, logic [7:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %02h expected %02h", what, got, exp);
    end
  endtask

  initial begin
    tab_t s, si;
    s  = r_sbox_tab();
    si = r_inv_tab(s);
    // published entries of the AES S-box
    check(s[8'h00], 8'h63, "ref S(00)");
    check(s[8'h53], 8'hed, "ref S(53)");
    for (int i = 0; i < 256; i++) begin
      din = 8'(i); inv = 1'b0; @(posedge clk);
      check(dout, s[i], $sformatf("S(%02h)", i));
      inv = 1'b1; @(posedge clk);
      check(dout, si[i], $sformatf("InvS(%02h)", i));
    end
    din = 8'h01; inv = 1'b0; @(posedge clk); check(dout, 8'h7c, "S(01)");
    din = 8'hff;             @(posedge clk); check(dout, 8'h16, "S(ff)");
    din = 8'h63; inv = 1'b1; @(posedge clk); check(dout, 8'h00, "InvS(63)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
