// tb_aes_mixcolumn -- MixColumns / InvMixColumns on one column: published column
// examples, random columns against the matrix product of the reference, and
// InvMixColumns(MixColumns(x)) = x.
module tb_aes_mixcolumn;
  import aes_ref_pkg::*;

  logic [31:0] col_in, col_out;
  logic        inv;
  logic        clk = 0;
  int checks = 0, failures = 0;

  aes_mixcolumn dut (.col_in, .inv, .col_out);

  always #5 clk = ~clk;

  function automatic logic [31:0] ref_mc(logic [31:0] c, logic invm);
    logic [7:0] s [4];
    logic [7:0] m [4];
    logic [31:0] o;
    for (int i = 0; i < 4; i++) s[i] = c[31 - 8*i -: 8];
    if (invm) m = '{8'h0e, 8'h0b, 8'h0d, 8'h09};
    else      m = '{8'h02, 8'h03, 8'h01, 8'h01};
    for (int r = 0; r < 4; r++) begin
      o[31 - 8*r -: 8] = 8'h00;
      for (int k = 0; k < 4; k++) o[31 - 8*r -: 8] ^= r_mul(m[(k - r + 4) % 4], s[k]);
    end
    return o;
  endfunction

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %08h expected %08h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] x, y;
    col_in = 32'hdb135345; inv = 0; @(posedge clk); check(col_out, 32'h8e4da1bc, "MC db135345");
    col_in = 32'hf20a225c;          @(posedge clk); check(col_out, 32'h9fdc589d, "MC f20a225c");
    col_in = 32'h01010101;          @(posedge clk); check(col_out, 32'h01010101, "MC 01010101");
    col_in = 32'h8e4da1bc; inv = 1; @(posedge clk); check(col_out, 32'hdb135345, "IMC 8e4da1bc");
    for (int n = 0; n < 500; n++) begin
      x = $urandom;
      col_in = x; inv = 0; @(posedge clk);
      y = col_out;
      check(y, ref_mc(x, 0), "MC random");
      col_in = x; inv = 1; @(posedge clk);
      check(col_out, ref_mc(x, 1), "IMC random");
      col_in = y; inv = 1; @(posedge clk);
      check(col_out, x, "IMC(MC(x))");
    end
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
