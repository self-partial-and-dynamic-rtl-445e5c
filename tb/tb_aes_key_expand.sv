// tb_aes_key_expand -- key schedule for all three key lengths: the published
// last-word values of the standard's expansion examples, every round key against
// the reference expansion for random keys, and the expansion time 4*(Nr+1) cycles.
module tb_aes_key_expand;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic         clk = 0, rst_n = 0;
  logic         start = 0;
  key_len_e     key_len = KEY_128;
  logic [255:0] key = '0;
  logic         busy, ready;
  logic [3:0]   rd_row = '0;
  logic [127:0] rd_key;
  int checks = 0, failures = 0;

  aes_key_expand dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %032h expected %032h", what, got, exp);
    end
  endtask

  // Expand k, check cycles, return the round keys through the read port.
  task automatic expand(key_len_e kl, logic [255:0] k);
    int cyc, nk, nr;
    tab_t s;
    words_t w;
    nk = (kl == KEY_128) ? 4 : (kl == KEY_192) ? 6 : 8;
    nr = nk + 6;
    @(negedge clk);
    key_len = kl; key = k; start = 1;
    @(negedge clk);
    start = 0; key = '0;
    cyc = 0;   // edges after the one that sampled start
    while (!ready) begin @(negedge clk); cyc++; end
    check(128'(cyc), 128'(4 * (nr + 1)), "expansion cycles");
    s = r_sbox_tab();
    w = r_expand(k, nk, s);
    for (int r = 0; r <= nr; r++) begin
      rd_row = 4'(r); #1;
      check(rd_key, {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]}, $sformatf("round key %0d nk=%0d", r, nk));
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // published expansion examples (last word of each schedule)
    expand(KEY_128, {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h0});
    rd_row = 4'd10; #1; check(128'(rd_key[31:0]), 128'h b6630ca6, "AES-128 w[43]");
    expand(KEY_192, {192'h8e73b0f7da0e6452c810f32b809079e562f8ead2522c6b7b, 64'h0});
    rd_row = 4'd12; #1; check(128'(rd_key[31:0]), 128'h01002202, "AES-192 w[51]");
    expand(KEY_256, 256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4);
    rd_row = 4'd14; #1; check(128'(rd_key[31:0]), 128'h706c631e, "AES-256 w[59]");
    for (int n = 0; n < 6; n++) begin
      logic [255:0] k;
      for (int b = 0; b < 8; b++) k[32*b +: 32] = $urandom;
      expand(key_len_e'(n % 3), k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
