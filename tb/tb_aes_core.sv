// tb_aes_core -- the AES core end to end: the standard's cipher examples for
// AES-128/192/256 (encryption and decryption), random blocks and keys against the
// behavioural reference, key changes between blocks, and the block latency of
// exactly Nr*25 cycles from start to done.
module tb_aes_core;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic         clk = 0, rst_n = 0;
  logic         key_start = 0;
  key_len_e     key_len = KEY_128;
  logic [255:0] key = '0;
  logic         key_ready, key_busy;
  logic         start = 0, decrypt = 0;
  logic [127:0] din = '0;
  logic         ready, busy, done;
  logic [127:0] dout;
  key_len_e     active_len;
  int checks = 0, failures = 0;

  aes_core dut (.*);

  always #5 clk = ~clk;

  task automatic check(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %032h expected %032h", what, got, exp);
    end
  endtask

  task automatic load_key(key_len_e kl, logic [255:0] k);
    @(negedge clk);
    key_len = kl; key = k; key_start = 1;
    @(negedge clk);
    key_start = 0;
    while (!ready) @(negedge clk);
    check(128'(active_len), 128'(kl), "active key length");
  endtask

  task automatic run(logic dec, logic [127:0] d, output logic [127:0] q);
    int cyc;
    @(negedge clk);
    while (!ready) @(negedge clk);
    decrypt = dec; din = d; start = 1;
    @(negedge clk);
    start = 0; din = '0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    check(128'(cyc), 128'(nr_of(active_len)) * ROUND_CYCLES, "block latency Nr*25");
    q = dout;
  endtask

  task automatic kat(key_len_e kl, logic [255:0] k, logic [127:0] pt, logic [127:0] ct);
    logic [127:0] q;
    load_key(kl, k);
    run(0, pt, q); check(q, ct, "known-answer encryption");
    run(1, ct, q); check(q, pt, "known-answer decryption");
  endtask

  initial begin
    logic [127:0] q, pt;
    logic [255:0] k;
    int nk;
    repeat (3) @(negedge clk);
    rst_n = 1;
    kat(KEY_128, {128'h000102030405060708090a0b0c0d0e0f, 128'h0},
        128'h00112233445566778899aabbccddeeff, 128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    kat(KEY_192, {192'h000102030405060708090a0b0c0d0e0f1011121314151617, 64'h0},
        128'h00112233445566778899aabbccddeeff, 128'hdda97ca4864cdfe06eaf70a0ec0d7191);
    kat(KEY_256, 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f,
        128'h00112233445566778899aabbccddeeff, 128'h8ea2b7ca516745bfeafc49904b496089);
    kat(KEY_128, {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h0},
        128'h3243f6a8885a308d313198a2e0370734, 128'h3925841d02dc09fbdc118597196a0b32);
    for (int n = 0; n < 9; n++) begin
      for (int b = 0; b < 8; b++) k[32*b +: 32] = $urandom;
      nk = 4 + 2 * (n % 3);
      k = k & ({256{1'b1}} << (256 - 32*nk));
      load_key(key_len_e'(n % 3), k);
      for (int m = 0; m < 2; m++) begin
        for (int b = 0; b < 4; b++) pt[32*b +: 32] = $urandom;
        run(0, pt, q); check(q, r_encrypt(pt, k, nk), "random encryption");
        run(1, pt, q); check(q, r_decrypt(pt, k, nk), "random decryption");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
