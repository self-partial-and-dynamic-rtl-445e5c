// tb_aes_sdpr_top -- the whole self-reconfiguring AES coprocessor at its default
// size. A process stands in for the configuration access port: it answers each
// reconfiguration request after a fixed bitstream-load time. The test walks the
// configuration FSM through START -> AES-128 -> AES-256 -> AES-192 -> AES-128, a key
// change without a length change, and encrypts and decrypts in every
// configuration (standard known-answer blocks and random blocks against the
// behavioural reference), checking the Nr*25-cycle block time. It also makes sure
// the mechanisms of the design each happen: reconfiguration, key reload without
// reconfiguration, block start refused while the region is isolated, and
// configuration writes dropped during a reconfiguration and during a block.
module tb_aes_sdpr_top;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  localparam int LOAD_CYCLES = 40;   // stand-in bitstream load time

  logic         clk = 0, rst_n = 0;
  logic         cfg_we = 0;
  key_len_e     cfg_key_len = KEY_128;
  logic [255:0] cfg_key = '0;
  logic         cfg_ready;
  logic         reconf_req;
  logic [1:0]   pr_sel;
  logic         reconf_ack = 0;
  logic         blk_start = 0, blk_decrypt = 0;
  logic [127:0] blk_din = '0;
  logic         blk_ready, blk_done;
  logic [127:0] blk_dout;
  key_len_e     active_len;
  logic         key_loaded;
  logic [1:0]   cfg_state;
  logic [15:0]  reconf_count, dropped_writes;

  int checks = 0, failures = 0;
  int n_reconf = 0, n_reload = 0, n_refused = 0, n_drop_reconf = 0, n_drop_busy = 0;
  int n_enc [3] = '{0, 0, 0};
  int n_dec [3] = '{0, 0, 0};

  aes_sdpr_top dut (.*);

  always #5 clk = ~clk;

  // configuration access port stand-in
  initial begin
    forever begin
      @(posedge clk);
      if (reconf_req) begin
        repeat (LOAD_CYCLES) @(posedge clk);
        reconf_ack <= 1'b1;
        @(posedge clk);
        reconf_ack <= 1'b0;
        n_reconf++;
      end
    end
  end

  task automatic check(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %032h expected %032h", what, got, exp);
    end
  endtask

  task automatic configure(key_len_e kl, logic [255:0] k, bit expect_reconf);
    int rc_before = int'(reconf_count);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_we = 1; cfg_key_len = kl; cfg_key = k;
    @(negedge clk);
    cfg_we = 0;
    check(128'(reconf_req), 128'(expect_reconf), "reconfiguration requested iff length changed");
    check(128'(pr_sel), 128'(kl), "partial bitstream for the key length");
    if (expect_reconf) begin
      // the region is isolated: a block start now is refused
      blk_start = 1; blk_din = '1;
      @(negedge clk);
      blk_start = 0;
      check(128'(blk_ready), 0, "region not ready while reconfiguring");
      repeat (3) @(negedge clk);
      check(128'(blk_done), 0, "refused block does not run");
      n_refused++;
      // a configuration write now is dropped
      cfg_we = 1; cfg_key_len = KEY_128; cfg_key = '0;
      @(negedge clk);
      cfg_we = 0;
      n_drop_reconf++;
    end else begin
      n_reload++;
    end
    while (!blk_ready) @(negedge clk);
    check(128'(active_len), 128'(kl), "active configuration");
    check(128'(cfg_state), 128'(int'(kl) + 1), "FSM state of the key length");
    check(128'(int'(reconf_count) - rc_before), 128'(expect_reconf), "reconfiguration count");
  endtask

  task automatic block(logic dec, logic [127:0] d, output logic [127:0] q);
    int cyc;
    @(negedge clk);
    while (!blk_ready) @(negedge clk);
    blk_decrypt = dec; blk_din = d; blk_start = 1;
    @(negedge clk);
    blk_start = 0;
    cyc = 0;
    while (!blk_done) begin
      @(negedge clk);
      cyc++;
      if (cyc == 20) begin
        // configuration write during a block is dropped
        cfg_we = 1; cfg_key_len = KEY_256; cfg_key = '0;
        @(negedge clk);
        cfg_we = 0;
        cyc++;
        n_drop_busy++;
      end
    end
    check(128'(cyc), 128'(nr_of(active_len)) * ROUND_CYCLES, "block time Nr*25 cycles");
    q = blk_dout;
    if (dec) n_dec[active_len]++; else n_enc[active_len]++;
  endtask

  task automatic kat(logic [127:0] pt, logic [127:0] ct);
    logic [127:0] q;
    block(0, pt, q); check(q, ct, "known-answer encryption");
    block(1, ct, q); check(q, pt, "known-answer decryption");
  endtask

  task automatic rnd(logic [255:0] k, int nk);
    logic [127:0] q, pt;
    for (int b = 0; b < 4; b++) pt[32*b +: 32] = $urandom;
    block(0, pt, q); check(q, r_encrypt(pt, k, nk), "random encryption");
    block(1, q, q);  check(q, pt, "random decryption round trip");
  endtask

  initial begin
    logic [255:0] k;
    int exp_drops;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    check(128'(cfg_state), 0, "START after reset");
    check(128'(blk_ready), 0, "no blocks before the first configuration");

    configure(KEY_128, {128'h000102030405060708090a0b0c0d0e0f, 128'h0}, 1);
    kat(128'h00112233445566778899aabbccddeeff, 128'h69c4e0d86a7b0430d8cdb78070b4c55a);

    configure(KEY_256, 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f, 1);
    kat(128'h00112233445566778899aabbccddeeff, 128'h8ea2b7ca516745bfeafc49904b496089);

    configure(KEY_192, {192'h000102030405060708090a0b0c0d0e0f1011121314151617, 64'h0}, 1);
    kat(128'h00112233445566778899aabbccddeeff, 128'hdda97ca4864cdfe06eaf70a0ec0d7191);

    // new key, same length: no reconfiguration
    k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, 64'h0};
    configure(KEY_192, k, 0);
    rnd(k, 6);

    configure(KEY_128, {128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h0}, 1);
    kat(128'h3243f6a8885a308d313198a2e0370734, 128'h3925841d02dc09fbdc118597196a0b32);

    k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    configure(KEY_256, k, 1);
    rnd(k, 8);

    // mechanism coverage
    exp_drops = n_drop_reconf + n_drop_busy;
    check(128'(dropped_writes), 128'(exp_drops), "dropped configuration writes counted");
    check(128'(reconf_count), 128'(n_reconf), "every request acknowledged once");
    foreach (n_enc[i]) begin
      checks++;
      if (n_enc[i] == 0 || n_dec[i] == 0) begin
        failures++;
        $display("FAIL key length %0d not exercised", i);
      end
    end
    checks++; if (n_reconf == 0)      begin failures++; $display("FAIL no reconfiguration"); end
    checks++; if (n_reload == 0)      begin failures++; $display("FAIL no key reload"); end
    checks++; if (n_refused == 0)     begin failures++; $display("FAIL no refused start"); end
    checks++; if (n_drop_reconf == 0) begin failures++; $display("FAIL no write dropped in reconfiguration"); end
    checks++; if (n_drop_busy == 0)   begin failures++; $display("FAIL no write dropped in a block"); end
    $display("mechanisms: reconfigurations=%0d key_reloads=%0d refused_starts=%0d drops_reconf=%0d drops_busy=%0d",
             n_reconf, n_reload, n_refused, n_drop_reconf, n_drop_busy);
    $display("blocks: enc128=%0d enc192=%0d enc256=%0d dec128=%0d dec192=%0d dec256=%0d",
             n_enc[0], n_enc[1], n_enc[2], n_dec[0], n_dec[1], n_dec[2]);
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
