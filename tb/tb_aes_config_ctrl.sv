// tb_aes_config_ctrl -- configuration FSM and register: first key length leaves
// START and requests the matching partial bitstream; a write with the same length
// reloads the key without reconfiguration; a change of length reconfigures; writes
// while a request is open or the core is busy are dropped; the request is held
// until acknowledged and the key handed over only after the acknowledge.
module tb_aes_config_ctrl;
  import aes_pkg::*;

  logic         clk = 0, rst_n = 0;
  logic         cfg_we = 0;
  key_len_e     cfg_key_len = KEY_128;
  logic [255:0] cfg_key = '0;
  logic         cfg_ready;
  logic         reconf_req;
  logic [1:0]   pr_sel;
  logic         reconf_ack = 0;
  logic         core_busy = 0;
  logic         region_en, core_key_start;
  key_len_e     core_key_len;
  logic [255:0] core_key;
  logic [1:0]   state_o;
  logic [15:0]  reconf_count, dropped_writes;
  int checks = 0, failures = 0;
  int key_starts = 0;

  aes_config_ctrl dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (core_key_start) key_starts++;

  task automatic check(int got, int exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic write(key_len_e kl, logic [255:0] k);
    @(negedge clk);
    cfg_we = 1; cfg_key_len = kl; cfg_key = k;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Answer an open request after `delay` cycles; check it stays up meanwhile.
  task automatic ack(int delay, int exp_sel);
    check(int'(reconf_req), 1, "request raised");
    check(int'(pr_sel), exp_sel, "partial bitstream selected");
    check(int'(region_en), 0, "region isolated during reconfiguration");
    for (int i = 0; i < delay; i++) begin
      @(negedge clk);
      check(int'(reconf_req), 1, "request held until acknowledge");
      check(int'(core_key_start), 0, "no key hand-over before acknowledge");
    end
    reconf_ack = 1;
    @(negedge clk);
    reconf_ack = 0;
    check(int'(reconf_req), 0, "request dropped after acknowledge");
    check(int'(core_key_start), 1, "key handed over after acknowledge");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(int'(state_o), 0, "START after reset");
    check(int'(reconf_req), 0, "no request in START");
    write(KEY_192, 256'h1234);
    check(int'(state_o), 2, "START -> AES-192");
    ack(5, 1);
    check(int'(core_key), 'h1234, "key passed to the core");
    check(int'(core_key_len), int'(KEY_192), "key length passed to the core");
    // same length: no reconfiguration
    write(KEY_192, 256'h5678);
    check(int'(reconf_req), 0, "same length, no request");
    check(int'(core_key_start), 1, "same length, key reloaded at once");
    check(int'(reconf_count), 1, "one reconfiguration so far");
    // change of length, write during the request is dropped
    write(KEY_256, 256'h9abc);
    check(int'(state_o), 3, "AES-192 -> AES-256");
    write(KEY_128, 256'h1);
    check(int'(dropped_writes), 1, "write during reconfiguration dropped");
    check(int'(state_o), 3, "state unchanged by dropped write");
    ack(3, 2);
    write(KEY_128, 256'h2);
    check(int'(state_o), 1, "AES-256 -> AES-128");
    ack(0, 0);
    // core busy: write dropped
    core_busy = 1;
    write(KEY_256, 256'h3);
    check(int'(dropped_writes), 2, "write while core busy dropped");
    check(int'(state_o), 1, "state unchanged while core busy");
    core_busy = 0;
    write(KEY_192, 256'h4);
    ack(1, 1);
    check(int'(reconf_count), 4, "four reconfigurations");
    check(key_starts, 5, "five key hand-overs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
