// tb_aes_workloads -- the three cipher workloads of the implementation results
// (AES-128, AES-192, AES-256) run on the whole coprocessor at its default size.
// For each key length the test configures the system, encrypts a stream of random
// blocks back to back, checks every result against the behavioural reference, and
// measures the cycles per block, which must be 250, 300 and 350. It prints the
// throughput those cycle counts give at the clock frequencies reported for a
// Virtex-II (78.59, 71.78 and 70.975 MHz).
module tb_aes_workloads;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  localparam int BLOCKS      = 8;
  localparam int LOAD_CYCLES = 40;

  logic         clk = 0, rst_n = 0;
  logic         cfg_we = 0;
  key_len_e     cfg_key_len = KEY_128;
  logic [255:0] cfg_key = '0;
  logic         cfg_ready, reconf_req, reconf_ack = 0;
  logic [1:0]   pr_sel;
  logic         blk_start = 0, blk_decrypt = 0;
  logic [127:0] blk_din = '0;
  logic         blk_ready, blk_done;
  logic [127:0] blk_dout;
  key_len_e     active_len;
  logic         key_loaded;
  logic [1:0]   cfg_state;
  logic [15:0]  reconf_count, dropped_writes;
  int checks = 0, failures = 0;

  aes_sdpr_top dut (.*);

  always #5 clk = ~clk;

  initial forever begin
    @(posedge clk);
    if (reconf_req) begin
      repeat (LOAD_CYCLES) @(posedge clk);
      reconf_ack <= 1'b1;
      @(posedge clk);
      reconf_ack <= 1'b0;
    end
  end

  task automatic check(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %032h expected %032h", what, got, exp);
    end
  endtask

  task automatic workload(key_len_e kl, real mhz);
    logic [255:0] k;
    logic [127:0] pt [BLOCKS];
    int nk, cyc, busy_cycles;
    nk = 4 + 2 * int'(kl);
    for (int b = 0; b < 8; b++) k[32*b +: 32] = $urandom;
    k = k & ({256{1'b1}} << (256 - 32*nk));
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_we = 1; cfg_key_len = kl; cfg_key = k;
    @(negedge clk);
    cfg_we = 0;
    while (!blk_ready) @(negedge clk);
    busy_cycles = 0;
    for (int n = 0; n < BLOCKS; n++) begin
      for (int b = 0; b < 4; b++) pt[n][32*b +: 32] = $urandom;
      blk_decrypt = 0; blk_din = pt[n]; blk_start = 1;
      @(negedge clk);
      blk_start = 0;
      cyc = 0;
      while (!blk_done) begin @(negedge clk); cyc++; end
      busy_cycles += cyc;
      check(blk_dout, r_encrypt(pt[n], k, nk), "workload block");
    end
    check(128'(busy_cycles / BLOCKS), 128'((nk + 6) * 25), "cycles per block");
    $display("AES-%0d: %0d blocks, %0d cycles per block, %.2f Mbit/s at %.3f MHz",
             32 * nk, BLOCKS, busy_cycles / BLOCKS, 128.0 * mhz / (busy_cycles / BLOCKS), mhz);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    workload(KEY_128, 78.59);
    workload(KEY_192, 71.78);
    workload(KEY_256, 70.975);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
