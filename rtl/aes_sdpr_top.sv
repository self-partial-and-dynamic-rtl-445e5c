// aes_sdpr_top -- self-reconfiguring AES coprocessor: the static configuration logic
// and the reconfigurable AES region, wired as in the system's global architecture.
//
// The manager processor (soft core, outside this RTL) writes the key and its length
// into the configuration register (cfg_* port). The configuration controller decides
// whether the AES region has to be reconfigured for a new key length; if so it
// raises reconf_req/pr_sel towards the internal configuration access port (ICAP,
// outside this RTL, which loads the partial bitstream and answers with reconf_ack).
// While the request is open the region is isolated: blocks cannot be started and
// blk_ready is low. Afterwards the key is expanded in the region and blocks are
// encrypted or decrypted through the blk_* port, Nr*25 cycles per block.
//
// In a real device the AES-128, AES-192 and AES-256 partial modules replace one
// another in the region; here one core that supports all three key lengths stands
// for the region and the selected partial module is its mode (active_len). The
// reconfiguration handshake, its isolation and the key reload it forces are kept,
// so the system behaves as the reconfiguring one does at its ports.
module aes_sdpr_top
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // configuration register (manager processor)
  input  logic         cfg_we,
  input  key_len_e     cfg_key_len,
  input  logic [255:0] cfg_key,
  output logic         cfg_ready,
  // configuration access port side
  output logic         reconf_req,
  output logic [1:0]   pr_sel,
  input  logic         reconf_ack,
  // data blocks (manager processor)
  input  logic         blk_start,
  input  logic         blk_decrypt,
  input  logic [127:0] blk_din,
  output logic         blk_ready,
  output logic         blk_done,
  output logic [127:0] blk_dout,
  // status
  output key_len_e     active_len,
  output logic         key_loaded,
  output logic [1:0]   cfg_state,
  output logic [15:0]  reconf_count,
  output logic [15:0]  dropped_writes
);

  logic         region_en;
  logic         core_key_start;
  key_len_e     core_key_len;
  logic [255:0] core_key;
  logic         core_busy, core_key_busy, core_ready;

  aes_config_ctrl u_cfg (
    .clk, .rst_n,
    .cfg_we, .cfg_key_len, .cfg_key, .cfg_ready,
    .reconf_req, .pr_sel, .reconf_ack,
    .core_busy     (core_busy || core_key_busy),
    .region_en,
    .core_key_start,
    .core_key_len,
    .core_key,
    .state_o       (cfg_state),
    .reconf_count,
    .dropped_writes
  );

  aes_core u_aes (
    .clk, .rst_n,
    .key_start (core_key_start),
    .key_len   (core_key_len),
    .key       (core_key),
    .key_ready (key_loaded),
    .key_busy  (core_key_busy),
    .start     (blk_start && blk_ready),
    .decrypt   (blk_decrypt),
    .din       (blk_din),
    .ready     (core_ready),
    .busy      (core_busy),
    .done      (blk_done),
    .dout      (blk_dout),
    .active_len
  );

  // The region only takes blocks once configured and loaded with the new key.
  assign blk_ready = core_ready && region_en && !core_key_start;

endmodule
