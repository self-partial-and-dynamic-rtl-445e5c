// aes_config_ctrl -- configuration controller of the self-reconfiguring AES system:
// the configuration register written by the manager processor, and the four-state
// configuration FSM that decides when the AES region must be reconfigured.
//
// The manager (a soft processor running software, outside this RTL) writes the
// configuration register with cfg_we: the key length and the key. The FSM has the
// four global states of the controller: START, and one CRYPTO state per key length
// (AES-128, AES-192, AES-256). It leaves START when a key length is first written;
// a later write with a different key length ("change of length") moves it directly
// to the state of the new length. Every such transition needs a different partial
// module in the AES region, so the controller raises reconf_req with pr_sel naming
// the partial bitstream (0: AES-128, 1: AES-192, 2: AES-256) and holds both until
// the configuration port answers with reconf_ack. While the request is open the AES
// region is isolated (region_en low). After the acknowledge, or immediately when the
// key length did not change, the key is handed to the AES core with a one-cycle
// core_key_start pulse.
//
// Design choices, not in the paper: the register/handshake encoding; cfg_ready,
// which is low while a reconfiguration or a key expansion is open or the core is
// busy (a write then is dropped and counted in dropped_writes); direct transitions
// between any two CRYPTO states, where the state diagram draws the three "change of
// length" arcs as a ring.
module aes_config_ctrl
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // configuration register write port (from the manager processor)
  input  logic         cfg_we,
  input  key_len_e     cfg_key_len,
  input  logic [255:0] cfg_key,
  output logic         cfg_ready,
  // reconfiguration request towards the configuration port
  output logic         reconf_req,
  output logic [1:0]   pr_sel,
  input  logic         reconf_ack,
  // AES region control
  input  logic         core_busy,
  output logic         region_en,
  output logic         core_key_start,
  output key_len_e     core_key_len,
  output logic [255:0] core_key,
  // status
  output logic [1:0]   state_o,
  output logic [15:0]  reconf_count,
  output logic [15:0]  dropped_writes
);

  typedef enum logic [1:0] {
    ST_START  = 2'd0,
    ST_AES128 = 2'd1,
    ST_AES192 = 2'd2,
    ST_AES256 = 2'd3
  } cfg_state_e;

  cfg_state_e   state;
  key_len_e     len_q;
  logic [255:0] key_q;

  function automatic cfg_state_e state_of(key_len_e kl);
    case (kl)
      KEY_192: return ST_AES192;
      KEY_256: return ST_AES256;
      default: return ST_AES128;
    endcase
  endfunction

  assign cfg_ready    = !reconf_req && !core_key_start && !core_busy;
  assign region_en    = !reconf_req;
  assign core_key_len = len_q;
  assign core_key     = key_q;
  assign pr_sel       = 2'(len_q);
  assign state_o      = state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= ST_START;
      len_q          <= KEY_128;
      key_q          <= '0;
      reconf_req     <= 1'b0;
      core_key_start <= 1'b0;
      reconf_count   <= '0;
      dropped_writes <= '0;
    end else begin
      core_key_start <= 1'b0;
      if (reconf_req) begin
        if (reconf_ack) begin
          reconf_req     <= 1'b0;
          core_key_start <= 1'b1;
        end
      end
      if (cfg_we) begin
        if (cfg_ready) begin
          len_q <= cfg_key_len;
          key_q <= cfg_key;
          state <= state_of(cfg_key_len);
          if (state == ST_START || state != state_of(cfg_key_len)) begin
            reconf_req   <= 1'b1;
            reconf_count <= reconf_count + 16'd1;
          end else begin
            core_key_start <= 1'b1;
          end
        end else begin
          dropped_writes <= dropped_writes + 16'd1;
        end
      end
    end
  end

  // Handshake rule: an open request and its bitstream selection stay put until acknowledged.
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    reconf_req && !reconf_ack |=> reconf_req && $stable(pr_sel));

endmodule
