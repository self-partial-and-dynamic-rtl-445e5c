// aes_core -- iterative, byte-serial AES encryption/decryption core for 128-, 192-
// and 256-bit keys. This is the "reconfigurable AES core": the key length that would
// select one of three partial modules selects a mode here.
//
// How it works. The cipher key is first expanded into a round-key memory
// (aes_key_expand, 4*(Nr+1) cycles after key_start). A block is then processed in
// Nr rounds of ROUND_CYCLES = 25 clock cycles each, so one block takes 250, 300 or
// 350 cycles for AES-128/192/256, the per-block cycle counts of the paper's
// implementation results. Inside a round the core walks a single S-box and a single
// MixColumns unit over the state:
//   steps  0..15  SubBytes and ShiftRows, one byte per step: output byte k (row r,
//                 column c) is S(state[r][(c+r) mod 4]); for decryption
//                 InvS(state[r][(c-r) mod 4]), i.e. InvShiftRows then InvSubBytes.
//   steps 16..19  encryption: MixColumns, one column per step (skipped in the last
//                 round); decryption: AddRoundKey with round key Nr-round.
//   steps 20..23  encryption: AddRoundKey with round key `round`, one word per step;
//                 decryption: InvMixColumns (skipped in the last round).
//   step  24      the new state is written back and the round counter advances.
// The initial AddRoundKey (round key 0 for encryption, Nr for decryption, as in the
// encryption and decryption flow diagrams) is applied when the block is loaded.
// The split of a round into 16+4+4+1 steps is this design's choice: the paper gives
// only the total cycle count.
//
// Interface. key_start (pulse) with key_len and key (left-aligned, 256 bits) loads a
// key; key_busy is high while it is being expanded and key_ready once it is. start (pulse, accepted when ready is
// high) with decrypt and din begins a block. done pulses for one cycle exactly
// Nr*25 cycles after the start cycle; dout holds the result until the next block
// finishes. The key length of a running block is the one of the expanded key.
module aes_core
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // key loading
  input  logic         key_start,
  input  key_len_e     key_len,
  input  logic [255:0] key,
  output logic         key_ready,
  output logic         key_busy,
  // block processing
  input  logic         start,
  input  logic         decrypt,
  input  logic [127:0] din,
  output logic         ready,
  output logic         busy,
  output logic         done,
  output logic [127:0] dout,
  output key_len_e     active_len
);

  logic [7:0]   st  [16];
  logic [7:0]   tmp [16];
  logic [4:0]   step;
  logic [3:0]   round;
  logic         dec_q;
  logic         kx_busy;
  key_len_e     kl_q;
  logic [3:0]   nr;

  logic [3:0]   rk_row;
  logic [127:0] rk;
  logic [3:0]   kbyte, src, col_sel;
  logic [1:0]   brow, bcol;
  logic [7:0]   sb_in, sb_out;
  logic [31:0]  mc_in, mc_out, rk_word;
  logic         in_a, in_b, do_mix, do_ark, last_round;

  assign nr         = nr_of(kl_q);
  assign active_len = kl_q;
  assign ready      = key_ready && !busy && !kx_busy;
  assign key_busy   = kx_busy;

  // Key length of the loaded key follows the key_start command.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     kl_q <= KEY_128;
    else if (key_start && !kx_busy && !busy) kl_q <= key_len;
  end

  // Round-key row: initial key on load, then per round.
  always_comb begin
    if (!busy) rk_row = decrypt ? nr : 4'd0;
    else       rk_row = dec_q ? nr - round : round;
  end

  aes_key_expand u_kx (
    .clk, .rst_n,
    .start  (key_start && !busy),
    .key_len(key_len),
    .key,
    .busy   (kx_busy),
    .ready  (key_ready),
    .rd_row (rk_row),
    .rd_key (rk)
  );

  // ShiftRows / InvShiftRows as a source-byte address for the byte being written.
  assign kbyte = step[3:0];
  assign brow  = kbyte[1:0];
  assign bcol  = kbyte[3:2];
  assign src   = dec_q ? {2'(bcol - brow), brow} : {2'(bcol + brow), brow};
  assign sb_in = st[src];

  aes_sbox u_sbox (.din(sb_in), .inv(dec_q), .dout(sb_out));

  // Column steps: phase A = steps 16..19, phase B = steps 20..23.
  assign in_a       = (step >= 5'd16) && (step <= 5'd19);
  assign in_b       = (step >= 5'd20) && (step <= 5'd23);
  assign col_sel    = {2'b00, step[1:0]};
  assign last_round = (round == nr);
  assign do_mix     = dec_q ? in_b : in_a;
  assign do_ark     = dec_q ? in_a : in_b;
  assign mc_in      = {tmp[4*col_sel], tmp[4*col_sel+1], tmp[4*col_sel+2], tmp[4*col_sel+3]};
  assign rk_word    = rk[127 - 32*col_sel -: 32];

  aes_mixcolumn u_mc (.col_in(mc_in), .inv(dec_q), .col_out(mc_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      step  <= '0;
      round <= '0;
      dec_q <= 1'b0;
      dout  <= '0;
      for (int k = 0; k < 16; k++) begin
        st[k]  <= '0;
        tmp[k] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && ready) begin
          // initial AddRoundKey
          for (int k = 0; k < 16; k++) st[k] <= din[127 - 8*k -: 8] ^ rk[127 - 8*k -: 8];
          dec_q <= decrypt;
          busy  <= 1'b1;
          step  <= '0;
          round <= 4'd1;
        end
      end else begin
        if (step <= 5'd15) begin
          tmp[kbyte] <= sb_out;
        end else if (do_mix) begin
          if (!last_round)
            for (int b = 0; b < 4; b++) tmp[4*col_sel + b] <= mc_out[31 - 8*b -: 8];
        end else if (do_ark) begin
          for (int b = 0; b < 4; b++) tmp[4*col_sel + b] <= mc_in[31 - 8*b -: 8] ^ rk_word[31 - 8*b -: 8];
        end
        if (step == 5'(ROUND_CYCLES - 1)) begin
          step <= '0;
          for (int k = 0; k < 16; k++) st[k] <= tmp[k];
          if (last_round) begin
            busy <= 1'b0;
            done <= 1'b1;
            for (int k = 0; k < 16; k++) dout[127 - 8*k -: 8] <= tmp[k];
          end else begin
            round <= round + 4'd1;
          end
        end else begin
          step <= step + 5'd1;
        end
      end
    end
  end

endmodule
