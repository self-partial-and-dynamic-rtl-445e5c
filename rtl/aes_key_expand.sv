// aes_key_expand -- AES key schedule for 128-, 192- and 256-bit keys, with the
// round-key memory it fills.
//
// A pulse on start (with key and key_len held valid in that cycle; both are
// registered) expands the cipher key into the 4*(Nr+1) words w[0..4Nr+3], one word
// per clock cycle, and stores word i at row i/4, column i%4 of a 15 x 128-bit
// round-key memory. Word i is the key word itself for i < Nk; otherwise
//   w[i] = w[i-Nk] ^ SubWord(RotWord(w[i-1])) ^ Rcon      when i mod Nk = 0,
//   w[i] = w[i-Nk] ^ SubWord(w[i-1])                      when Nk = 8, i mod Nk = 4,
//   w[i] = w[i-Nk] ^ w[i-1]                               otherwise,
// which is the standard key schedule (the paper names the key schedule and its word
// indexing but does not list it). The last Nk words live in an 8-word shift
// register, newest first, so w[i-Nk] is entry Nk-1. SubWord uses four S-box
// instances.
//
// Timing: busy rises the cycle after start and stays high for 4*(Nr+1) cycles
// (44, 52 or 60); ready rises when the last word is written and stays high until
// the next start. Read port: rd_row selects a round key, rd_key returns its four
// words (w[4*row] in the top 32 bits) combinationally. A start while busy is
// ignored.
module aes_key_expand
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  key_len_e     key_len,
  input  logic [255:0] key,
  output logic         busy,
  output logic         ready,
  input  logic [3:0]   rd_row,
  output logic [127:0] rd_key
);

  logic [31:0]  rk_mem [RK_ROWS][4];
  logic [31:0]  win    [MAX_NK];     // win[0] = w[i-1], win[k] = w[i-1-k]
  logic [255:0] key_q;
  key_len_e     kl_q;
  logic [5:0]   idx;                 // word index i
  logic [2:0]   j;                   // i mod Nk
  logic [7:0]   rcon;

  logic [3:0]   nk, nr;
  logic [5:0]   last_idx;
  logic [31:0]  prev, old, sub_in, sub_out, temp, w_new;

  assign nk       = nk_of(kl_q);
  assign nr       = nr_of(kl_q);
  assign last_idx = {nr, 2'b11};          // 4*(Nr+1)-1
  assign prev     = win[0];
  assign old      = win[3'(nk - 4'd1)];

  // RotWord only when i mod Nk = 0
  assign sub_in = (j == 3'd0) ? {prev[23:0], prev[31:24]} : prev;

  for (genvar b = 0; b < 4; b++) begin : g_subword
    aes_sbox u_sbox (.din(sub_in[8*b +: 8]), .inv(1'b0), .dout(sub_out[8*b +: 8]));
  end

  always_comb begin
    if (j == 3'd0)                    temp = sub_out ^ {rcon, 24'h0};
    else if (nk == 4'd8 && j == 3'd4) temp = sub_out;
    else                              temp = prev;
    if (idx < 6'(nk)) w_new = key_q[255 - 32*idx -: 32];
    else              w_new = old ^ temp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      ready <= 1'b0;
      idx   <= '0;
      j     <= '0;
      rcon  <= 8'h01;
      key_q <= '0;
      kl_q  <= KEY_128;
      for (int k = 0; k < MAX_NK; k++) win[k] <= '0;
    end else if (start && !busy) begin
      busy  <= 1'b1;
      ready <= 1'b0;
      idx   <= '0;
      j     <= '0;
      rcon  <= 8'h01;
      key_q <= key;
      kl_q  <= key_len;
    end else if (busy) begin
      win[0] <= w_new;
      for (int k = 1; k < MAX_NK; k++) win[k] <= win[k-1];
      if (idx >= 6'(nk) && j == 3'd0) rcon <= xtime(rcon);
      j   <= (j == 3'(nk - 4'd1)) ? 3'd0 : j + 3'd1;
      idx <= idx + 6'd1;
      if (idx == last_idx) begin
        busy  <= 1'b0;
        ready <= 1'b1;
      end
    end
  end

  // Round-key memory: one word written per cycle, no reset (contents are only
  // meaningful once ready is high).
  always_ff @(posedge clk) begin
    if (busy) rk_mem[idx[5:2]][idx[1:0]] <= w_new;
  end

  assign rd_key = {rk_mem[rd_row][0], rk_mem[rd_row][1], rk_mem[rd_row][2], rk_mem[rd_row][3]};

endmodule
