// mpe_gcm: memory protection engine, AES-256-GCM authenticated encryption
// of the data an FDU sends out of (or receives into) the device.
//
// A message starts with a `start` pulse carrying the 96-bit IV and the
// direction. The engine then copies the key of the FDU being served (from
// the FDU mapping table, `key_i`). If that FDU is not allocated
// (`key_valid_i` low), the start is refused with a `start_err` pulse and
// nothing is encrypted, so no data leaves for a released FDU. Next, it
// expands the key into its 15 round keys (13 cycles), computes H = E(0) and
// E(J0) with J0 = IV || 0^31 || 1 (15 cycles each), and then accepts
// 128-bit blocks:
//   in_aad = 1   additional authenticated data: only hashed, nothing output;
//   in_aad = 0   payload: XORed with E(counter), counter = J0 + 1, + 2, ...;
//                the ciphertext (in either direction) is hashed and the
//                result leaves on out_*.
// `in_bytes` (0..16) marks a short final block. Bytes beyond it are zero on
// the output and in the hash. A 0-byte block only ends the message.
// `in_last` ends the message: the length block is hashed and
// tag = GHASH ^ E(J0) is held on `tag_o` with `tag_valid` until the next
// start. AAD blocks must come before payload blocks, as GCM requires; this
// is not checked.
//
// Timing: `in_ready` rises 42 cycles after the start cycle; a payload
// block's result is on out_* 15 cycles after the block was accepted (one
// AES round per cycle), an AAD block takes one cycle, and `tag_valid`
// follows the last block by one cycle. The next block is accepted only once
// the previous output has been taken. At 16 bytes per 15 cycles a 4 KB
// transfer takes about 3900 cycles plus 42 of setup.
//
// From the source text: authenticated encryption with AES256-GCM using
// keys from the FDU mapping table, on the path where data leaves the
// device. Own choices: an iterative one-round-per-cycle engine, computed
// S-boxes, the refusal of a start for an unallocated FDU, the block
// interface. The source design runs this function in software on the
// device's ARM core.
module mpe_gcm
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  // message start
  input  logic         start,
  input  logic [95:0]  iv_i,
  input  logic         decrypt_i,
  input  logic         key_valid_i,
  input  logic [255:0] key_i,
  output logic         start_err,
  output logic         busy,
  // blocks in
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [127:0] in_data,
  input  logic [4:0]   in_bytes,
  input  logic         in_aad,
  input  logic         in_last,
  // payload out
  output logic         out_valid,
  input  logic         out_ready,
  output logic [127:0] out_data,
  output logic [4:0]   out_bytes,
  // tag
  output logic         tag_valid,
  output logic [127:0] tag_o
);

  typedef enum logic [2:0] {S_IDLE, S_KEXP, S_H, S_J0, S_READY, S_DATA, S_LEN} state_e;
  state_e state;

  logic [127:0] rk [15];
  logic [3:0]   kr;           // next round key to generate
  logic [7:0]   rcon;
  logic [127:0] st;           // AES state
  logic [3:0]   rnd;          // AES round in progress
  logic [95:0]  iv;
  logic         dec;
  logic [31:0]  ctr;
  logic [127:0] h, ej0, x;
  logic [63:0]  len_a, len_c;
  logic [127:0] blk;          // masked input block being encrypted
  logic [4:0]   blk_bytes;
  logic         blk_last;

  // ---------------- key expansion: four words per cycle ----------------
  logic [31:0] w [8];
  logic [31:0] nw [4];
  logic [31:0] t;
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      w[i]     = rk[kr - 4'd2][127 - 32 * i -: 32];
      w[i + 4] = rk[kr - 4'd1][127 - 32 * i -: 32];
    end
    if (!kr[0]) t = sub_word({w[7][23:0], w[7][31:24]}) ^ {rcon, 24'h0};
    else        t = sub_word(w[7]);
    nw[0] = w[0] ^ t;
    nw[1] = w[1] ^ nw[0];
    nw[2] = w[2] ^ nw[1];
    nw[3] = w[3] ^ nw[2];
  end

  // ---------------- one AES round ----------------
  logic [127:0] round_out;
  always_comb begin
    if (rnd == 4'd14) round_out = shift_rows(sub_bytes(st)) ^ rk[14];
    else              round_out = mix_columns(shift_rows(sub_bytes(st))) ^ rk[rnd];
  end
  wire aes_done = (rnd == 4'd14);

  function automatic logic [127:0] byte_mask(input logic [4:0] n);
    return (n == 5'd0) ? '0 : ~({128{1'b1}} >> (8 * n));
  endfunction

  wire [127:0] in_masked = in_data & byte_mask(in_bytes);
  wire [127:0] ks_out    = (round_out ^ blk) & byte_mask(blk_bytes);   // output of the XOR
  wire [127:0] c_hash    = dec ? blk : ks_out;                        // ciphertext

  assign in_ready = (state == S_READY) && !out_valid;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      for (int i = 0; i < 15; i++) rk[i] <= '0;
      kr <= '0; rcon <= '0; st <= '0; rnd <= '0; iv <= '0; dec <= 1'b0; ctr <= '0;
      h <= '0; ej0 <= '0; x <= '0; len_a <= '0; len_c <= '0;
      blk <= '0; blk_bytes <= '0; blk_last <= 1'b0;
      out_valid <= 1'b0; out_data <= '0; out_bytes <= '0;
      tag_valid <= 1'b0; tag_o <= '0; start_err <= 1'b0;
    end else begin
      start_err <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (state != S_IDLE && state != S_KEXP && rnd != 4'd0 && !aes_done) begin
        st  <= round_out;
        rnd <= rnd + 4'd1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          if (!key_valid_i) start_err <= 1'b1;
          else begin
            rk[0] <= key_i[255:128];
            rk[1] <= key_i[127:0];
            kr    <= 4'd2;
            rcon  <= 8'h01;
            iv    <= iv_i;
            dec   <= decrypt_i;
            tag_valid <= 1'b0;
            state <= S_KEXP;
          end
        end
        S_KEXP: begin
          rk[kr] <= {nw[0], nw[1], nw[2], nw[3]};
          if (!kr[0]) rcon <= xtime(rcon);
          kr <= kr + 4'd1;
          if (kr == 4'd14) begin          // E(0): H
            st    <= '0 ^ rk[0];
            rnd   <= 4'd1;
            state <= S_H;
          end
        end
        S_H: if (aes_done) begin
          h     <= round_out;
          st    <= {iv, 32'd1} ^ rk[0];
          rnd   <= 4'd1;
          state <= S_J0;
        end
        S_J0: if (aes_done) begin
          ej0   <= round_out;
          ctr   <= 32'd2;
          x     <= '0;
          len_a <= '0;
          len_c <= '0;
          rnd   <= 4'd0;
          state <= S_READY;
        end
        S_READY: if (in_valid && in_ready) begin
          if (in_aad || in_bytes == 5'd0) begin
            if (in_bytes != 5'd0) begin
              x     <= gf128_mul(x ^ in_masked, h);
              len_a <= len_a + 64'(8 * in_bytes);
            end
            if (in_last) state <= S_LEN;
          end else begin
            blk       <= in_masked;
            blk_bytes <= in_bytes;
            blk_last  <= in_last;
            st        <= {iv, ctr} ^ rk[0];
            ctr       <= ctr + 32'd1;
            rnd       <= 4'd1;
            state     <= S_DATA;
          end
        end
        S_DATA: if (aes_done) begin
          out_valid <= 1'b1;
          out_data  <= ks_out;
          out_bytes <= blk_bytes;
          x         <= gf128_mul(x ^ c_hash, h);
          len_c     <= len_c + 64'(8 * blk_bytes);
          rnd       <= 4'd0;
          state     <= blk_last ? S_LEN : S_READY;
        end
        S_LEN: begin
          tag_o     <= gf128_mul(x ^ {len_a, len_c}, h) ^ ej0;
          tag_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A payload block waits in out_* until it is taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
