// aes_gcm: AES-128-GCM authenticated encryption and decryption.
//
// One AES-128 core (11 cycles per block) and one GHASH multiplier (32 cycles
// per block, NH = 4) run in parallel, as in the paper: while block i is being
// hashed, the AES core already encrypts the counter for block i+1, so each
// 128-bit block of associated data (AAD) or text costs 32 cycles. The fixed
// overhead is 11 cycles for the hash key H = E(K, 0^128), 11 cycles for the
// first key-stream block (or E(K, J0) when there is no text) and 32 cycles for
// hashing the length block; E(K, J0) for the tag is computed during the
// hashing of the last text block. A message of m AAD blocks and n text blocks
// therefore takes 54 + 32(m+n) cycles from `start` to `done`, the paper's
// figure, as long as input blocks are offered in time.
//
// Interface: pulse `start` with key, 96-bit IV, the AAD and text lengths in
// bytes, the mode and (for decryption) the expected tag. Blocks, AAD first,
// are taken on in_valid && in_ready; a partial last block is zero-filled on
// the right. Each text block produces out_valid/out_data one cycle later
// (bytes past the end are zero). `done` pulses with `tag` and, for
// decryption, `tag_ok`. Only 96-bit IVs are supported (J0 = IV || 0^31 || 1),
// which is what DTLS uses; that restriction is this design's choice.
//
// Lint: the AES core's busy output is unused; the sequencer counts on its
// fixed 11-cycle latency and waits for done.
module aes_gcm (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         decrypt,
  input  logic [127:0] key,
  input  logic [95:0]  iv,
  input  logic [15:0]  aad_len,
  input  logic [15:0]  txt_len,
  input  logic [127:0] tag_in,
  input  logic         in_valid,
  input  logic [127:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [127:0] out_data,
  output logic         busy,
  output logic         done,
  output logic [127:0] tag,
  output logic         tag_ok
);

  typedef enum logic [2:0] {G_IDLE, G_H, G_PRE, G_BLK, G_LEN} gstate_e;
  gstate_e st;

  logic [127:0] k_r, h_r, ks_r, ej0_r, tagin_r;
  logic [95:0]  iv_r;
  logic [15:0]  aadl_r, txtl_r;
  logic         dec_r, first_r;
  logic [12:0]  m_blk, n_blk, idx;   // blocks of AAD, text; next block index
  logic [31:0]  ctr;                 // counter of the next AES key-stream block

  // AES core.
  logic         aes_start, aes_busy, aes_done;
  logic [127:0] aes_in, aes_out;
  aes128_core u_aes (.clk, .rst_n, .start(aes_start), .key((st == G_IDLE) ? key : k_r), .din(aes_in),
                     .busy(aes_busy), .done(aes_done), .dout(aes_out));

  // GHASH multiplier.
  logic         gh_start, gh_busy, gh_done;
  logic [127:0] gh_x, gh_z;
  ghash_mult #(.NH(4)) u_gh (.clk, .rst_n, .start(gh_start), .x(gh_x), .y(h_r),
                             .busy(gh_busy), .done(gh_done), .z(gh_z));

  // The key-stream block is used in the same cycle the AES result appears.
  logic [127:0] ks_now;
  assign ks_now = (st == G_PRE && aes_done) ? aes_out : ks_r;

  // A block step can start when the previous multiply has finished.
  logic step, is_aad, is_len, take;
  logic [15:0]  rem;
  logic [127:0] mask, blk_in, c_blk, res_blk;
  always_comb begin
    step   = (st == G_PRE && aes_done) || (st == G_BLK && !gh_busy);
    is_len = (idx == m_blk + n_blk);
    is_aad = (idx < m_blk);
    // bytes of this block that are part of the message
    rem    = is_aad ? aadl_r - 16'({idx, 4'b0000}) : txtl_r - 16'({idx - m_blk, 4'b0000});
    mask   = (rem >= 16) ? '1 : ~({128{1'b1}} >> (8 * rem));
    blk_in  = in_data & mask;
    res_blk = (in_data ^ ks_now) & mask;          // ciphertext or plaintext
    c_blk   = dec_r ? blk_in : res_blk;           // GHASH always sees ciphertext
    take    = step && !is_len && in_valid;
    in_ready = step && !is_len;
    gh_start = (step && is_len) || take;
    if (is_len) gh_x = (first_r ? 128'b0 : gh_z) ^ {45'b0, aadl_r, 3'b000, 45'b0, txtl_r, 3'b000};
    else        gh_x = (first_r ? 128'b0 : gh_z) ^ (is_aad ? blk_in : c_blk);
  end

  // AES scheduling: H first, then the first key-stream block (or J0), then
  // during each text block the next counter block, and J0 during the last.
  logic text_take, last_text;
  always_comb begin
    text_take = take && !is_aad;
    last_text = (idx == m_blk + n_blk - 1);
    aes_start = 1'b0;
    aes_in    = '0;
    if (st == G_IDLE && start) begin
      aes_start = 1'b1; aes_in = '0;
    end else if (st == G_H && aes_done) begin
      aes_start = 1'b1;
      aes_in    = (n_blk == 0) ? {iv_r, 32'd1} : {iv_r, 32'd2};
    end else if (text_take) begin
      aes_start = 1'b1;
      aes_in    = last_text ? {iv_r, 32'd1} : {iv_r, ctr};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; k_r <= '0; h_r <= '0; ks_r <= '0; ej0_r <= '0; tagin_r <= '0;
      iv_r <= '0; aadl_r <= '0; txtl_r <= '0; dec_r <= 1'b0; first_r <= 1'b1;
      m_blk <= '0; n_blk <= '0; idx <= '0; ctr <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= 1'b0;
      case (st)
        G_IDLE: if (start) begin
          k_r <= key; iv_r <= iv; aadl_r <= aad_len; txtl_r <= txt_len; dec_r <= decrypt;
          tagin_r <= tag_in;
          m_blk <= 13'((aad_len + 16'd15) >> 4);
          n_blk <= 13'((txt_len + 16'd15) >> 4);
          idx <= '0; first_r <= 1'b1; ctr <= 32'd3;
          st <= G_H;
        end
        G_H: if (aes_done) begin
          h_r <= aes_out;
          st  <= G_PRE;
        end
        G_PRE, G_BLK: begin
          if (st == G_PRE && aes_done) begin
            if (n_blk == 0) ej0_r <= aes_out; else ks_r <= aes_out;
          end
          if (st == G_BLK && aes_done) begin
            if (idx == m_blk + n_blk) ej0_r <= aes_out; else ks_r <= aes_out;
          end
          if (step) st <= G_BLK;
          if (gh_start) begin
            first_r <= 1'b0;
            idx     <= idx + 13'd1;
            if (is_len) st <= G_LEN;
          end
          if (text_take) begin
            out_valid <= 1'b1;
            out_data  <= res_blk;
            ctr       <= ctr + 32'd1;
          end
        end
        G_LEN: begin
          if (aes_done) ej0_r <= aes_out;
          if (gh_done) st <= G_IDLE;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  assign busy   = (st != G_IDLE);
  assign done   = (st == G_LEN) && gh_done;
  assign tag    = gh_z ^ ej0_r;
  assign tag_ok = (tag == tagin_r);

endmodule
