// sha256_core: SHA2-256 hash core with a byte-wide message input.
//
// Message bytes arrive one per cycle (req.din_valid && rsp.din_ready) and are
// shifted into a 512-bit block buffer while a byte counter tracks the message
// length, as the paper describes. When 64 bytes are buffered the core runs the
// round function of Fig. 9: 64 rounds, one per cycle, each computing all of
// a'..h' at once, plus one cycle that adds a..h into H0..H7, i.e. 65 cycles
// per 512-bit block (the paper's figure). The message schedule is a 16-word
// sliding window that produces W_t one per round.
//
// req.finish starts padding: the core appends 0x80, zeros and the 64-bit bit
// length itself, one byte per cycle, digests the last block(s) and pulses
// rsp.done with the digest in rsp.h_out. req.load restores H0..H7 and the byte
// count of an earlier partial computation (the paper's running hash: H0..H7
// alone define the state after each whole block). Padding one byte per cycle
// and the state-restore port are choices of this design.
//
// Lint: the top byte of the shifted block register is never read, because
// a full block is consumed by the rounds, not shifted further.
module sha256_core
  import dtls_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  sha_req_t req,
  output sha_rsp_t rsp
);

  typedef enum logic [1:0] {S_IN, S_PAD, S_RND} state_e;
  state_e state;

  logic [31:0]  H [8];
  logic [31:0]  s [8];            // a..h
  logic [31:0]  w [16];
  logic [511:0] blk;
  logic [5:0]   cnt;              // bytes in the block buffer
  logic [6:0]   rnd;
  logic [63:0]  len;              // message bytes
  logic [63:0]  bitlen;
  logic         padding, sent80, lenout, zfill, done_q;

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] S0, S1, ch, maj, t1, t2, wnew, kt;
  always_comb begin
    kt   = SHA256_K[rnd[5:0]];
    S1   = rotr(s[4], 6) ^ rotr(s[4], 11) ^ rotr(s[4], 25);
    ch   = (s[4] & s[5]) ^ (~s[4] & s[6]);
    t1   = s[7] + S1 + ch + kt + w[0];
    S0   = rotr(s[0], 2) ^ rotr(s[0], 13) ^ rotr(s[0], 22);
    maj  = (s[0] & s[1]) ^ (s[0] & s[2]) ^ (s[1] & s[2]);
    t2   = S0 + maj;
    wnew = (rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10)) + w[9] +
           (rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3)) + w[0];
  end

  // Byte appended while padding.
  logic [7:0] pad_byte;
  always_comb begin
    if (!sent80)        pad_byte = 8'h80;
    else if (cnt < 56 || zfill) pad_byte = 8'h00;
    else                pad_byte = bitlen[8*(7 - (cnt - 6'd56)) +: 8];
  end

  logic       take;
  logic [7:0] byte_in;
  assign take    = (state == S_IN && req.din_valid && !padding) || state == S_PAD;
  assign byte_in = (state == S_PAD) ? pad_byte : req.din;

  logic [511:0] blk_next;
  assign blk_next = {blk[503:0], byte_in};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IN; cnt <= '0; rnd <= '0; len <= '0; bitlen <= '0;
      padding <= 1'b0; sent80 <= 1'b0; lenout <= 1'b0; blk <= '0;
      for (int i = 0; i < 8; i++) begin H[i] <= SHA256_IV[255-32*i -: 32]; s[i] <= '0; end
      for (int i = 0; i < 16; i++) w[i] <= '0;
      done_q <= 1'b0; zfill <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (req.init && state == S_IN) begin
        for (int i = 0; i < 8; i++) H[i] <= SHA256_IV[255-32*i -: 32];
        len <= '0; cnt <= '0;
      end else if (req.load && state == S_IN) begin
        for (int i = 0; i < 8; i++) H[i] <= req.h_in[255-32*i -: 32];
        len <= req.len_in; cnt <= '0;
      end else if (req.finish && state == S_IN) begin
        padding <= 1'b1; sent80 <= 1'b0; lenout <= 1'b0; zfill <= 1'b0;
        bitlen  <= {len[60:0], 3'b000};
        state   <= S_PAD;
      end else begin
        case (state)
          S_IN, S_PAD: if (take) begin
            blk <= blk_next;
            cnt <= cnt + 6'd1;
            if (state == S_IN) len <= len + 64'd1;
            if (state == S_PAD) begin
              sent80 <= 1'b1;
              if (!sent80 && cnt > 6'd55) zfill <= 1'b1;
              if (sent80 && !zfill && cnt == 6'd63) lenout <= 1'b1;
            end
            if (cnt == 6'd63) begin
              for (int i = 0; i < 16; i++) w[i] <= blk_next[511-32*i -: 32];
              for (int i = 0; i < 8; i++)  s[i] <= H[i];
              rnd   <= '0;
              zfill <= 1'b0;
              state <= S_RND;
            end
          end
          S_RND: begin
            if (rnd == 7'd64) begin
              for (int i = 0; i < 8; i++) H[i] <= H[i] + s[i];
              if (padding && lenout) begin
                padding  <= 1'b0;
                done_q   <= 1'b1;
                state    <= S_IN;
              end else begin
                state <= padding ? S_PAD : S_IN;
              end
            end else begin
              s[0] <= t1 + t2; s[1] <= s[0]; s[2] <= s[1]; s[3] <= s[2];
              s[4] <= s[3] + t1; s[5] <= s[4]; s[6] <= s[5]; s[7] <= s[6];
              for (int i = 0; i < 15; i++) w[i] <= w[i+1];
              w[15] <= wnew;
              rnd   <= rnd + 7'd1;
            end
          end
          default: state <= S_IN;
        endcase
      end
    end
  end

  always_comb begin
    rsp.din_ready = (state == S_IN) && !padding;
    rsp.busy      = (state != S_IN) || padding;
    rsp.len_out   = len;
    rsp.done      = done_q;
    for (int i = 0; i < 8; i++) rsp.h_out[255-32*i -: 32] = H[i];
  end

endmodule
