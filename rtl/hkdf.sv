// hkdf: HKDF (RFC 5869) with HMAC-SHA256, the key-derivation function of the
// DTLS 1.3 key schedule (paper Sec. V-B1, Fig. 17).
//
// Two operations, each one HMAC through hmac_sha256 and the shared SHA2-256
// core:
//   extract  PRK  = HMAC(salt, IKM)                   (32-byte salt and IKM)
//   expand   T[k] = HMAC(PRK, T[k-1] || info || k)    one 32-byte block
// For expand, T[k-1] is included only when use_prev is set (T[0] is empty),
// info is 0..64 bytes (the first info_len bytes of `info`, leftmost byte
// first) and k is the one-byte block counter `ctr`. A longer output is made
// by calling expand again with the previous block and k+1; the key schedule
// only ever needs one block (secrets of 32 bytes, keys of 16 and IVs of 12
// bytes are prefixes of T[1]). Derive-Secret is an expand whose info is the
// TLS 1.3 label structure: length 0x0020, the label "tls13 ..." and the
// transcript hash; building that info is left to the caller.
//
// Interface: pulse `extract` or `expand` with the operands while !busy;
// `done` pulses when `out` holds the 256-bit result. One operation takes
// about (64 + message bytes + 64 + 32 + 2 x 65-cycle blocks) cycles.
// The paper defines the algorithm; the operand limits and interface are this
// design's.
module hkdf
  import dtls_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         extract,
  input  logic         expand,
  input  logic [255:0] salt,      // extract: HMAC key
  input  logic [255:0] ikm,       // extract: input keying material
  input  logic [255:0] prk,       // expand: pseudo-random key
  input  logic [255:0] t_prev,    // expand: previous output block
  input  logic         use_prev,  // expand: include t_prev
  input  logic [511:0] info,      // expand: context, leftmost byte in [511:504]
  input  logic [6:0]   info_len,  // expand: info bytes, 0..64
  input  logic [7:0]   ctr,       // expand: block counter k
  output logic         busy,
  output logic         done,
  output logic [255:0] out,
  output sha_req_t     sha_req,
  input  sha_rsp_t     sha_rsp
);

  logic [255:0] key_r, pre_r;
  logic [511:0] info_r;
  logic [6:0]   ilen_r;
  logic [7:0]   ctr_r;
  logic         pre_en, ctr_en, running, hm_go;
  logic [7:0]   j, mlen;

  // message byte j: prefix (32 bytes if used), info, counter byte
  logic [7:0] plen, mbyte, ij;
  logic [4:0] pj;
  assign plen = pre_en ? 8'd32 : 8'd0;
  assign mlen = plen + 8'(ilen_r) + (ctr_en ? 8'd1 : 8'd0);
  assign pj   = 5'(j);
  assign ij   = j - plen;
  always_comb begin
    if (j < plen)                     mbyte = pre_r[255 - 8*pj -: 8];
    else if (ij < 8'(ilen_r))         mbyte = info_r[511 - 8*ij[5:0] -: 8];
    else                              mbyte = ctr_r;
  end

  logic hm_busy, hm_done, hm_ready;
  logic [255:0] hm_mac;
  hmac_sha256 u_hmac (.clk, .rst_n, .start(hm_go), .key(key_r), .msg_valid(running),
                      .msg_byte(mbyte), .msg_last(j == mlen - 8'd1), .msg_ready(hm_ready),
                      .busy(hm_busy), .done(hm_done), .mac(hm_mac), .sha_req, .sha_rsp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_r <= '0; pre_r <= '0; info_r <= '0; ilen_r <= '0; ctr_r <= '0; pre_en <= 1'b0;
      ctr_en <= 1'b0; running <= 1'b0; hm_go <= 1'b0; j <= '0; busy <= 1'b0; done <= 1'b0;
      out <= '0;
    end else begin
      done  <= 1'b0;
      hm_go <= 1'b0;
      if (!busy) begin
        if (extract) begin
          key_r <= salt; pre_r <= ikm; pre_en <= 1'b1; ilen_r <= '0; ctr_en <= 1'b0;
          busy <= 1'b1; hm_go <= 1'b1; j <= '0;
        end else if (expand) begin
          key_r <= prk; pre_r <= t_prev; pre_en <= use_prev;
          info_r <= info; ilen_r <= (info_len > 7'd64) ? 7'd64 : info_len;
          ctr_r <= ctr; ctr_en <= 1'b1;
          busy <= 1'b1; hm_go <= 1'b1; j <= '0;
        end
      end else begin
        if (hm_go) running <= 1'b1;
        if (running && hm_ready) begin
          j <= j + 8'd1;
          if (j == mlen - 8'd1) running <= 1'b0;
        end
        if (hm_done) begin
          out <= hm_mac; busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  // Lint: the HMAC unit's busy output is unused; the sequencer waits for done.

endmodule
