// hmac_sha256: HMAC-SHA256 front end for the shared SHA2-256 core.
//
// HMAC(K, m) = H((K ^ opad) || H((K ^ ipad) || m)) with ipad = 0x36 and
// opad = 0x5C repeated (paper Fig. 16). The key (up to 32 bytes, zero-filled
// to the 64-byte block; DTLS keys are 32 bytes, so the "hash a long key" case
// is not needed) sits in a register and its bytes are shifted out to the hash
// through the three-way byte mux of Fig. 16: in ^ 0x36, in ^ 0x5C or in
// unchanged. The message streams in byte by byte (msg_valid/msg_ready,
// msg_last on the final byte; at least one byte). The inner digest is held in
// a register and fed to the outer pass. `done` pulses with `mac`.
// The SHA2-256 core is outside this module (sha_req/sha_rsp) so that other
// users can share it between HMAC computations.
//
// Lint: the SHA core's length output and busy flag are unused; HMAC only
// needs din_ready, done and the digest.
//
// The restore fields of sha_req (load, h_in, len_in) are always 0: an HMAC
// always starts from the SHA2-256 initial value.
module hmac_sha256
  import dtls_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [255:0] key,
  input  logic         msg_valid,
  input  logic [7:0]   msg_byte,
  input  logic         msg_last,
  output logic         msg_ready,
  output logic         busy,
  output logic         done,
  output logic [255:0] mac,
  output sha_req_t     sha_req,
  input  sha_rsp_t     sha_rsp
);

  typedef enum logic [3:0] {H_IDLE, H_IINIT, H_IKEY, H_MSG, H_IFIN, H_IWAIT,
                            H_OINIT, H_OKEY, H_OHASH, H_OFIN, H_OWAIT} hstate_e;
  typedef enum logic [1:0] {SEL_IPAD, SEL_OPAD, SEL_PLAIN} sel_e;
  hstate_e      st;
  logic [255:0] key_r, inner;
  logic [6:0]   n;

  // Byte mux of Fig. 16.
  sel_e       sel;
  logic [7:0] src, hbyte;
  always_comb begin
    case (st)
      H_IKEY:  begin sel = SEL_IPAD;  src = (n < 32) ? key_r[255 - 8*n[4:0] -: 8] : 8'h00; end
      H_OKEY:  begin sel = SEL_OPAD;  src = (n < 32) ? key_r[255 - 8*n[4:0] -: 8] : 8'h00; end
      H_OHASH: begin sel = SEL_PLAIN; src = inner[255 - 8*n[4:0] -: 8]; end
      default: begin sel = SEL_PLAIN; src = msg_byte; end
    endcase
    case (sel)
      SEL_IPAD: hbyte = src ^ 8'h36;
      SEL_OPAD: hbyte = src ^ 8'h5c;
      default:  hbyte = src;
    endcase
  end

  always_comb begin
    sha_req           = SHA_REQ_IDLE;
    sha_req.init      = (st == H_IINIT || st == H_OINIT);
    sha_req.finish    = (st == H_IFIN || st == H_OFIN) && sha_rsp.din_ready;
    sha_req.din       = hbyte;
    sha_req.din_valid = (st == H_IKEY || st == H_OKEY || st == H_OHASH) || (st == H_MSG && msg_valid);
    msg_ready         = (st == H_MSG) && sha_rsp.din_ready;
  end

  logic acc;
  assign acc = sha_req.din_valid && sha_rsp.din_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_IDLE; key_r <= '0; inner <= '0; n <= '0; done <= 1'b0; mac <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        H_IDLE:  if (start) begin key_r <= key; st <= H_IINIT; end
        H_IINIT: begin n <= '0; st <= H_IKEY; end
        H_IKEY:  if (acc) begin n <= n + 7'd1; if (n == 7'd63) st <= H_MSG; end
        H_MSG:   if (acc && msg_last) st <= H_IFIN;
        H_IFIN:  if (sha_req.finish) st <= H_IWAIT;
        H_IWAIT: if (sha_rsp.done) begin inner <= sha_rsp.h_out; st <= H_OINIT; end
        H_OINIT: begin n <= '0; st <= H_OKEY; end
        H_OKEY:  if (acc) begin n <= n + 7'd1; if (n == 7'd63) begin n <= '0; st <= H_OHASH; end end
        H_OHASH: if (acc) begin n <= n + 7'd1; if (n == 7'd31) st <= H_OFIN; end
        H_OFIN:  if (sha_req.finish) st <= H_OWAIT;
        H_OWAIT: if (sha_rsp.done) begin mac <= sha_rsp.h_out; done <= 1'b1; st <= H_IDLE; end
        default: st <= H_IDLE;
      endcase
    end
  end

  assign busy = (st != H_IDLE);

endmodule
