// hmac_drbg: HMAC-DRBG (NIST SP 800-90A) with SHA2-256, as in paper Fig. 16.
//
// Instantiate (pulse `inst`, 32-byte `seed`):
//   K = 0x00..00, V = 0x01..01, K = HMAC(K, V||00||seed), V = HMAC(K, V),
//   K = HMAC(K, V||01||seed), V = HMAC(K, V).
// Generate (pulse `gen`), one 256-bit output per call, as the DTLS handshake
// needs (client random and the ECDHE and ECDSA scalars):
//   V = HMAC(K, V) -> rnd, K = HMAC(K, V||00), V = HMAC(K, V).
// The working state K, V is visible on k_out/v_out and can be restored with
// `load` (k_in, v_in), so the caller can keep it in the micro stack between
// uses as the paper does. Each step is one HMAC whose message is built from V,
// an optional separator byte and the optional seed; `done` pulses at the end
// of the command. No additional input and no reseed counter are implemented
// (the paper notes that one seeding lasts the life of the device).
//
// Lint: the HMAC unit's busy output is unused; the sequencer waits for done.
module hmac_drbg
  import dtls_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         inst,
  input  logic [255:0] seed,
  input  logic         gen,
  input  logic         load,
  input  logic [255:0] k_in,
  input  logic [255:0] v_in,
  output logic         busy,
  output logic         done,
  output logic [255:0] rnd,
  output logic [255:0] k_out,
  output logic [255:0] v_out,
  output sha_req_t     sha_req,
  input  sha_rsp_t     sha_rsp
);

  logic [255:0] K, V, seed_r;
  logic [2:0]   step;       // step within the command
  logic         is_gen, running, hm_go;
  logic [6:0]   j;          // message byte index

  // Step table: target (1 = K), separator present, separator value, seed present.
  logic tgt_k, has_sep, sep, has_seed, is_out, last_step;
  always_comb begin
    tgt_k = 1'b0; has_sep = 1'b0; sep = 1'b0; has_seed = 1'b0; is_out = 1'b0; last_step = 1'b0;
    if (!is_gen) begin
      case (step)
        3'd0: begin tgt_k = 1'b1; has_sep = 1'b1; sep = 1'b0; has_seed = 1'b1; end
        3'd1: ;
        3'd2: begin tgt_k = 1'b1; has_sep = 1'b1; sep = 1'b1; has_seed = 1'b1; end
        default: last_step = 1'b1;
      endcase
    end else begin
      case (step)
        3'd0: is_out = 1'b1;
        3'd1: begin tgt_k = 1'b1; has_sep = 1'b1; sep = 1'b0; end
        default: last_step = 1'b1;
      endcase
    end
  end

  logic [6:0] mlen;
  logic [7:0] mbyte;
  logic [4:0] sj;             // seed byte index
  assign sj = 5'(j - 7'd33);
  always_comb begin
    mlen = 7'd32 + (has_sep ? 7'd1 : 7'd0) + (has_seed ? 7'd32 : 7'd0);
    if (j < 32)       mbyte = V[255 - 8*j[4:0] -: 8];
    else if (j == 32) mbyte = {7'b0, sep};
    else              mbyte = seed_r[255 - 8*sj -: 8];
  end

  logic hm_busy, hm_done, hm_ready;
  logic [255:0] hm_mac;
  hmac_sha256 u_hmac (.clk, .rst_n, .start(hm_go), .key(K), .msg_valid(running),
                      .msg_byte(mbyte), .msg_last(j == mlen - 7'd1), .msg_ready(hm_ready),
                      .busy(hm_busy), .done(hm_done), .mac(hm_mac), .sha_req, .sha_rsp);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      K <= '0; V <= '0; seed_r <= '0; step <= '0; is_gen <= 1'b0; running <= 1'b0;
      hm_go <= 1'b0; j <= '0; busy <= 1'b0; done <= 1'b0; rnd <= '0;
    end else begin
      done  <= 1'b0;
      hm_go <= 1'b0;
      if (!busy) begin
        if (load) begin K <= k_in; V <= v_in; end
        if (inst) begin
          K <= '0; V <= {32{8'h01}}; seed_r <= seed; is_gen <= 1'b0;
          step <= '0; busy <= 1'b1; hm_go <= 1'b1; j <= '0;
        end else if (gen) begin
          is_gen <= 1'b1; step <= '0; busy <= 1'b1; hm_go <= 1'b1; j <= '0;
        end
      end else begin
        if (hm_go) running <= 1'b1;
        if (running && hm_ready) begin
          j <= j + 7'd1;
          if (j == mlen - 7'd1) running <= 1'b0;
        end
        if (hm_done) begin
          if (tgt_k) K <= hm_mac; else V <= hm_mac;
          if (is_out) rnd <= hm_mac;
          if (last_step) begin
            busy <= 1'b0; done <= 1'b1;
          end else begin
            step <= step + 3'd1; hm_go <= 1'b1; j <= '0;
          end
        end
      end
    end
  end

  assign k_out = K;
  assign v_out = V;

endmodule
