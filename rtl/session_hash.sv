// session_hash: running SHA2-256 transcript of the DTLS handshake.
//
// Handshake bytes are pushed into a 64-byte FIFO. When it is full the unit
// borrows the shared SHA2-256 core: it restores the intermediate hash H0..H7
// and the digested length (sha_req.load), feeds the 64 bytes, and takes the
// new H0..H7 back once the block has been compressed. So the transcript is
// always digested in whole 64-byte blocks, and between blocks it is fully
// described by H0..H7, the digested length and the at most 63 un-hashed bytes
// (paper Fig. 18). `snap` produces the hash of everything pushed so far
// without disturbing the running state: restore, feed the un-hashed bytes,
// pad and finish. The SHA core is free for other work between operations.
// `clear` starts a new, empty transcript.
//
// The whole state is also available as one word (state_out) and can be
// reloaded (restore, state_in), for saving it to memory. In this design the
// state lives in these registers; in the paper it is copied to the micro
// stack after every session-hash operation.
//
// sha_req.init is always 0: the unit always restores its own state (load).
module session_hash
  import dtls_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         push_valid,
  input  logic [7:0]   push_byte,
  output logic         push_ready,
  input  logic         snap,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest,
  output logic [838:0] state_out,   // {H, length, FIFO bytes, count}
  input  logic         restore,
  input  logic [838:0] state_in,
  output sha_req_t     sha_req,
  input  sha_rsp_t     sha_rsp
);

  typedef enum logic [2:0] {T_IDLE, T_LOAD, T_FEED, T_WAIT_B, T_WAIT_I, T_FIN, T_WAIT_D} tstate_e;
  tstate_e      st;
  logic [255:0] H;
  logic [63:0]  hlen;
  logic [511:0] fifo;          // newest byte in bits [7:0]
  logic [6:0]   cnt;           // bytes in the FIFO, 0..64
  logic [6:0]   i;             // bytes fed to the core
  logic         snapping;

  logic [6:0] nfeed;
  assign nfeed = snapping ? cnt : 7'd64;

  // Oldest-first byte i of the FIFO content.
  logic [7:0] fbyte;
  assign fbyte = fifo[8*(cnt - 7'd1 - i) +: 8];

  always_comb begin
    sha_req           = SHA_REQ_IDLE;
    sha_req.load      = (st == T_LOAD);
    sha_req.h_in      = H;
    sha_req.len_in    = hlen;
    sha_req.din_valid = (st == T_FEED) && (i < nfeed);
    sha_req.din       = fbyte;
    sha_req.finish    = (st == T_FIN) && sha_rsp.din_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; H <= SHA256_IV; hlen <= '0; fifo <= '0; cnt <= '0; i <= '0;
      snapping <= 1'b0; done <= 1'b0; digest <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        T_IDLE: begin
          if (clear) begin
            H <= SHA256_IV; hlen <= '0; cnt <= '0;
          end else if (restore) begin
            {H, hlen, fifo, cnt} <= state_in;
          end else if (snap) begin
            snapping <= 1'b1; st <= T_LOAD;
          end else if (push_valid && cnt < 7'd64) begin
            fifo <= {fifo[503:0], push_byte};
            cnt  <= cnt + 7'd1;
            if (cnt == 7'd63) begin snapping <= 1'b0; st <= T_LOAD; end
          end
        end
        T_LOAD: begin i <= '0; st <= T_FEED; end
        T_FEED: begin
          if (sha_req.din_valid && sha_rsp.din_ready) i <= i + 7'd1;
          if (i == nfeed) st <= snapping ? T_FIN : T_WAIT_B;
        end
        T_WAIT_B: if (sha_rsp.busy) st <= T_WAIT_I;      // block being compressed
        T_WAIT_I: if (!sha_rsp.busy) begin
          H <= sha_rsp.h_out; hlen <= sha_rsp.len_out; cnt <= '0; st <= T_IDLE;
        end
        T_FIN:    if (sha_req.finish) st <= T_WAIT_D;
        T_WAIT_D: if (sha_rsp.done) begin
          digest <= sha_rsp.h_out; done <= 1'b1; st <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  assign push_ready = (st == T_IDLE) && (cnt < 7'd64) && !snap && !clear && !restore;
  assign busy       = (st != T_IDLE);
  assign state_out  = {H, hlen, fifo, cnt};

endmodule
