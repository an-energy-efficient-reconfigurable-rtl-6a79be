// mod_mult: prime-field multiplier with interleaved reduction, also used for
// modular addition and subtraction.
//
// Multiplication scans b from its most significant bit, one bit per cycle
// (paper Fig. 10): z <- 2z + (b_i ? a : 0), followed by two conditional
// subtractions of p. 2z + a is below 3p, so the two subtractions (computed in
// series in the same cycle) always leave z in [0, p). Every cycle does the
// same work, so the time does not depend on the operands. The loop runs over
// the t = tlen bits of the configured prime, so a product takes tlen cycles:
// 256 for a 256-bit prime (paper Table III). Addition and subtraction reuse
// the same adders and take one cycle. The datapath is W bits wide; bits above
// the prime's length stay zero when a smaller prime is configured.
//
// Operands must be reduced (a, b < p). `done` pulses with z valid; start is
// ignored while busy.
//
// Lint: the top bit of p + difference is a carry that is not needed.
module mod_mult
  import dtls_pkg::*;
#(
  parameter int W = 256
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  fop_e                   op,       // FOP_MUL, FOP_ADD or FOP_SUB
  input  logic [W-1:0]           a,
  input  logic [W-1:0]           b,
  input  logic [W-1:0]           p,
  input  logic [$clog2(W+1)-1:0] tlen,     // bit length of p
  output logic                   busy,
  output logic                   done,
  output logic [W-1:0]           z
);

  localparam int BW = $clog2(W);   // bit index width

  logic [W-1:0] ar, br;
  logic [$clog2(W+1)-1:0] bit_i;

  // One step of the interleaved multiplication.
  function automatic logic [W-1:0] mstep(input logic [W-1:0] zi, input logic [W-1:0] ai,
                                         input logic bi, input logic [W-1:0] pi);
    logic [W+1:0] s, d1, d2;
    s  = {zi, 1'b0} + (bi ? {2'b00, ai} : '0);
    d1 = s - {2'b00, pi};
    d2 = d1 - {2'b00, pi};
    if (!d2[W+1])      return d2[W-1:0];
    else if (!d1[W+1]) return d1[W-1:0];
    else               return s[W-1:0];
  endfunction

  logic [W:0] sum, dif, sub, sub_p;
  always_comb begin
    sum   = {1'b0, a} + {1'b0, b};
    dif   = sum - {1'b0, p};
    sub   = {1'b0, a} - {1'b0, b};
    sub_p = sub + {1'b0, p};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ar <= '0; br <= '0; bit_i <= '0; busy <= 1'b0; done <= 1'b0; z <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        case (op)
          FOP_ADD: begin z <= dif[W] ? sum[W-1:0] : dif[W-1:0]; done <= 1'b1; end
          FOP_SUB: begin z <= sub[W] ? sub_p[W-1:0] : sub[W-1:0]; done <= 1'b1; end
          default: begin
            ar <= a; br <= b;
            z  <= mstep('0, a, b[BW'(tlen - 1'b1)], p);
            bit_i <= tlen - 1'b1;
            if (tlen == 1) done <= 1'b1;
            else           busy <= 1'b1;
          end
        endcase
      end else if (busy) begin
        z     <= mstep(z, ar, br[BW'(bit_i - 1'b1)], p);
        bit_i <= bit_i - 1'b1;
        if (bit_i == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
