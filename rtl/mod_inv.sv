// mod_inv: prime-field inverter using the binary extended Euclidean algorithm.
//
// Computes z = a^-1 mod p with only additions, subtractions and one-bit
// shifts (Hankerson, Menezes, Vanstone, Alg. 2.22), the paper's dedicated
// Euclid inverter built on full-width adders. Invariants: x1*a = u and
// x2*a = v (mod p), starting from u = a, v = p, x1 = 1, x2 = 0. Each cycle
// does one step: halve u (and x1 mod p) if u is even, else halve v (and x2)
// if v is even, else subtract the smaller of u, v from the larger (and the
// matching x). It stops when u or v reaches 1. For a 256-bit prime this takes
// roughly 700 cycles (paper: about 720), depending on the operand. a = 0 has
// no inverse and returns 0 at once. p must be an odd prime and a < p.
//
// Lint: bit 0 of the halving helper's input is dropped by design (it is
// the bit shifted out).
module mod_inv #(
  parameter int W = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] p,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] z
);

  logic [W-1:0] u, v, x1, x2, pr;

  // (x / 2) mod p for odd p.
  function automatic logic [W-1:0] half(input logic [W-1:0] x, input logic [W-1:0] pp);
    logic [W:0] s;
    s = x[0] ? ({1'b0, x} + {1'b0, pp}) : {1'b0, x};
    return s[W:1];
  endfunction

  // (x - y) mod p for x, y < p.
  function automatic logic [W-1:0] msub(input logic [W-1:0] x, input logic [W-1:0] y,
                                        input logic [W-1:0] pp);
    logic [W:0] d;
    d = {1'b0, x} - {1'b0, y};
    return d[W] ? (d[W-1:0] + pp) : d[W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; v <= '0; x1 <= '0; x2 <= '0; pr <= '0; busy <= 1'b0; done <= 1'b0; z <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        if (a == '0) begin
          z <= '0; done <= 1'b1;
        end else begin
          u <= a; v <= p; x1 <= W'(1); x2 <= '0; pr <= p; busy <= 1'b1;
        end
      end else if (busy) begin
        if (u == W'(1) || v == W'(1)) begin
          z    <= (u == W'(1)) ? x1 : x2;
          busy <= 1'b0;
          done <= 1'b1;
        end else if (!u[0]) begin
          u  <= u >> 1;
          x1 <= half(x1, pr);
        end else if (!v[0]) begin
          v  <= v >> 1;
          x2 <= half(x2, pr);
        end else if (u >= v) begin
          u  <= u - v;
          x1 <= msub(x1, x2, pr);
        end else begin
          v  <= v - u;
          x2 <= msub(x2, x1, pr);
        end
      end
    end
  end

endmodule
