// ghash_mult: GF(2^128) multiplier for GHASH, built from NH "h" stages.
//
// Each h stage (paper Fig. 8a) takes one bit x_i of X, most significant
// first, and computes Z' = Z ^ (x_i ? V : 0) and V' = (V >> 1) ^
// (LSB(V) ? 11100001||0^120 : 0). NH stages are chained per cycle and X is
// shifted left by NH, so a product takes 128/NH cycles: 32 cycles for the
// paper's choice NH = 4. The cycle that takes `start` already applies the
// first NH stages to the inputs; `done` is high, and `z` holds X*Y, 128/NH
// cycles after start. Bit order is that of GCM: bit 0 of a block (its first,
// leftmost bit) is bit [127] here.
module ghash_mult #(
  parameter int NH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] x,
  input  logic [127:0] y,
  output logic         busy,
  output logic         done,
  output logic [127:0] z
);

  localparam int CYCLES = 128 / NH;
  localparam logic [127:0] R = {8'b11100001, 120'b0};

  logic [127:0] xr, vr;
  logic [$clog2(CYCLES+1)-1:0] cnt;

  // NH chained h stages.
  function automatic logic [383:0] hstages(input logic [127:0] zi, input logic [127:0] vi,
                                           input logic [127:0] xi);
    logic [127:0] zz, vv, xx;
    zz = zi; vv = vi; xx = xi;
    for (int s = 0; s < NH; s++) begin
      if (xx[127]) zz = zz ^ vv;
      vv = (vv >> 1) ^ (vv[0] ? R : 128'b0);
      xx = xx << 1;
    end
    return {zz, vv, xx};
  endfunction

  logic [383:0] nxt;
  always_comb begin
    if (start && !busy) nxt = hstages(128'b0, y, x);
    else                nxt = hstages(z, vr, xr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z <= '0; vr <= '0; xr <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        {z, vr, xr} <= nxt;
        cnt  <= 1;
        busy <= (CYCLES > 1);
        done <= (CYCLES == 1);
      end else if (busy) begin
        {z, vr, xr} <= nxt;
        cnt <= cnt + 1'b1;
        if (cnt == $bits(cnt)'(CYCLES - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
