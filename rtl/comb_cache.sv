// comb_cache: the ECC comb point cache, a 4 KB single-port synchronous RAM.
//
// 128 words of 256 bits. The ECSM unit keeps, for each of up to six base
// points, the eight pre-computed comb points plus P and 2P (20 words per
// slot), and uses the last eight words as scratch while pre-computing. The
// 4 KB size and the six slots are the paper's; the word layout is this
// design's. A read returns data one cycle after the address (SRAM timing);
// a write happens on the clock edge with `we`.
module comb_cache #(
  parameter int W     = 256,
  parameter int WORDS = 128
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);

  logic [W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      rdata <= mem[addr];
    end
  end

endmodule
