// data_mem: the processor's 64 KB data memory, a single-port synchronous RAM.
//
// 16384 words of 32 bits, addressed by byte address (the low two bits select
// nothing: accesses are whole words with per-byte write enables, as an RV32I
// load/store unit needs for SB/SH/SW). With `en` high, a read returns the
// word one cycle later on `rdata`; a write stores the enabled bytes on the
// clock edge and also returns the word's old contents.
// The size is the paper's; the port shape and the read-during-write
// behaviour (old data) are this design's. The memory runs on the processor
// clock, so WFI stops it together with the processor, as the paper's
// sleep mode does.
// Lint: addr[1:0] is unused because accesses are whole words.
module data_mem #(
  parameter int BYTES = 65536
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic [3:0]               we,
  input  logic [$clog2(BYTES)-1:0] addr,
  input  logic [31:0]              wdata,
  output logic [31:0]              rdata
);

  localparam int WORDS = BYTES / 4;
  logic [31:0] mem [WORDS];
  logic [$clog2(WORDS)-1:0] wa;
  assign wa = addr[$clog2(BYTES)-1:2];

  always_ff @(posedge clk) begin
    if (en) begin
      for (int b = 0; b < 4; b++)
        if (we[b]) mem[wa][8*b +: 8] <= wdata[8*b +: 8];
      rdata <= mem[wa];
    end
  end

endmodule
