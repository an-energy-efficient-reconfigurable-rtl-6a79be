// dtls_ram: the 2 KB DTLS RAM with its three regions (paper Sec. V-A, Fig. 15).
//
// 512 words of 32 bits. Words 0..114 (460 B) are the DTLS config memory (keys,
// certificate details, PSK, DRBG seed), words 115..191 (308 B) the
// accelerator config memory, and words 192..511 (1280 B) the DTLS micro
// stack. The sizes 0.45 KB, 0.3 KB and 1.25 KB are the paper's; the word
// boundaries are this design's. Port A is the memory-mapped (software) port:
// the micro stack is invisible there, reads of it return 0 and writes to it
// are dropped, so session keys cannot be read by software. Port B belongs to
// the DTLS engine and reaches every word. Both ports read synchronously (data
// one cycle after the address). A write by both ports to the same word in the
// same cycle leaves port B's value.
module dtls_ram
  import dtls_pkg::*;
(
  input  logic        clk,
  // port A: memory-mapped bus
  input  logic        a_en,
  input  logic        a_we,
  input  logic [8:0]  a_addr,
  input  logic [31:0] a_wdata,
  output logic [31:0] a_rdata,
  // port B: engine
  input  logic        b_en,
  input  logic        b_we,
  input  logic [8:0]  b_addr,
  input  logic [31:0] b_wdata,
  output logic [31:0] b_rdata
);

  logic [31:0] mem [RAM_WORDS];
  logic        a_ok;
  assign a_ok = (int'(a_addr) < STACK_BASE);

  always_ff @(posedge clk) begin
    if (a_en && a_we && a_ok && !(b_en && b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    if (b_en && b_we) mem[b_addr] <= b_wdata;
    if (a_en) a_rdata <= a_ok ? mem[a_addr] : 32'h0;
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
