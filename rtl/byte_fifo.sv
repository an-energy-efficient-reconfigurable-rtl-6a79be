// byte_fifo: synchronous FIFO, used for the 256-byte IN, OUT and DATA packet
// buffers of the DTLS engine (paper Sec. V-B4).
//
// Circular buffer with read and write pointers one bit wider than the address
// so that full and empty are told apart. Write with wr_en when !full; rdata
// shows the oldest byte (first-word fall-through) and rd_en when !empty
// removes it. Writes to a full FIFO and reads from an empty one are ignored.
// `count` is the number of bytes held.
module byte_fifo #(
  parameter int DEPTH = 256,
  parameter int W     = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [W-1:0]           wdata,
  input  logic                   rd_en,
  output logic [W-1:0]           rdata,
  output logic                   full,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] count
);

  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count = wp - rp;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (wp == rp);
  assign rdata = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (wr_en && !full)  wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

endmodule
