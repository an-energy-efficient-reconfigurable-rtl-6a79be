// irq_ctrl: interrupt controller of the processor (paper Sec. III).
//
// N interrupt sources, each individually enabled and set to edge or level
// triggering ("The interrupts can be individually enabled and programmed to
// be edge or level triggered through software"). An edge source sets its
// pending bit on a 0->1 change of its input and keeps it until software
// clears it (writing 1 to the bit through clr_we/clr_mask). A level source is
// pending for as long as its input is high. irq is the OR of all pending and
// enabled sources and is used both as the processor interrupt and as the
// wake-up of the sleep clock gate. Sources must be synchronous to clk. The
// register interface is plain signals; the bus decode is in the top level.
module irq_ctrl #(
  parameter int N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] src,
  input  logic [N-1:0] enable,
  input  logic [N-1:0] edge_mode,
  input  logic         clr_we,
  input  logic [N-1:0] clr_mask,
  output logic [N-1:0] pending,
  output logic         irq
);

  logic [N-1:0] src_q, edge_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_q <= '0; edge_pend <= '0;
    end else begin
      src_q     <= src;
      edge_pend <= (edge_pend & ~(clr_we ? clr_mask : '0)) | (src & ~src_q);
    end
  end

  assign pending = (edge_mode & edge_pend) | (~edge_mode & src);
  assign irq     = |(pending & enable);

endmodule
