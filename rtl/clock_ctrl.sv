// clock_ctrl: processor sleep gating and the DTLS engine clock (paper
// Sec. III, Fig. 4).
//
// Processor side: `wfi` (a one-cycle pulse when the processor executes its
// wait-for-interrupt instruction) sets `sleeping`; `wake` (the interrupt
// controller's request) clears it. core_clk, which would clock the
// processor, instruction cache and data memory, is clk gated by !sleeping.
// If wfi and wake come together, wake wins, so an interrupt that is already
// pending is never slept through. clk itself keeps running for this block
// and the interrupt controller.
//
// Engine side: the DTLS engine clock is clk divided by a software-set value
// (the paper: "clocked by a software-controlled divider"). div_cfg = 0 passes
// clk through; div_cfg = n > 0 gives a 50 % duty clock of period 2n clk
// cycles. The result is gated by de_en. Changing div_cfg while de_en is 1
// may give one short clock pulse; software should clear de_en first. The
// divider form (even ratios only) is this design's choice.
module clock_ctrl (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wfi,
  input  logic       wake,
  input  logic [7:0] div_cfg,
  input  logic       de_en,
  output logic       sleeping,
  output logic       core_clk,
  output logic       de_clk
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sleeping <= 1'b0;
    else if (wake) sleeping <= 1'b0;
    else if (wfi)  sleeping <= 1'b1;
  end

  clock_gate u_core_gate (.clk(clk), .en(!sleeping), .gclk(core_clk));

  logic [7:0] dcnt;
  logic       div_clk;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcnt <= '0; div_clk <= 1'b0;
    end else if (dcnt + 8'd1 >= div_cfg) begin
      dcnt <= '0; div_clk <= !div_clk;
    end else begin
      dcnt <= dcnt + 8'd1;
    end
  end

  logic de_src;
  assign de_src = (div_cfg == 8'd0) ? clk : div_clk;

  clock_gate u_de_gate (.clk(de_src), .en(de_en), .gclk(de_clk));

endmodule
