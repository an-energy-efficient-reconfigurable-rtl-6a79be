// retransmit_timer: the DTLS retransmission timer (paper Sec. V-B4).
//
// A 64-bit counter, as in the paper, counts clock cycles while armed. When it
// reaches the configured timeout it pulses `expired` (the signal on which the
// protocol controller re-sends its last flight) and restarts from zero, so it
// keeps firing every `timeout` cycles until stopped. `arm` (re)starts it from
// zero, `stop` halts it. A timeout of 0 never expires. The timeout is a plain
// input; doubling it after each expiry, as the DTLS specification suggests,
// is left to whoever sets it.
module retransmit_timer (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        arm,
  input  logic        stop,
  input  logic [63:0] timeout,
  output logic        running,
  output logic        expired,
  output logic [63:0] count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; running <= 1'b0; expired <= 1'b0;
    end else begin
      expired <= 1'b0;
      if (stop) begin
        running <= 1'b0;
      end else if (arm) begin
        running <= 1'b1; count <= '0;
      end else if (running && timeout != '0) begin
        if (count == timeout - 64'd1) begin
          count <= '0; expired <= 1'b1;
        end else begin
          count <= count + 64'd1;
        end
      end
    end
  end

endmodule
