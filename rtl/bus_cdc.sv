// bus_cdc: carries single memory-mapped accesses from the processor clock
// into the DTLS engine clock, which comes from a software-controlled divider
// (paper Sec. III), using a toggle handshake.
//
// Bus side (clk): hold m_valid, m_we, m_addr, m_wdata until m_ready pulses
// for one cycle; for reads m_rdata is valid in that cycle. The request fields
// stay stable while a transfer is in flight, so only the toggle bits are
// synchronised (two flops each way). Engine side (eclk): s_valid pulses for
// one cycle with the request; the engine must present s_rdata one cycle
// later. One access takes about 2 engine cycles plus 3 bus cycles. The
// handshake is this design's choice; the paper does not describe the
// crossing.
//
// s_we, s_addr and s_wdata are the bus fields themselves, held stable by
// the handshake, so they need no synchronising flops.
module bus_cdc (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        m_valid,
  input  logic        m_we,
  input  logic [11:0] m_addr,
  input  logic [31:0] m_wdata,
  output logic        m_ready,
  output logic [31:0] m_rdata,
  input  logic        eclk,
  input  logic        erst_n,
  output logic        s_valid,
  output logic        s_we,
  output logic [11:0] s_addr,
  output logic [31:0] s_wdata,
  input  logic [31:0] s_rdata
);

  logic req_t, busy_m, ack_t, pend;
  logic [2:0] ack_s;   // synchroniser + edge detect
  logic [31:0] rdata_x;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_t <= 1'b0; busy_m <= 1'b0; ack_s <= '0; m_ready <= 1'b0; m_rdata <= '0;
    end else begin
      ack_s   <= {ack_s[1:0], ack_t};
      m_ready <= 1'b0;
      if (!busy_m && m_valid && !m_ready) begin
        req_t <= !req_t; busy_m <= 1'b1;
      end else if (busy_m && (ack_s[2] != ack_s[1])) begin
        busy_m <= 1'b0; m_ready <= 1'b1; m_rdata <= rdata_x;
      end
    end
  end

  // engine side
  logic [2:0] req_s;
  always_ff @(posedge eclk or negedge erst_n) begin
    if (!erst_n) begin
      req_s <= '0; ack_t <= 1'b0; pend <= 1'b0; rdata_x <= '0;
    end else begin
      req_s <= {req_s[1:0], req_t};
      pend  <= s_valid;
      if (pend) begin
        rdata_x <= s_rdata; ack_t <= !ack_t;
      end
    end
  end

  assign s_valid = (req_s[2] != req_s[1]);
  assign s_we    = m_we;
  assign s_addr  = m_addr;
  assign s_wdata = m_wdata;

endmodule
