// dtls_soc: top level of the DTLS system chip (paper Fig. 2): the DTLS engine,
// the engine clock divider and gate, the processor sleep gate and the
// interrupt controller, joined by one memory-mapped bus.
//
// The processor's 16 KB instruction cache, its SD-card controller and the
// 64 KB data memory are included. They run on core_clk, so WFI stops them
// together with the processor. The cache's fetch side is on the if_* ports
// and the data memory's port is dm_*, both in the core_clk domain. A cache
// miss reads one 512-byte block from the SD card through the sd_* pins; the
// SD clock divider setting comes in on sd_cfg.
// The RV32I processor and the GPIO, UART and SPI peripherals are not part of
// this design. The processor connects through the bus port, the if_* and
// dm_* ports and the wfi, irq and core_clk signals. The SD controller connects to the sd_* ports.
// Peripheral and off-chip interrupts come in on ext_irq;
// the DTLS handshake state machine connects through the sm_* ports, which
// are in the de_clk domain.
//
// Bus (clk domain): hold bus_valid with bus_we/addr/wdata until bus_ready
// pulses for one cycle (bus_rdata valid then). Byte addresses:
//   0x0000-0x0FFF  DTLS engine (see dtls_engine), through a clock crossing
//   0x1000  engine clock divider (0 = clk, n = clk / 2n), reset 0
//   0x1004  [0] engine clock enable, reset 1
//   0x1008  interrupt enables        0x100C  interrupt edge mode
//   0x1010  pending interrupts; write 1s to clear edge-mode bits
//   0x1014  write: wait for interrupt (the processor's WFI)
//   other   read 0, writes ignored
// Interrupt sources: 0 engine done, 1 retransmission timer expired (both
// synchronised from the engine clock), 2..7 ext_irq[5:0]. The system register
// map and the source numbering are this design's choice. The wfi input and
// the register at 0x1014 do the same thing.
module dtls_soc
  import dtls_pkg::*;
#(
  parameter int ECC_W = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // processor memory-mapped bus
  input  logic        bus_valid,
  input  logic        bus_we,
  input  logic [15:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic        bus_ready,
  output logic [31:0] bus_rdata,
  // processor sleep and interrupt
  input  logic        wfi,
  output logic        core_clk,
  output logic        irq,
  output logic        sleeping,
  input  logic [5:0]  ext_irq,
  // instruction fetch (core_clk domain)
  input  logic        if_req,
  input  logic [31:0] if_addr,
  output logic        if_rdy,
  output logic [31:0] if_instr,
  // data memory (core_clk domain)
  input  logic        dm_en,
  input  logic [3:0]  dm_we,
  input  logic [15:0] dm_addr,
  input  logic [31:0] dm_wdata,
  output logic [31:0] dm_rdata,
  // SD card (program store)
  input  logic [7:0]  sd_cfg,
  output logic        sd_busy,
  output logic        sd_error,
  output logic        sd_clk,
  output logic        sd_cmd_out,
  output logic        sd_cmd_oe,
  input  logic        sd_cmd_in,
  input  logic [3:0]  sd_dat,
  // handshake state machine side of the engine (de_clk domain)
  output logic        de_clk,
  input  logic        sm_in_rd,
  output logic [7:0]  sm_in_rdata,
  output logic        sm_in_empty,
  input  logic        sm_data_rd,
  output logic [7:0]  sm_data_rdata,
  output logic        sm_data_empty,
  input  logic        sm_out_wr,
  input  logic [7:0]  sm_out_wdata,
  output logic        sm_out_full,
  input  logic        sm_timer_arm,
  output logic        timer_expired
);

  // ---------------------------------------------------------------- system registers
  logic [7:0] div_cfg, irq_en, irq_edge, irq_pend;
  logic       de_en, sys_ready, wfi_reg, irq_clr;
  logic [31:0] sys_rdata;
  logic        is_de, is_sys;
  assign is_de  = (bus_addr[15:12] == 4'h0);
  assign is_sys = !is_de;
  assign irq_clr = bus_valid && is_sys && bus_we && !sys_ready && bus_addr == 16'h1010;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cfg <= '0; de_en <= 1'b1; irq_en <= '0; irq_edge <= '0;
      sys_ready <= 1'b0; sys_rdata <= '0; wfi_reg <= 1'b0;
    end else begin
      sys_ready <= 1'b0; wfi_reg <= 1'b0;
      if (bus_valid && is_sys && !sys_ready) begin
        sys_ready <= 1'b1;
        if (bus_we) begin
          case (bus_addr)
            16'h1000: div_cfg  <= bus_wdata[7:0];
            16'h1004: de_en    <= bus_wdata[0];
            16'h1008: irq_en   <= bus_wdata[7:0];
            16'h100C: irq_edge <= bus_wdata[7:0];
            16'h1014: wfi_reg  <= 1'b1;
            default: ;
          endcase
        end else begin
          case (bus_addr)
            16'h1000: sys_rdata <= {24'd0, div_cfg};
            16'h1004: sys_rdata <= {31'd0, de_en};
            16'h1008: sys_rdata <= {24'd0, irq_en};
            16'h100C: sys_rdata <= {24'd0, irq_edge};
            16'h1010: sys_rdata <= {24'd0, irq_pend};
            default:  sys_rdata <= '0;
          endcase
        end
      end
    end
  end

  // ---------------------------------------------------------------- clocks
  clock_ctrl u_clk (.clk, .rst_n, .wfi(wfi || wfi_reg), .wake(irq), .div_cfg, .de_en,
                    .sleeping, .core_clk, .de_clk);

  // ---------------------------------------------------------------- instruction cache
  logic        ic_req, ic_valid;
  logic [31:0] ic_addr, ic_data;
  icache u_icache (.clk(core_clk), .rst_n, .req(if_req), .addr(if_addr), .rdy(if_rdy),
                   .instr(if_instr), .mem_req(ic_req), .mem_addr(ic_addr),
                   .mem_valid(ic_valid), .mem_data(ic_data));
  sd_controller u_sd (.clk(core_clk), .rst_n, .cfg(sd_cfg), .rd_req(ic_req), .rd_addr(ic_addr),
                      .busy(sd_busy), .error(sd_error), .word_valid(ic_valid), .word_data(ic_data),
                      .sd_clk, .sd_cmd_out, .sd_cmd_oe, .sd_cmd_in, .sd_dat_in(sd_dat));

  // ---------------------------------------------------------------- data memory
  data_mem u_dmem (.clk(core_clk), .en(dm_en), .we(dm_we), .addr(dm_addr),
                   .wdata(dm_wdata), .rdata(dm_rdata));

  // ---------------------------------------------------------------- engine
  logic        cdc_ready, s_valid, s_we, de_irq, de_tflag;
  logic [11:0] s_addr;
  logic [31:0] cdc_rdata, s_wdata, s_rdata;
  bus_cdc u_cdc (.clk, .rst_n, .m_valid(bus_valid && is_de), .m_we(bus_we), .m_addr(bus_addr[11:0]),
                 .m_wdata(bus_wdata), .m_ready(cdc_ready), .m_rdata(cdc_rdata),
                 .eclk(de_clk), .erst_n(rst_n), .s_valid, .s_we, .s_addr, .s_wdata, .s_rdata);

  dtls_engine #(.ECC_W(ECC_W)) u_de (
    .clk(de_clk), .rst_n, .s_valid, .s_we, .s_addr, .s_wdata, .s_rdata,
    .irq(de_irq), .timer_flag(de_tflag),
    .sm_in_rd, .sm_in_rdata, .sm_in_empty, .sm_data_rd, .sm_data_rdata, .sm_data_empty,
    .sm_out_wr, .sm_out_wdata, .sm_out_full, .sm_timer_arm, .timer_expired
  );

  assign bus_ready = cdc_ready || sys_ready;
  assign bus_rdata = cdc_ready ? cdc_rdata : sys_rdata;

  // ---------------------------------------------------------------- interrupts
  logic [1:0] de_irq_s, de_tf_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      de_irq_s <= '0; de_tf_s <= '0;
    end else begin
      de_irq_s <= {de_irq_s[0], de_irq};
      de_tf_s  <= {de_tf_s[0], de_tflag};
    end
  end

  irq_ctrl #(.N(8)) u_irq (.clk, .rst_n, .src({ext_irq, de_tf_s[1], de_irq_s[1]}),
                           .enable(irq_en), .edge_mode(irq_edge), .clr_we(irq_clr),
                           .clr_mask(bus_wdata[7:0]), .pending(irq_pend), .irq);

endmodule
