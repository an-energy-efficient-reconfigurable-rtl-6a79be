// sd_controller: reads 512-byte blocks from an SD card over the 4-bit SD bus,
// to refill the instruction cache.
//
// How it works. A refill request carries the byte address of a 512-byte
// block. The controller:
//  1. sends READ_SINGLE_BLOCK (CMD17) on the CMD line. The 48-bit frame is
//     {0, 1, 6-bit index, 32-bit argument, CRC7, 1}. High-capacity cards
//     (SDHC and SDXC) are addressed by block, so the argument is the byte
//     address divided by 512;
//  2. receives the card's 48-bit R1 response on CMD;
//  3. receives the data block on DAT[3:0]: a start nibble of 0, then 1024
//     nibbles (high nibble of each byte first), then a CRC16 on each line,
//     then an end nibble of 1.
// Bytes are packed little-endian into 32-bit words, one `word_valid` pulse
// per word. The response is watched in parallel with the data, because a
// card may start the data block before its response has ended. `error` is
// raised when one of these goes wrong:
//  * the response index is not 17 or its CRC7 is wrong;
//  * any line's CRC16 is wrong;
//  * no response or data start arrives within 255 or 65535 SD clocks.
//
// Clocking. The SD clock is clk / (2 * (cfg + 1)); `cfg` is the external
// divider setting. The controller changes CMD just after a falling edge of
// sd_clk and samples CMD and DAT at a rising edge, as the card does.
// sd_clk only runs during a transfer.
//
// Interface: `rd_req` is a one-cycle pulse with `rd_addr`. `busy` stays high
// until the block has been received. `error` is valid when busy falls and
// stays until the next request.
//
// From the paper:
//  * 4-bit SD bus access, instead of SPI mode;
//  * support for SDHC and SDXC (block addressing);
//  * an SD clock made by a divider that is set from outside.
// This design's own choices:
//  * the divider encoding;
//  * the timeouts;
//  * the interface;
//  * no card initialisation sequence (CMD0, CMD8, ACMD41, CMD2, CMD3, CMD7,
//    ACMD6). It assumes a card already in 4-bit transfer state, which the
//    paper does not describe;
//  * no retry after an error;
//  * a request while busy is ignored.
// Lint: rd_addr[8:0] is unused (whole blocks are read) and the response's
// status bits are not checked, only its index and CRC.
module sd_controller #(
  parameter int CFGW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [CFGW-1:0] cfg,
  // block read request
  input  logic            rd_req,
  input  logic [31:0]     rd_addr,
  output logic            busy,
  output logic            error,
  output logic            word_valid,
  output logic [31:0]     word_data,
  // SD bus
  output logic            sd_clk,
  output logic            sd_cmd_out,
  output logic            sd_cmd_oe,
  input  logic            sd_cmd_in,
  input  logic [3:0]      sd_dat_in
);

  // CRC7 (x^7 + x^3 + 1) over the first 40 bits of a command or response
  function automatic logic [6:0] crc7(input logic [39:0] d);
    logic [6:0] c = '0;
    for (int i = 39; i >= 0; i--) begin
      logic fb = d[i] ^ c[6];
      c = {c[5:0], 1'b0};
      if (fb) c = c ^ 7'h09;
    end
    return c;
  endfunction

  // one step of CRC16 (x^16 + x^12 + x^5 + 1)
  function automatic logic [15:0] crc16_step(input logic [15:0] c, input logic b);
    logic fb = b ^ c[15];
    logic [15:0] r = {c[14:0], 1'b0};
    if (fb) r = r ^ 16'h1021;
    return r;
  endfunction

  // ---------------------------------------------------------------- SD clock
  logic [CFGW-1:0] dcnt;
  logic            run, rise, fall;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcnt <= '0; sd_clk <= 1'b0;
    end else if (!run) begin
      dcnt <= '0; sd_clk <= 1'b0;
    end else if (dcnt == cfg) begin
      dcnt <= '0; sd_clk <= ~sd_clk;
    end else dcnt <= dcnt + 1'b1;
  end
  assign rise = run && dcnt == cfg && !sd_clk;   // sd_clk rises at this edge
  assign fall = run && dcnt == cfg &&  sd_clk;

  // ---------------------------------------------------------------- command
  typedef enum logic [1:0] {C_IDLE, C_SEND, C_WAIT, C_RESP} cstate_e;
  cstate_e     cst;
  logic [47:0] csh;         // command out / response in
  logic [5:0]  ccnt;
  logic [7:0]  ctmo;
  logic        c_done, c_err;

  logic [39:0] frame;
  assign frame = {2'b01, 6'd17, 9'd0, rd_addr[31:9]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst <= C_IDLE; csh <= '0; ccnt <= '0; ctmo <= '0; c_done <= 1'b0; c_err <= 1'b0;
      sd_cmd_out <= 1'b1; sd_cmd_oe <= 1'b0;
    end else begin
      unique case (cst)
        C_IDLE: if (rd_req) begin
          csh <= {frame, crc7(frame), 1'b1};
          ccnt <= 6'd48; c_done <= 1'b0; c_err <= 1'b0;
          cst <= C_SEND;
        end
        C_SEND: if (fall) begin
          if (ccnt == 0) begin
            sd_cmd_oe <= 1'b0; sd_cmd_out <= 1'b1; ctmo <= '0; cst <= C_WAIT;
          end else begin
            sd_cmd_oe <= 1'b1; sd_cmd_out <= csh[47];
            csh <= {csh[46:0], 1'b0}; ccnt <= ccnt - 1'b1;
          end
        end
        C_WAIT: if (rise) begin
          if (!sd_cmd_in) begin
            csh <= 48'd0; ccnt <= 6'd47; cst <= C_RESP;
          end else if (ctmo == 8'hFF) begin
            c_err <= 1'b1; c_done <= 1'b1; cst <= C_IDLE;
          end else ctmo <= ctmo + 1'b1;
        end
        C_RESP: if (rise) begin
          csh <= {csh[46:0], sd_cmd_in};
          ccnt <= ccnt - 1'b1;
          if (ccnt == 1) begin
            // frame bit b (46..1) is in csh[b-1], csh[46] is the 0 start
            // bit, and sd_cmd_in is the end bit
            c_done <= 1'b1; cst <= C_IDLE;
            if (csh[44:39] != 6'd17 || crc7(csh[46:7]) != csh[6:0])
              c_err <= 1'b1;
          end
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- data
  typedef enum logic [1:0] {D_IDLE, D_WAIT, D_DATA, D_CRC} dstate_e;
  dstate_e     dst;
  logic [10:0] dcnt_n;       // nibbles left, or CRC bits left
  logic [15:0] dtmo;
  logic [15:0] crc [4];
  logic [15:0] rcrc [4];
  logic [27:0] wsh;          // nibbles of the current word
  logic        d_done, d_err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst <= D_IDLE; dcnt_n <= '0; dtmo <= '0; wsh <= '0; d_done <= 1'b0; d_err <= 1'b0;
      word_valid <= 1'b0; word_data <= '0;
      for (int l = 0; l < 4; l++) begin crc[l] <= '0; rcrc[l] <= '0; end
    end else begin
      word_valid <= 1'b0;
      unique case (dst)
        D_IDLE: if (rd_req) begin
          dtmo <= '0; d_done <= 1'b0; d_err <= 1'b0; dst <= D_WAIT;
        end
        D_WAIT: if (rise && cst != C_SEND) begin
          if (!sd_dat_in[0]) begin
            dcnt_n <= 11'd1024; dst <= D_DATA;
            for (int l = 0; l < 4; l++) crc[l] <= '0;
          end else if (dtmo == 16'hFFFF) begin
            d_err <= 1'b1; d_done <= 1'b1; dst <= D_IDLE;
          end else dtmo <= dtmo + 1'b1;
        end
        D_DATA: if (rise) begin
          for (int l = 0; l < 4; l++) crc[l] <= crc16_step(crc[l], sd_dat_in[l]);
          dcnt_n <= dcnt_n - 1'b1;
          // nibble 0 of a word is byte 0's high nibble
          if (dcnt_n[2:0] == 3'd1) begin
            word_valid <= 1'b1;
            word_data  <= {wsh[3:0], sd_dat_in, wsh[11:4], wsh[19:12], wsh[27:20]};
          end else wsh <= {wsh[23:0], sd_dat_in};
          if (dcnt_n == 11'd1) begin dcnt_n <= 11'd17; dst <= D_CRC; end
        end
        D_CRC: if (rise) begin
          dcnt_n <= dcnt_n - 1'b1;
          if (dcnt_n == 11'd1) begin
            // end bit
            d_done <= 1'b1; dst <= D_IDLE;
            for (int l = 0; l < 4; l++) if (rcrc[l] != crc[l]) d_err <= 1'b1;
          end else
            for (int l = 0; l < 4; l++) rcrc[l] <= {rcrc[l][14:0], sd_dat_in[l]};
        end
        default: dst <= D_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- status
  logic active;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; error <= 1'b0;
    end else if (rd_req) begin
      active <= 1'b1; error <= 1'b0;
    end else if (active && c_done && d_done && cst == C_IDLE && dst == D_IDLE) begin
      active <= 1'b0; error <= c_err || d_err;
    end
  end
  assign run  = active;
  assign busy = active;

endmodule
