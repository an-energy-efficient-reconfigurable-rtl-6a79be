// sd_card_model: behavioural model of an SD card in 4-bit transfer state,
// answering READ_SINGLE_BLOCK (CMD17) only. Used by the SD controller and
// top-level testbenches; it is not synthesizable.
//
// The model samples CMD at rising edges of sd_clk. When it sees a command
// start bit, it reads the 48-bit frame, counts it and checks its CRC7. It
// then answers on both lines in parallel, driving at falling edges:
//  * CMD: two clocks later, an R1 response {0, 0, index, status 0x900, CRC7, 1};
//  * DAT: eight clocks after the command, while the response is still being
//    sent, the data block. That is a start nibble 0, then the 512 bytes of
//    block `arg` (high nibble first), then CRC16 per line, then an end nibble F.
// Byte i of the card is byte i mod 4 (little-endian) of the word
// (A*0x9E3779B1 ^ 0x5A5A5A5A), where A is i rounded down to a multiple of 4.
// With `bad_crc` high, the CRC16 of DAT[2] is sent inverted.
module sd_card_model (
  input  logic        sd_clk,
  input  logic        cmd_out,
  input  logic        cmd_oe,
  output logic        cmd_in,
  output logic [3:0]  dat,
  input  logic        bad_crc,
  output int          cmds,
  output logic [31:0] last_arg,
  output bit          cmd_crc_ok
);

  function automatic logic [6:0] crc7(input logic [39:0] d);
    logic [6:0] c = '0;
    for (int i = 39; i >= 0; i--) begin
      logic fb = d[i] ^ c[6];
      c = {c[5:0], 1'b0};
      if (fb) c = c ^ 7'h09;
    end
    return c;
  endfunction

  function automatic logic [7:0] card_byte(input logic [31:0] a);
    logic [31:0] w = ({a[31:2], 2'b00} * 32'h9E3779B1) ^ 32'h5A5A5A5A;
    return w[8*a[1:0] +: 8];
  endfunction

  task automatic send_resp(input logic [5:0] idx);
    logic [47:0] r;
    r[47:8] = {2'b00, idx, 32'h0000_0900};
    r[7:1]  = crc7(r[47:8]);
    r[0]    = 1'b1;
    repeat (2) @(negedge sd_clk);
    for (int i = 47; i >= 0; i--) begin @(negedge sd_clk); cmd_in = r[i]; end
    @(negedge sd_clk); cmd_in = 1'b1;
  endtask

  task automatic send_data(input logic [31:0] arg);
    logic [15:0] c [4];
    logic [3:0]  n;
    for (int l = 0; l < 4; l++) c[l] = '0;
    repeat (8) @(negedge sd_clk);
    @(negedge sd_clk); dat = 4'h0;
    for (int i = 0; i < 1024; i++) begin
      logic [7:0] b = card_byte({arg[22:0], 9'd0} + 32'(i / 2));
      n = (i % 2 == 0) ? b[7:4] : b[3:0];
      @(negedge sd_clk); dat = n;
      for (int l = 0; l < 4; l++) begin
        logic fb = n[l] ^ c[l][15];
        c[l] = {c[l][14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0);
      end
    end
    if (bad_crc) c[2] = ~c[2];
    for (int k = 15; k >= 0; k--) begin
      @(negedge sd_clk); dat = {c[3][k], c[2][k], c[1][k], c[0][k]};
    end
    @(negedge sd_clk); dat = 4'hF;
  endtask

  initial begin
    cmd_in = 1'b1; dat = 4'hF; cmds = 0; last_arg = '0; cmd_crc_ok = 0;
    forever begin
      @(posedge sd_clk);
      if (cmd_oe && !cmd_out) begin
        logic [47:0] f;
        f[47] = 1'b0;
        for (int i = 46; i >= 0; i--) begin @(posedge sd_clk); f[i] = cmd_out; end
        cmds++; last_arg = f[39:8];
        cmd_crc_ok = crc7(f[47:8]) == f[7:1] && f[0] && f[46];
        fork
          send_resp(f[45:40]);
          send_data(f[39:8]);
        join
      end
    end
  end
endmodule
