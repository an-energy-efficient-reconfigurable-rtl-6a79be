// tb_sd_controller: self-checking test of the SD block-read controller
// against the card model in sd_card_model.sv.
// For each read the test checks:
//  * that exactly one CMD17 was sent, with a correct CRC7 and the block
//    number (byte address / 512) as its argument;
//  * that all 128 words arrive, little-endian, equal to the card's contents;
//  * that error stays low;
//  * the SD clock period, 2*(cfg+1) system clocks, measured over the
//    transfer.
// Reads are done with cfg = 1 and cfg = 0. A last read has a corrupted data
// CRC, which must raise error. The watchdog ends the run after 200k cycles.
module tb_sd_controller;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0]  cfg;
  logic        rd_req, busy, error, word_valid;
  logic [31:0] rd_addr, word_data;
  logic        sd_clk, sd_cmd_out, sd_cmd_oe, sd_cmd_in;
  logic [3:0]  sd_dat_in;
  logic        bad_crc;
  int          cmds;
  logic [31:0] last_arg;
  bit          cmd_crc_ok;
  int checks = 0, failures = 0;

  sd_controller dut (.*);
  sd_card_model card (.sd_clk, .cmd_out(sd_cmd_out), .cmd_oe(sd_cmd_oe), .cmd_in(sd_cmd_in),
                      .dat(sd_dat_in), .bad_crc, .cmds, .last_arg, .cmd_crc_ok);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sd_edges = 0;
  always @(posedge sd_clk) sd_edges++;

  task automatic read_block(input logic [31:0] a, input bit expect_err);
    int n = 0, wrong = 0, cyc = 0, c0 = cmds, e0 = sd_edges;
    rd_addr = a; rd_req = 1'b1; tick(); rd_req = 1'b0;
    while (busy) begin
      if (word_valid) begin
        if (word_data != (((a + 32'(4 * n)) * 32'h9E3779B1) ^ 32'h5A5A5A5A)) wrong++;
        n++;
      end
      tick(); cyc++;
    end
    $display("block %0d, cfg %0d: %0d cycles, %0d SD clocks", a >> 9, cfg, cyc, sd_edges - e0);
    check(cmds == c0 + 1 && cmd_crc_ok && last_arg == a >> 9, "CMD17 frame");
    check(n == 128 && wrong == 0, $sformatf("%0d words, %0d wrong", n, wrong));
    check(error == expect_err, "error flag");
    check((cyc + (sd_edges - e0) / 2) / (sd_edges - e0) == 2 * (int'(cfg) + 1), "SD clock period");
  endtask

  initial begin
    cfg = 1; rd_req = 0; rd_addr = 0; bad_crc = 0;
    tick(); tick(); rst_n = 1; tick();
    read_block(32'h0000_1200, 0);
    cfg = 0;
    read_block(32'h0123_4000, 0);
    bad_crc = 1;
    read_block(32'h0000_0000, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
