// tb_hmac_sha256: self-checking test of the HMAC front end with a SHA2-256
// core. Key bytes are 1..32, message byte i is 11i+5 (mod 256); MACs for
// 1-, 50- and 100-byte messages were computed with an independent HMAC
// implementation. The message source stalls randomly to exercise the
// valid/ready handshake.
module tb_hmac_sha256;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, msg_valid, msg_last, msg_ready, busy, done;
  logic [7:0] msg_byte;
  logic [255:0] key, mac;
  sha_req_t sha_req;
  sha_rsp_t sha_rsp;
  int checks = 0, failures = 0;

  hmac_sha256 dut (.*);
  sha256_core u_sha (.clk, .rst_n, .req(sha_req), .rsp(sha_rsp));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic run(input int len, input logic [255:0] exp);
    int i = 0;
    start = 1; tick(); start = 0;
    while (!done) begin
      msg_valid = (i < len) && ($urandom_range(0, 3) != 0);
      msg_byte  = 8'((i * 11 + 5) & 255);
      msg_last  = (i == len - 1);
      @(posedge clk);
      if (msg_valid && msg_ready) i++;
      #1;
    end
    msg_valid = 0;
    checks++;
    if (mac != exp) begin failures++; $display("FAIL: len %0d mac %h", len, mac); end
    tick();
  endtask

  initial begin
    start = 0; msg_valid = 0; msg_last = 0; msg_byte = 0;
    for (int b = 0; b < 32; b++) key[255 - 8*b -: 8] = 8'(b + 1);
    tick(); tick(); rst_n = 1; tick();
    run(1,   256'h1f3ba2e1d0cb14254348c26bc2bfcb68c16af64c9f21aa91737b05b92d52d3f9);
    run(50,  256'h55aeeba230c66893d3ce484f99a01ce68544093e7663ab4ab9605c93fe132b14);
    run(100, 256'h5945624b9a1d5576e038cb3cb65fc90507ad64ca36ed0ae3de336bd391e13d73);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
