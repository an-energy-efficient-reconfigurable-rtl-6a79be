// tb_session_hash: self-checking test of the running transcript hash, set up
// like the paper's handshake example: a 206-byte ClientHello (byte i = 7i+3)
// is pushed and snapped, then a 125-byte ServerHello (byte i = 13i+5) is
// pushed and snapped. Expected digests were computed with an independent
// SHA2-256. The state saved after the ClientHello is then restored into a
// cleared unit and the ServerHello replayed, which must give the same
// digest. The empty-transcript digest is checked after clear. The byte
// source stalls at random.
module tb_session_hash;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, push_valid, push_ready, snap, busy, done, restore;
  logic [7:0] push_byte;
  logic [255:0] digest;
  logic [838:0] state_out, state_in, saved;
  sha_req_t sha_req;
  sha_rsp_t sha_rsp;
  int checks = 0, failures = 0;

  session_hash dut (.*);
  sha256_core u_sha (.clk, .rst_n, .req(sha_req), .rsp(sha_rsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic push(input int len, input int mul, input int add);
    int i = 0;
    while (i < len) begin
      push_valid = ($urandom_range(0, 2) != 0);
      push_byte  = 8'((i * mul + add) & 255);
      @(posedge clk);
      if (push_valid && push_ready) i++;
      #1;
    end
    push_valid = 0;
  endtask

  task automatic do_snap(input logic [255:0] exp, input string what);
    while (busy) tick();
    snap = 1; tick(); snap = 0;
    while (!done) tick();
    checks++;
    if (digest != exp) begin failures++; $display("FAIL %s: %h", what, digest); end
  endtask

  initial begin
    clear = 0; push_valid = 0; push_byte = 0; snap = 0; restore = 0; state_in = '0;
    tick(); tick(); rst_n = 1; tick();
    do_snap(256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, "empty");
    push(206, 7, 3);
    do_snap(256'h78231103b0a0a4a3c950ba6cb4eca654cd1fcc985228be93374d59cea9a99631, "CH");
    while (busy) tick();
    saved = state_out;
    checks++;
    if (saved[6:0] != 7'd14 || saved[582:519] != 64'd192) begin
      failures++; $display("FAIL: state count %0d len %0d", saved[6:0], saved[582:519]);
    end
    push(125, 13, 5);
    do_snap(256'he99e95d733571a3b58164ebe36ef6a3de954be136b2579d3ed22363e0aebaf6b, "CH+SH");
    while (busy) tick();
    clear = 1; tick(); clear = 0;
    do_snap(256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, "cleared");
    while (busy) tick();
    state_in = saved; restore = 1; tick(); restore = 0;
    push(125, 13, 5);
    do_snap(256'he99e95d733571a3b58164ebe36ef6a3de954be136b2579d3ed22363e0aebaf6b, "restored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
