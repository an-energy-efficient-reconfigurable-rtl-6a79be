// tb_sha256_core: self-checking test of the SHA2-256 core.
//
// Hashes messages of 0, 3, 55, 56, 64 and 130 bytes (byte i = i*seed+3) and
// compares each digest with a value computed by an independent SHA2-256
// implementation. It checks the 65-cycle block latency, and the running-hash
// use: the state after the first block of the 130-byte message is saved, the
// core is used for another message, the state is restored and the rest of the
// message is hashed, which must give the same digest as one uninterrupted pass.
module tb_sha256_core;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  sha_req_t req;
  sha_rsp_t rsp;
  int checks = 0, failures = 0;

  sha256_core dut (.clk, .rst_n, .req, .rsp);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick();
    @(posedge clk); #1;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic push(input int i, input int sd);
    req.din_valid = 1'b1;
    req.din       <= 8'((i * sd + 3) & 255);
    tick();
    while (!rsp.din_ready) tick();
    req.din_valid = 1'b0;
  endtask

  task automatic hash(input int len, input int sd, output logic [255:0] dig);
    req.init = 1'b1; tick(); req.init = 1'b0;
    for (int i = 0; i < len; i++) push(i, sd);
    tick();
    while (!rsp.din_ready) tick();
    req.finish = 1'b1; tick(); req.finish = 1'b0;
    while (!rsp.done) tick();
    dig = rsp.h_out;
    tick();
  endtask

  logic [255:0] d, saved_h;
  logic [63:0]  saved_len;
  int t0, cyc;
  initial begin
    req = SHA_REQ_IDLE;
    repeat (3) tick();
    rst_n = 1'b1;
    tick();
    hash(0, 1, d);   check(d == 256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, "len 0");
    hash(3, 5, d);   check(d == 256'h64f87cae3db9bd0ac56d90148a10857c018250940690735f3759fdca0b69a37a, "len 3");
    hash(55, 7, d);  check(d == 256'he7313d333c272e639f790978283f9eb392e843d0f29b7016828bb1daa4aac70b, "len 55");
    hash(56, 9, d);  check(d == 256'h29d11d8d6be67f1dc996b24438025684d9d6506c37e1771930926c5434d57988, "len 56");
    hash(64, 11, d); check(d == 256'h06ca10023649e2cff1a28c88e62aa6d8d72769c7bdf867716599291f403351ce, "len 64");
    hash(130, 13, d);check(d == 256'h085f4ced8abc47308a78589ad532d7b7b6c960e6ea0c6f391dcf45b2a360904b, "len 130");

    // Block latency and running hash with save/restore.
    req.init = 1'b1; tick(); req.init = 1'b0;
    for (int i = 0; i < 63; i++) push(i, 13);
    req.din_valid = 1'b1; req.din = 8'((63 * 13 + 3) & 255);
    tick(); req.din_valid = 1'b0;
    t0 = 0;
    while (rsp.busy) begin tick(); t0++; end
    check(t0 == 65, $sformatf("block latency %0d cycles, expected 65", t0));
    saved_h = rsp.h_out; saved_len = rsp.len_out;
    check(saved_len == 64, "length counter after one block");
    hash(3, 5, d);   check(d == 256'h64f87cae3db9bd0ac56d90148a10857c018250940690735f3759fdca0b69a37a, "interleaved message");
    req.h_in = saved_h; req.len_in = saved_len; req.load = 1'b1;
    tick(); req.load = 1'b0;
    for (int i = 64; i < 130; i++) push(i, 13);
    tick();
    while (!rsp.din_ready) tick();
    req.finish = 1'b1; tick(); req.finish = 1'b0;
    while (!rsp.done) tick();
    check(rsp.h_out == 256'h085f4ced8abc47308a78589ad532d7b7b6c960e6ea0c6f391dcf45b2a360904b, "restored running hash");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
