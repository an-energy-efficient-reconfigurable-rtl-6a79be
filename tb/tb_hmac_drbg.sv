// tb_hmac_drbg: self-checking test of HMAC-DRBG on a SHA2-256 core.
//
// Seed byte i is 7i+9 (mod 256). After Instantiate, K and V and then the
// outputs of two Generate calls are compared with an independent HMAC-DRBG
// implementation. Then the state is saved, a third Generate run, the saved
// state restored with `load`, and the second output must repeat.
module tb_hmac_drbg;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic inst, gen, load, busy, done;
  logic [255:0] seed, k_in, v_in, rnd, k_out, v_out;
  sha_req_t sha_req;
  sha_rsp_t sha_rsp;
  int checks = 0, failures = 0;

  hmac_drbg dut (.*);
  sha256_core u_sha (.clk, .rst_n, .req(sha_req), .rsp(sha_rsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic waitdone(); while (!done) tick(); tick(); endtask

  logic [255:0] sk, sv;
  initial begin
    inst = 0; gen = 0; load = 0; k_in = '0; v_in = '0;
    for (int b = 0; b < 32; b++) seed[255 - 8*b -: 8] = 8'((b * 7 + 9) & 255);
    tick(); tick(); rst_n = 1; tick();
    inst = 1; tick(); inst = 0; waitdone();
    check(k_out == 256'h85489f3c6c1806042bded087ad6cccc20de7e8cbd76792866869af111463c8db, "instantiate K");
    check(v_out == 256'hf54e4a3ac15b6abf8a0754e100daa3ddc9c3d42a17f783bce0bd97546b4159fa, "instantiate V");
    gen = 1; tick(); gen = 0; waitdone();
    check(rnd == 256'h9cb3ad7e81ea47d2000fe83ef3a497e4d8c0ca84bdba0fd9a25f99dfbbd28101, "generate 1");
    sk = k_out; sv = v_out;
    gen = 1; tick(); gen = 0; waitdone();
    check(rnd == 256'h6041626cb55a1b3d398a53c4930e6b8cf421d2e6d393af8c6690297b294b007f, "generate 2");
    gen = 1; tick(); gen = 0; waitdone();
    check(rnd != 256'h6041626cb55a1b3d398a53c4930e6b8cf421d2e6d393af8c6690297b294b007f, "generate 3 differs");
    k_in = sk; v_in = sv; load = 1; tick(); load = 0;
    gen = 1; tick(); gen = 0; waitdone();
    check(rnd == 256'h6041626cb55a1b3d398a53c4930e6b8cf421d2e6d393af8c6690297b294b007f, "restored state");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
