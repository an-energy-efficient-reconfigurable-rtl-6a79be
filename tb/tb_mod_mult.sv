// tb_mod_mult: self-checking test of the modular multiplier/adder.
//
// Three random operand pairs modulo the NIST P-256 prime; products, sums and
// differences were computed independently. Checks that a multiplication
// takes exactly tlen = 256 cycles (paper Table III: 256) and that addition
// and subtraction take one cycle, and a 61-bit product with tlen = 61.
module tb_mod_mult;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  fop_e op;
  logic [255:0] a, b, p, z;
  logic [8:0] tlen;
  int checks = 0, failures = 0;

  mod_mult dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic run(input fop_e o, input logic [255:0] e, input int lat, input string what);
    int n;
    op = o; start = 1; tick(); start = 0; n = 1;
    while (!done) begin tick(); n++; end
    check(z == e, what);
    check(n == lat, $sformatf("%s latency %0d, expected %0d", what, n, lat));
  endtask

  logic [255:0] va [3], vb [3], vm [3], vs [3], vd [3];
  initial begin
    va[0]=256'h795b929e9a9a80fdea7b5bf55eb561a4216363698b529b4a97b750923ceb3ffd; vb[0]=256'h781f9c58d6645fa9e8a8529f035efa259b08923d10c67fd994b2b8fda02f34a6;
    vm[0]=256'hd40ba134dfef312f7eae360299421ee1ebd64d4038f50e0ef015fbc2664c406a; vs[0]=256'hf17b2ef770fee0a7d323ae9462145bc9bc6bf5a69c191b242c6a098fdd1a74a3; vd[0]=256'h13bf645c436215401d309565b56677e865ad12c7a8c1b71030497949cbc0b57;
    va[1]=256'h8a7d43b578633074b7970386fee29476311624273bfd1d338d0038ec42650644; vb[1]=256'h3b5f3d86268ecc45dc6bf1e1a399f82a65aa9c8279f248b08cb4a0d7d6225675;
    vm[1]=256'hecb6e10f59047e8769432f56dfc09e8834f5d82f8911f2f9b635c3980e4684d; vs[1]=256'hc5dc813b9ef1fcba9402f568a27c8ca096c0c0a9b5ef65e419b4d9c418875cb9; vd[1]=256'h4f1e062f51d4642edb2b11a55b489c4bcb6b87a4c20ad483004b98146c42afcf;
    va[2]=256'h3e0a813bdc2ae9963d2e49085ef3430ed038db4de38378426d0b944a2863a7f; vb[2]=256'haf438d297524d6af51e8722c21b609228ce6f2410645d51c6f8da3eabe19f58;
    vm[2]=256'h666a82e81ca12ce5bcfc37360d9f1950f6901eddd1e0359fc506a3c9a88bc7a5; vs[2]=256'hed4e0e65514fc0458f16bb3480a94c315d1fcd8ee9c94d5edc993834e67d9d7; vd[2]=256'hf8ec6f402670612f6eb45d6dc3d3d39ec4351e91cdd3da325fd7df05f6a49b26;
    start = 0; op = FOP_MUL;
    p = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff; tlen = 256;
    tick(); tick(); rst_n = 1; tick();
    for (int i = 0; i < 3; i++) begin
      a = va[i]; b = vb[i];
      run(FOP_MUL, vm[i], 256, $sformatf("mul %0d", i));
      run(FOP_ADD, vs[i], 1, $sformatf("add %0d", i));
      run(FOP_SUB, vd[i], 1, $sformatf("sub %0d", i));
    end
    // 61-bit prime 2^61-1: 0x123456789abcdef * 0x0fedcba987654321
    p = 256'h1fffffffffffffff; tlen = 61;
    a = 256'h123456789abcdef; b = 256'h0fedcba987654321;
    run(FOP_MUL, 256'((128'h123456789abcdef * 128'h0fedcba987654321) % 128'h1fffffffffffffff), 61, "mul 61-bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
