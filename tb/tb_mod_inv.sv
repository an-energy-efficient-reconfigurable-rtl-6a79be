// tb_mod_inv: self-checking test of the Euclid modular inverter.
//
// Inverts three random values modulo the NIST P-256 prime (inverses computed
// independently with Fermat's theorem), checks 1 -> 1 and p-1 -> p-1, and that
// the 256-bit inversions average under 800 cycles (paper: about 720).
module tb_mod_inv;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [255:0] a, p, z;
  int checks = 0, failures = 0;
  int total = 0;

  mod_inv dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic run(input logic [255:0] x, input logic [255:0] e);
    int n;
    a = x; start = 1; tick(); start = 0; n = 1;
    while (!done) begin tick(); n++; end
    checks++;
    if (z != e) begin failures++; $display("FAIL: inv(%h) = %h, expected %h", x, z, e); end
    total += n;
  endtask

  initial begin
    start = 0; a = '0;
    p = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff;
    tick(); tick(); rst_n = 1; tick();
    run(256'h795b929e9a9a80fdea7b5bf55eb561a4216363698b529b4a97b750923ceb3ffd, 256'hedb5d2e3eec327b12a46864bd9de2e4830488998bdadd43c0c833d92bdb5ef51);
    run(256'h8a7d43b578633074b7970386fee29476311624273bfd1d338d0038ec42650644, 256'h2349152fca891c9f67de1cf1eb652d957e9d55d2347d6b11a9627b8cc47e849);
    run(256'h3e0a813bdc2ae9963d2e49085ef3430ed038db4de38378426d0b944a2863a7f, 256'h7c8c20f2bd3448fa1182fce3fc0e5148c570a52af8dbfd98f6055184d80c3657);
    $display("average 256-bit inversion: %0d cycles", total / 3);
    checks++;
    if (total / 3 >= 800) begin failures++; $display("FAIL: inversion too slow"); end
    run(256'h1, 256'h1);
    run(p - 1, p - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
