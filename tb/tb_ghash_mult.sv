// tb_ghash_mult: self-checking test of the GF(2^128) multiplier. One product
// is the published GCM test case 2 value (X1 = C1 * H); 30 more random
// products are compared with a bit-serial reference written from the GCM
// definition (128 iterations of one h-stage). Every product must take 32
// cycles from start to done, the paper's latency for four h stages.
module tb_ghash_mult;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [127:0] x, y, z;
  int checks = 0, failures = 0;

  ghash_mult dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [127:0] gmul(input logic [127:0] a, input logic [127:0] b);
    logic [127:0] zz = '0, v = b;
    for (int i = 127; i >= 0; i--) begin
      if (a[i]) zz ^= v;
      v = v[0] ? ((v >> 1) ^ {8'hE1, 120'd0}) : (v >> 1);
    end
    return zz;
  endfunction

  task automatic mul(input logic [127:0] a, input logic [127:0] b, input logic [127:0] exp);
    int cyc = 0;
    x = a; y = b; start = 1; tick(); start = 0; cyc = 1;
    while (!done && cyc < 100) begin tick(); cyc++; end
    check(z == exp, $sformatf("product %h", z));
    check(cyc == 32, $sformatf("latency %0d", cyc));
  endtask

  initial begin
    start = 0; x = '0; y = '0;
    tick(); rst_n = 1; tick();
    mul(128'h0388dace60b6a392f328c2b971b2fe78, 128'h66e94bd4ef8a2c3b884cfa59ca342b2e,
        128'h5e2ec746917062882c85b0685353deb7);
    for (int n = 0; n < 30; n++) begin
      logic [127:0] a, b;
      a = {$urandom, $urandom, $urandom, $urandom}; b = {$urandom, $urandom, $urandom, $urandom};
      mul(a, b, gmul(a, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
