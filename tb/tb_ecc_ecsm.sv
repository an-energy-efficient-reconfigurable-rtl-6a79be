// tb_ecc_ecsm: self-checking test of the comb scalar multiplier.
//
// Reference points were computed with an independent affine double-and-add
// implementation using Fermat inversion. Tests:
//  * a random curve over the 61-bit prime 2^61-1 (a length that is not a
//    multiple of 4): comb pre-computation in slot 0, then k*P for an even and
//    an odd k (the two correction paths);
//  * NIST P-256 with its generator in slot 1 and a random 255-bit scalar;
//  * slot 0 again after slot 1 was written (slots are independent);
//  * field multiply and inverse modulo the P-256 prime.
// The 256-bit scalar multiplication must take fewer than 250k cycles (the
// paper measures about 180k with its cheaper point formulas).
module tb_ecc_ecsm;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  ecc_cmd_e cmd;
  logic [2:0] slot;
  logic [255:0] p, a_coef, k, x_in, y_in, x_out, y_out;
  logic [8:0] tlen;
  int checks = 0, failures = 0;

  ecc_ecsm dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input ecc_cmd_e c, output int cyc);
    cmd = c; start = 1'b1; tick(); start = 1'b0; cyc = 1;
    while (!done) begin tick(); cyc++; end
    tick();
  endtask

  localparam logic [255:0] P256 = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff;
  int cyc;
  initial begin
    start = 0; cmd = ECC_PRECOMP; slot = 0; k = '0;
    tick(); tick(); rst_n = 1; tick();
    // small curve
    p = 256'h1fffffffffffffff; tlen = 61; a_coef = 256'h1e54e9bc52e6b438;
    x_in = 256'hca264e1269e0d37; y_in = 256'h18b8ffaa6a3a450; slot = 0;
    run(ECC_PRECOMP, cyc);
    $display("61-bit comb pre-computation: %0d cycles", cyc);
    k = 256'h3031d03125f2056; run(ECC_ECSM, cyc);
    check(x_out == 256'h17c3d1a234d60c5e && y_out == 256'h14a2addfdc720625, "61-bit even k");
    $display("61-bit ECSM: %0d cycles", cyc);
    k = 256'h6deceb903ce9deb; run(ECC_ECSM, cyc);
    check(x_out == 256'hd605333f24d6d72 && y_out == 256'hbec0caeb1bd477a, "61-bit odd k");
    // P-256
    p = P256; tlen = 256; a_coef = P256 - 3; slot = 1;
    x_in = 256'h6B17D1F2E12C4247F8BCE6E563A440F277037D812DEB33A0F4A13945D898C296;
    y_in = 256'h4FE342E2FE1A7F9B8EE7EB4A7C0F9E162BCE33576B315ECECBB6406837BF51F5;
    run(ECC_PRECOMP, cyc);
    $display("256-bit comb pre-computation: %0d cycles", cyc);
    k = 256'hcb1e29c658cda1495e60af593bd04cf0fd630f1f29d0da9953f48f1a09f76b5;
    run(ECC_ECSM, cyc);
    check(x_out == 256'h6cd30a46cf7f7d2d3a4e4dabcfde957555319ab0645fa7c1ed49aff44735c26c &&
          y_out == 256'h77440f105d2b7a6abbb6939fff7d1c238efa74fd6b188f022cceebdfb1fdf4d3, "P-256 k*G");
    $display("256-bit ECSM: %0d cycles", cyc);
    check(cyc < 250000, "256-bit ECSM cycle budget");
    // slot 0 still holds the small-curve table
    p = 256'h1fffffffffffffff; tlen = 61; a_coef = 256'h1e54e9bc52e6b438; slot = 0;
    k = 256'h6deceb903ce9deb; run(ECC_ECSM, cyc);
    check(x_out == 256'hd605333f24d6d72 && y_out == 256'hbec0caeb1bd477a, "slot 0 after slot 1");
    // field operations mod the P-256 prime
    p = P256; tlen = 256;
    x_in = 256'h6b4cb2424a23d5962217beaddbc496cb8e81973e0becd7b03898d190f9ebdacc;
    y_in = 256'hae97ba94d0eda82f8f6d05584ef8aa38922766581e27a1c08a6a63ec24ede6a4;
    run(ECC_FMUL, cyc);
    check(x_out == 256'h4f39e504bc910414f6b4a6f8b34e12877f3d2bc1a78e11e21219d410c69771c6, "field multiply");
    x_in = 256'h6b4cb2424a23d5962217beaddbc496cb8e81973e0becd7b03898d190f9ebdacc;
    run(ECC_FINV, cyc);
    check(x_out == 256'h329693598d78df7e8d2bbccf719246bd30f55a72913fff1781c73a650f41e05f, "field inverse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
