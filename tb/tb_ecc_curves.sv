// tb_ecc_curves: workload test of the comb scalar multiplier at the smaller
// curve sizes the chip supports, run on the full-width (256-bit) unit.
//
// For NIST P-192 and SECG secp160r1 the test builds the comb table of the
// standard generator, then computes k*G for a random scalar and compares the
// affine result with a point computed by an independent affine
// double-and-add model. It prints the pre-computation and scalar
// multiplication cycle counts and checks the scalar multiplication against the
// published figures (about 102k cycles at 192 bits and 74k at 160 bits) with
// a +/-20% band; this design's point formulas are its own, so an exact match is
// not expected. Driving follows tb_ecc_ecsm: a one-cycle start pulse, then
// wait for done. The watchdog ends the run after 3M cycles.
module tb_ecc_curves;
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

  localparam logic [255:0] P192 = 256'hfffffffffffffffffffffffffffffffeffffffffffffffff;
  localparam logic [255:0] P160 = 256'hffffffffffffffffffffffffffffffff7fffffff;
  int cyc;
  initial begin
    start = 0; cmd = ECC_PRECOMP; slot = 0; k = '0;
    tick(); tick(); rst_n = 1; tick();
    // P-192
    p = P192; tlen = 192; a_coef = P192 - 3; slot = 0;
    x_in = 256'h188da80eb03090f67cbf20eb43a18800f4ff0afd82ff1012;
    y_in = 256'h07192b95ffc8da78631011ed6b24cdd573f977a11e794811;
    run(ECC_PRECOMP, cyc);
    $display("192-bit comb pre-computation: %0d cycles", cyc);
    k = 256'h301850c5a38fd547923a736994e3bf911a61dbe22e44158b;
    run(ECC_ECSM, cyc);
    check(x_out == 256'hfb5cb62b58cbf193fede335b06ebd87eeee3dda39916271d &&
          y_out == 256'h2ff2fffe2427e1ac88c5c3c09883f4ac37a70cc1e3d4810d, "P-192 k*G");
    $display("192-bit ECSM: %0d cycles", cyc);
    check(cyc > 81600 && cyc < 122400, "192-bit ECSM within 20% of 102k");
    // secp160r1
    p = P160; tlen = 160; a_coef = P160 - 3; slot = 1;
    x_in = 256'h4a96b5688ef573284664698968c38bb913cbfc82;
    y_in = 256'h23a628553168947d59dcc912042351377ac5fb32;
    run(ECC_PRECOMP, cyc);
    $display("160-bit comb pre-computation: %0d cycles", cyc);
    k = 256'h1012f037b64ce4228c38fb2918f135d25f557203;
    run(ECC_ECSM, cyc);
    check(x_out == 256'he4de2cc761765cb8b0170ba55bd56036a485b5a7 &&
          y_out == 256'hb9bd7103f6e98ba904440d5796d9143883cc278c, "secp160r1 k*G");
    $display("160-bit ECSM: %0d cycles", cyc);
    check(cyc > 59200 && cyc < 88800, "160-bit ECSM within 20% of 74k");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
