// tb_clock_ctrl: self-checking test of sleep gating and the engine clock.
// Rising edges of core_clk and de_clk are counted over windows of 60 clk
// cycles: core_clk must follow clk until wfi, stop while sleeping and resume
// after wake; wfi and wake together must not sleep; de_clk must follow clk
// with the divider at 0, give one edge per 2n clk cycles with the divider at
// n (n = 1, 3, 5) and stop when disabled.
module tb_clock_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wfi, wake, de_en, sleeping, core_clk, de_clk;
  logic [7:0] div_cfg;
  int checks = 0, failures = 0;
  int n_core = 0, n_de = 0;

  clock_ctrl dut (.*);

  always @(posedge core_clk) n_core++;
  always @(posedge de_clk) n_de++;

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
  task automatic window(output int c, output int d);
    int c0 = n_core, d0 = n_de;
    repeat (60) tick();
    c = n_core - c0; d = n_de - d0;
  endtask

  initial begin
    int c, d;
    wfi = 0; wake = 0; de_en = 1; div_cfg = 0;
    tick(); rst_n = 1; tick(); tick();
    window(c, d); check(c == 60 && d == 60, $sformatf("running: core %0d de %0d", c, d));
    wfi = 1; tick(); wfi = 0; tick();
    window(c, d); check(c == 0 && sleeping, $sformatf("sleeping: core %0d", c));
    check(d == 60, "engine clock runs while the processor sleeps");
    wake = 1; tick(); wake = 0; tick();
    window(c, d); check(c == 60 && !sleeping, $sformatf("woken: core %0d", c));
    wfi = 1; wake = 1; tick(); wfi = 0; wake = 0; tick();
    check(!sleeping, "wake wins over wfi");
    for (int n = 1; n <= 5; n += 2) begin
      de_en = 0; tick(); div_cfg = 8'(n); repeat (4 * n) tick(); de_en = 1; repeat (4 * n) tick();
      window(c, d);
      check(d >= 60 / (2 * n) && d <= 60 / (2 * n) + 1, $sformatf("divider %0d: %0d edges", n, d));
    end
    de_en = 0; tick(); tick();
    window(c, d); check(d == 0, $sformatf("engine clock gated: %0d edges", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
