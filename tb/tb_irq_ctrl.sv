// tb_irq_ctrl: self-checking test of the interrupt controller against a
// cycle-level model: random source activity, enables and edge/level modes,
// with random write-1-to-clear of pending edge bits; pending and irq are
// compared every cycle. Directed checks: an edge stays pending after its
// source falls until cleared, a level does not.
module tb_irq_ctrl;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] src, enable, edge_mode, clr_mask, pending;
  logic clr_we, irq;
  logic [N-1:0] m_prev, m_edge, m_pend;
  int checks = 0, failures = 0;

  irq_ctrl dut (.*);

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

  initial begin
    int bad = 0;
    src = 0; enable = 0; edge_mode = 0; clr_we = 0; clr_mask = 0;
    m_prev = 0; m_edge = 0;
    tick(); rst_n = 1; tick();
    for (int n = 0; n < 2000; n++) begin
      src = N'($urandom); clr_we = ($urandom_range(0, 3) == 0); clr_mask = N'($urandom);
      if (n % 100 == 0) begin enable = N'($urandom); edge_mode = N'($urandom); end
      // model: the edge bits update at the clock edge
      m_edge = (m_edge & ~(clr_we ? clr_mask : '0)) | (src & ~m_prev);
      m_prev = src;
      tick();
      m_pend = (edge_mode & m_edge) | (~edge_mode & src);
      if (pending != m_pend || irq != |(m_pend & enable)) bad++;
    end
    check(bad == 0, $sformatf("random run, %0d mismatching cycles", bad));
    clr_we = 1; clr_mask = '1; src = 0; tick(); clr_we = 0; tick();
    enable = 8'h03; edge_mode = 8'h01;
    src = 8'h03; tick(); src = 8'h00; tick(); tick();
    check(pending == 8'h01 && irq, "edge source stays pending");
    clr_we = 1; clr_mask = 8'h01; tick(); clr_we = 0;
    check(pending == 8'h00 && !irq, "edge cleared, level gone");
    src = 8'h02; #1; check(irq, "level source");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
