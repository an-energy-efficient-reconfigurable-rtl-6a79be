// tb_dtls_ram: self-checking test of the DTLS RAM regions. Every word is
// written through the engine port and read back through both ports: the
// config and accelerator regions must be visible on the bus port and the
// micro stack must read as zero there. Bus writes into the stack must be
// dropped, bus writes elsewhere must reach the engine port.
module tb_dtls_ram;
  import dtls_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, a_we, b_en, b_we;
  logic [8:0] a_addr, b_addr;
  logic [31:0] a_wdata, a_rdata, b_wdata, b_rdata;
  int checks = 0, failures = 0;

  dtls_ram dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  function automatic logic [31:0] pat(int a); return 32'(a * 32'h9E3779B1); endfunction

  initial begin
    int bad_a = 0, bad_b = 0;
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    tick();
    for (int w = 0; w < RAM_WORDS; w++) begin
      b_en = 1; b_we = 1; b_addr = 9'(w); b_wdata = pat(w); tick();
    end
    b_we = 0;
    for (int w = 0; w < RAM_WORDS; w++) begin
      a_en = 1; a_addr = 9'(w); b_addr = 9'(w); tick();
      if (a_rdata != ((w < STACK_BASE) ? pat(w) : 32'h0)) bad_a++;
      if (b_rdata != pat(w)) bad_b++;
    end
    checks++; if (bad_a != 0) begin failures++; $display("FAIL: bus port view, %0d words", bad_a); end
    checks++; if (bad_b != 0) begin failures++; $display("FAIL: engine port view, %0d words", bad_b); end
    a_we = 1; a_addr = 9'(STACK_BASE + 5); a_wdata = 32'hDEADBEEF; tick();
    a_addr = 9'(ACC_BASE + 3); a_wdata = 32'h12345678; tick();
    a_we = 0; b_addr = 9'(STACK_BASE + 5); tick();
    checks++; if (b_rdata != pat(STACK_BASE + 5)) begin failures++; $display("FAIL: bus wrote stack"); end
    b_addr = 9'(ACC_BASE + 3); tick();
    checks++; if (b_rdata != 32'h12345678) begin failures++; $display("FAIL: bus write lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
