// tb_comb_cache: self-checking test of the 4 KB comb point cache: all 128
// words written with random 256-bit values, read back in random order against
// a model array, with the one-cycle read latency; reads with en low must keep
// the output.
module tb_comb_cache;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [6:0] addr;
  logic [255:0] wdata, rdata, model [128];
  int checks = 0, failures = 0;

  comb_cache dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  initial begin
    int bad = 0;
    logic [255:0] held;
    en = 0; we = 0; addr = 0; wdata = '0;
    tick();
    for (int w = 0; w < 128; w++) begin
      for (int j = 0; j < 8; j++) model[w][32*j +: 32] = $urandom;
      en = 1; we = 1; addr = 7'(w); wdata = model[w]; tick();
    end
    we = 0;
    for (int n = 0; n < 500; n++) begin
      addr = 7'($urandom); tick();
      if (rdata != model[addr]) bad++;
    end
    checks++; if (bad != 0) begin failures++; $display("FAIL: %0d bad reads", bad); end
    held = rdata; en = 0; addr = addr + 7'd1; tick();
    checks++; if (rdata != held) begin failures++; $display("FAIL: output changed with en low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
