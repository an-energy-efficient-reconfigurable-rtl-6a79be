// tb_data_mem: self-checking test of the 64 KB data memory at its default
// size. A shadow array in the testbench holds the expected contents. The test
// writes every word once with a known pattern. It then does 20000 random
// accesses (reads, byte, half-word and word writes) and checks that every
// read returns the shadow's word one cycle after the request (the one-cycle
// read latency), and that a write returns the old word. It ends by reading
// back the first and last words. The watchdog ends the run after 200k cycles.
module tb_data_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic        en;
  logic [3:0]  we;
  logic [15:0] addr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;

  data_mem dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] shadow [16384];

  // one access; returns the word read (old contents for a write)
  task automatic access(input logic [3:0] w, input int word, input logic [31:0] d, output logic [31:0] q);
    en = 1'b1; we = w; addr = 16'(word * 4); wdata = d;
    tick();
    en = 1'b0; we = '0;
    q = rdata;
    for (int b = 0; b < 4; b++) if (w[b]) shadow[word][8*b +: 8] = d[8*b +: 8];
  endtask

  initial begin
    logic [31:0] q, old;
    en = 0; we = 0; addr = 0; wdata = 0;
    tick();
    for (int i = 0; i < 16384; i++) access(4'hF, i, 32'(i) * 32'h0101_0007 ^ 32'hC3A5_0000, q);
    for (int i = 0; i < 20000; i++) begin
      int w = $urandom_range(16383);
      logic [3:0] m;
      case ($urandom_range(3))
        0: m = 4'h0;
        1: m = 4'h1 << $urandom_range(3);
        2: m = $urandom_range(1) ? 4'h3 : 4'hC;
        default: m = 4'hF;
      endcase
      old = shadow[w];
      access(m, w, $urandom, q);
      check(q == old, $sformatf("word %0d", w));
    end
    access(4'h0, 0, 0, q);     check(q == shadow[0], "first word");
    access(4'h0, 16383, 0, q); check(q == shadow[16383], "last word");
    // a read without en leaves rdata unchanged
    addr = 16'd8; tick(); check(rdata == shadow[16383], "rdata held while en is low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
