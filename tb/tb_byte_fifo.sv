// tb_byte_fifo: self-checking test of the 256-byte packet FIFO. Random
// simultaneous reads and writes are compared with a queue model; the FIFO is
// then filled to 256 bytes to check `full`, that a further write is dropped,
// and drained in order.
module tb_byte_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en, full, empty;
  logic [7:0] wdata, rdata;
  logic [8:0] count;
  logic [7:0] q[$];
  int checks = 0, failures = 0;

  byte_fifo dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wdata = 0;
    tick(); rst_n = 1; tick();
    chk(empty && count == 0, "empty after reset");
    for (int n = 0; n < 2000; n++) begin
      wr_en = $urandom_range(0, 1); rd_en = $urandom_range(0, 1); wdata = 8'($urandom);
      if (rd_en && !empty) begin
        chk(rdata == q[0], "read data");
        void'(q.pop_front());
      end
      if (wr_en && !full) q.push_back(wdata);
      tick();
      chk(count == 9'(q.size()), "count");
    end
    wr_en = 0; rd_en = 0;
    while (!empty) begin void'(q.pop_front()); rd_en = 1; tick(); end
    rd_en = 0;
    for (int n = 0; n < 256; n++) begin wr_en = 1; wdata = 8'(n); tick(); end
    chk(full && count == 256, "full at 256");
    wdata = 8'hAA; tick(); wr_en = 0;
    chk(count == 256, "write to full FIFO dropped");
    for (int n = 0; n < 256; n++) begin
      chk(rdata == 8'(n), "drain order");
      rd_en = 1; tick();
    end
    rd_en = 0;
    chk(empty, "empty after drain");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
