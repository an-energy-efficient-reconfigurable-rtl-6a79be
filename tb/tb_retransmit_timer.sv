// tb_retransmit_timer: self-checking test of the retransmission timer. With
// a timeout of 37 the expiry pulses must come exactly 37 cycles after arming
// and every 37 cycles after that; re-arming restarts the count; stop and a
// zero timeout suppress expiry.
module tb_retransmit_timer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic arm, stop, running, expired;
  logic [63:0] timeout, count;
  int checks = 0, failures = 0;

  retransmit_timer dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // cycles from now until the next expiry pulse
  task automatic wait_exp(output int n);
    n = 0;
    do begin tick(); n++; end while (!expired && n < 1000);
  endtask

  initial begin
    int n;
    arm = 0; stop = 0; timeout = 64'd37;
    tick(); rst_n = 1; tick();
    arm = 1; tick(); arm = 0;
    wait_exp(n); chk(n == 37, $sformatf("first expiry after %0d", n));
    wait_exp(n); chk(n == 37, $sformatf("second expiry after %0d", n));
    repeat (20) tick();
    arm = 1; tick(); arm = 0;
    wait_exp(n); chk(n == 37, $sformatf("re-armed expiry after %0d", n));
    stop = 1; tick(); stop = 0;
    wait_exp(n); chk(n == 1000 && !running, "stopped timer silent");
    timeout = 0; arm = 1; tick(); arm = 0;
    wait_exp(n); chk(n == 1000, "zero timeout never expires");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
