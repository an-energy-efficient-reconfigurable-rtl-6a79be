// tb_icache: self-checking test of the instruction cache at its default size
// (16 KB, 4 ways, 512-byte lines).
//
// The backing store is modelled in the testbench. The word at byte address A
// is A*0x9E3779B1 ^ 0x5A5A5A5A. The store answers each refill request with 128
// words, and in the random phase it inserts random idle cycles between them.
// A reference model of the cache state predicts hit or miss and the latency
// of every fetch:
//  * the tags of each set;
//  * the tree pseudo-LRU bits;
//  * the last-line register, which always holds the line of the previous fetch.
// Latencies, in cycles from `req` to `rdy`:
//  * 1 for the last line;
//  * 2 + n for a hit n probes after the predicted (MRU) way;
//  * 136 plus the store's idle cycles for a miss, made up of 4 probes, the
//    request, 1 cycle for the store to start, 128 words, then a probe and the
//    response.
// Tests:
//  * a directed sequence that fills all four ways of one set, then evicts the
//    least recently used line;
//  * 3000 random fetches over 10 lines in two sets, so lines are evicted often.
// Each fetch checks the returned word and the exact latency.
// The watchdog ends the run after 2M cycles.
module tb_icache;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        req, rdy, mem_req, mem_valid;
  logic [31:0] addr, instr, mem_addr, mem_data;
  int checks = 0, failures = 0;

  icache dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] word_at(input logic [31:0] a);
    return (a * 32'h9E3779B1) ^ 32'h5A5A5A5A;
  endfunction

  // backing store
  bit          gaps = 0;
  int          left = 0, idx = 0, gap_cycles = 0, refills = 0;
  logic [31:0] base;
  always @(posedge clk) begin
    mem_valid <= 1'b0;
    if (mem_req) begin
      base <= mem_addr; left <= 128; idx <= 0; refills <= refills + 1;
    end else if (left > 0) begin
      if (gaps && $urandom_range(3) == 0) gap_cycles <= gap_cycles + 1;
      else begin
        mem_valid <= 1'b1;
        mem_data  <= word_at(base + 32'(4 * idx));
        idx <= idx + 1; left <= left - 1;
      end
    end
  end

  // reference model
  bit          m_v   [8][4];
  logic [19:0] m_tag [8][4];
  logic [2:0]  m_pl  [8];
  bit          last_v = 0;
  logic [31:0] last_line;

  function automatic logic [2:0] touch(input logic [2:0] b, input int w);
    logic [2:0] r = b;
    r[0] = ~w[1];
    if (w[1]) r[2] = ~w[0]; else r[1] = ~w[0];
    return r;
  endfunction

  // returns the expected latency without store idle cycles; 0 marks a miss
  function automatic int model(input logic [31:0] a);
    int s = int'(a[11:9]), hw = -1, mru, vic, lat;
    logic [2:0] b = m_pl[s];
    for (int w = 0; w < 4; w++) if (m_v[s][w] && m_tag[s][w] == a[31:12]) hw = w;
    mru = b[0] ? int'({1'b0, ~b[1]}) : int'({1'b1, ~b[2]});
    vic = b[0] ? int'({1'b1, b[2]}) : int'({1'b0, b[1]});
    if (last_v && last_line == {a[31:9], 9'b0}) lat = 1;
    else if (hw >= 0) lat = 2 + ((hw - mru) & 3);
    else begin
      lat = 0; hw = vic;
      m_v[s][hw] = 1; m_tag[s][hw] = a[31:12];
    end
    m_pl[s] = touch(b, hw);
    last_v = 1; last_line = {a[31:9], 9'b0};
    return lat;
  endfunction

  int n_hit1 = 0, n_pred = 0, n_probe = 0, n_miss = 0;
  task automatic fetch(input logic [31:0] a);
    int lat = 0, g0 = gap_cycles, r0 = refills, exp_lat;
    exp_lat = model(a);
    addr = a; req = 1'b1;
    do begin tick(); lat++; end while (!rdy);
    check(instr == word_at(a), $sformatf("word at %h", a));
    if (exp_lat == 0) begin
      n_miss++;
      check(lat == 136 + (gap_cycles - g0) && refills == r0 + 1,
            $sformatf("miss latency at %h: %0d cycles, %0d idle", a, lat, gap_cycles - g0));
    end else begin
      if (exp_lat == 1) n_hit1++; else if (exp_lat == 2) n_pred++; else n_probe++;
      check(lat == exp_lat && refills == r0,
            $sformatf("hit latency at %h: %0d, expected %0d", a, lat, exp_lat));
    end
    req = 1'b0;
    tick();
  endtask

  logic [31:0] lines [10];
  initial begin
    req = 0; addr = 0;
    for (int s = 0; s < 8; s++) begin
      m_pl[s] = '0;
      for (int w = 0; w < 4; w++) begin m_v[s][w] = 0; m_tag[s][w] = '0; end
    end
    tick(); tick(); rst_n = 1; tick();
    // directed: four lines of set 0, then a fifth one
    fetch(32'h0000_0000);           // miss
    fetch(32'h0000_0004);           // last line
    fetch(32'h0000_1008);           // miss, same set
    fetch(32'h0000_2010);
    fetch(32'h0000_3100);
    fetch(32'h0000_0020);           // hit, probed
    fetch(32'h0000_30fc);           // hit in the predicted (MRU) way after a switch
    fetch(32'h0000_0024);
    fetch(32'h0000_4000);           // miss, evicts the LRU line 0x1000
    fetch(32'h0000_1000);           // must miss again
    fetch(32'h0000_01fc);
    // random: six lines in set 0 and four in set 5, more than the four ways
    for (int i = 0; i < 10; i++)
      lines[i] = {12'(i * 7 + 1), 8'd0, (i < 6) ? 3'd0 : 3'd5, 9'd0};
    gaps = 1;
    for (int i = 0, j = 0; i < 3000; i++) begin
      if ($urandom_range(1) == 0) j = $urandom_range(9);   // else stay in the line
      fetch(lines[j] + 32'(4 * $urandom_range(127)));
    end
    $display("fetches: %0d last-line, %0d predicted, %0d probed, %0d misses",
             n_hit1, n_pred, n_probe, n_miss);
    check(n_hit1 > 0 && n_pred > 0 && n_probe > 0 && n_miss > 0, "every lookup path taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
