// tb_dtls_soc: end-to-end test of the whole design at its default sizes,
// driven the way the processor software would drive it: through the
// memory-mapped bus, the clock crossing into the engine, the sleep gate and
// the interrupt controller. The sequence is
//   1. RAM access through the bus, and the micro stack hidden from it;
//   2. a P-256 key pair computation, k*G (comb pre-computation of G, then the
//      scalar multiplication), each command followed by WFI: the processor
//      clock must stop until the engine's done interrupt wakes it;
//   3. the engine clock switched to clk/4 (divider mode), then an AES-GCM
//      encryption of the standard test case (20 AAD bytes 3i+1, 40 text
//      bytes 5i+7);
//   4. the engine clock gated off and on again;
//   5. DRBG instantiate and generate, HKDF-Extract (salt byte 5i+1, IKM
//      byte 3i+7), and the transcript hash of 150 bytes
//      (7i+3) pushed through the IN FIFO;
//   6. IN FIFO overflow, retransmission timer expiry as an edge-triggered
//      interrupt, and an external level-triggered interrupt.
// Before step 2 the instruction cache fetches one word that misses and is
// refilled from a card model through the SD controller (one CMD17, checked),
// then one that hits in one cycle. The data memory then
// takes a word write and a byte write, and one read checks both.
// Expected values come from independent models. Each mechanism is counted
// and one that never happened counts as a failure.
module tb_dtls_soc;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        bus_valid, bus_we, bus_ready, wfi, core_clk, irq, sleeping, de_clk;
  logic [15:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic [5:0]  ext_irq;
  logic        sm_in_rd, sm_in_empty, sm_data_rd, sm_data_empty, sm_out_wr, sm_out_full;
  logic        sm_timer_arm, timer_expired;
  logic [7:0]  sm_in_rdata, sm_data_rdata, sm_out_wdata;
  logic        if_req, if_rdy;
  logic [31:0] if_addr, if_instr;
  logic [7:0]  sd_cfg;
  logic        sd_busy, sd_error, sd_clk, sd_cmd_out, sd_cmd_oe, sd_cmd_in;
  logic [3:0]  sd_dat;
  int          sd_cmds;
  logic [31:0] sd_arg;
  bit          sd_crc_ok;
  logic        dm_en;
  logic [3:0]  dm_we;
  logic [15:0] dm_addr;
  logic [31:0] dm_wdata, dm_rdata;
  int checks = 0, failures = 0;

  dtls_soc dut (.*);

  // mechanism counters
  int n_cdc = 0, n_stack = 0, n_sleep = 0, n_wake = 0, n_div = 0, n_gate = 0, n_ecc = 0,
      n_gcm = 0, n_drbg = 0, n_hkdf = 0, n_hash = 0, n_ovf = 0, n_timer = 0, n_ext = 0,
      n_imiss = 0, n_ihit = 0, n_dmem = 0;
  int n_core = 0, n_de = 0;
  always @(posedge core_clk) n_core++;
  always @(posedge de_clk) n_de++;
  logic sleeping_q = 0;
  always @(posedge clk) begin
    if (sleeping && !sleeping_q) n_sleep++;
    if (!sleeping && sleeping_q) n_wake++;
    sleeping_q <= sleeping;
  end

  // SD card holding the program: word at A is A*0x9E3779B1 ^ 0x5A5A5A5A
  sd_card_model card (.sd_clk, .cmd_out(sd_cmd_out), .cmd_oe(sd_cmd_oe), .cmd_in(sd_cmd_in),
                      .dat(sd_dat), .bad_crc(1'b0), .cmds(sd_cmds), .last_arg(sd_arg),
                      .cmd_crc_ok(sd_crc_ok));
  function automatic logic [31:0] prog_word(input logic [31:0] a);
    return (a * 32'h9E3779B1) ^ 32'h5A5A5A5A;
  endfunction

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic fetch(input logic [31:0] a, output int lat);
    if_addr = a; if_req = 1'b1; lat = 0;
    do begin tick(); lat++; end while (!if_rdy);
    check(if_instr == prog_word(a), $sformatf("instruction at %h", a));
    if_req = 1'b0; tick();
  endtask
  task automatic access(input bit we, input int a, input logic [31:0] d, output logic [31:0] q);
    int n = 0;
    bus_valid = 1; bus_we = we; bus_addr = 16'(a); bus_wdata = d;
    do begin tick(); n++; end while (!bus_ready && n < 1000);
    q = bus_rdata; bus_valid = 0; bus_we = 0;
    if (a < 16'h1000) n_cdc++;
  endtask
  task automatic wr(input int a, input logic [31:0] d);
    logic [31:0] q; access(1, a, d, q);
  endtask
  task automatic rd(input int a, output logic [31:0] q);
    access(0, a, '0, q);
  endtask
  function automatic int acc(input int w); return 4 * (ACC_BASE + w); endfunction
  task automatic wr256(input int w, input logic [255:0] v);
    for (int j = 0; j < 8; j++) wr(acc(w + j), v[255 - 32*j -: 32]);
  endtask
  task automatic rd256(input int w, output logic [255:0] v);
    logic [31:0] d;
    for (int j = 0; j < 8; j++) begin rd(acc(w + j), d); v[255 - 32*j -: 32] = d; end
  endtask
  task automatic wr_bytes(input int w, input int len, input int mul, input int add);
    logic [31:0] d;
    for (int q = 0; q < (len + 3) / 4; q++) begin
      d = '0;
      for (int b = 0; b < 4; b++)
        if (4*q + b < len) d[31 - 8*b -: 8] = 8'(((4*q + b) * mul + add) & 255);
      wr(acc(w + q), d);
    end
  endtask
  // start a command, sleep until the done interrupt, clear it
  task automatic run_sleep(input de_cmd_e c);
    int c0;
    logic [31:0] st;
    wr(16'h0800, 32'(c));
    wr(16'h1014, 1);                      // WFI
    c0 = n_core;
    tick();
    check(sleeping, $sformatf("asleep after command %0d", c));
    while (sleeping) tick();
    check(n_core - c0 <= 2, $sformatf("processor clock stopped while asleep (%0d edges)", n_core - c0));
    rd(16'h0804, st); check(st[1:0] == 2'b10, $sformatf("command %0d done", c));
    wr(16'h0804, 0);
    repeat (4) tick();
  endtask

  initial begin
    logic [255:0] v;
    logic [31:0]  d;
    int e0, c0;
    bus_valid = 0; bus_we = 0; bus_addr = 0; bus_wdata = 0; wfi = 0; ext_irq = 0;
    sm_in_rd = 0; sm_data_rd = 0; sm_out_wr = 0; sm_out_wdata = 0; sm_timer_arm = 0;
    if_req = 0; if_addr = 0; sd_cfg = 8'd1; dm_en = 0; dm_we = 0; dm_addr = 0; dm_wdata = 0;
    tick(); tick(); rst_n = 1; tick();
    wr(16'h1008, 32'h07);                 // enable engine, timer, ext_irq[0]
    wr(16'h100C, 32'h02);                 // timer interrupt edge-triggered

    // 1. RAM and the protected stack
    wr(4 * 7, 32'h1234_5678); rd(4 * 7, d); check(d == 32'h1234_5678, "config word through the bus");
    wr(4 * (STACK_BASE + 3), 32'hFFFF_FFFF); rd(4 * (STACK_BASE + 3), d);
    check(d == 0, "stack not visible"); if (d == 0) n_stack++;

    // instruction fetch: a miss refilled from the program store, then a hit
    fetch(32'h0000_0100, c0);
    check(sd_cmds == 1 && sd_crc_ok && sd_arg == 0 && !sd_error, "SD block read for the miss");
    if (c0 > 2) n_imiss++;
    $display("instruction fetch miss through the SD card: %0d cycles", c0);
    fetch(32'h0000_0104, c0); check(c0 == 1, $sformatf("fetch hit latency %0d", c0));
    if (c0 == 1) n_ihit++;

    // data memory: a word write, a byte write, then a read one cycle later
    dm_en = 1; dm_we = 4'hF; dm_addr = 16'h0040; dm_wdata = 32'hDEAD_BEEF; tick();
    dm_we = 4'h2; dm_wdata = 32'h0000_5A00; tick();
    dm_we = 4'h0; tick(); dm_en = 0;
    check(dm_rdata == 32'hDEAD_5AEF, "data memory byte write"); if (dm_rdata == 32'hDEAD_5AEF) n_dmem++;

    // 2. P-256 k*G with sleep during each command
    wr256(0, 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff);
    wr256(8, 256'hffffffff00000001000000000000000000000000fffffffffffffffffffffffc);
    wr256(24, 256'h6B17D1F2E12C4247F8BCE6E563A440F277037D812DEB33A0F4A13945D898C296);
    wr256(32, 256'h4FE342E2FE1A7F9B8EE7EB4A7C0F9E162BCE33576B315ECECBB6406837BF51F5);
    wr(acc(40), {17'd0, 3'(ECC_PRECOMP), 3'd1, 9'd256});
    e0 = n_de; run_sleep(CMD_ECC);
    $display("P-256 comb pre-computation: %0d engine cycles incl. bus", n_de - e0);
    wr256(16, 256'hcb1e29c658cda1495e60af593bd04cf0fd630f1f29d0da9953f48f1a09f76b5);
    wr(acc(40), {17'd0, 3'(ECC_ECSM), 3'd1, 9'd256});
    e0 = n_de; run_sleep(CMD_ECC);
    $display("P-256 scalar multiplication: %0d engine cycles incl. bus", n_de - e0);
    check(n_de - e0 < 200000, "P-256 k*G within 200k cycles");
    rd256(24, v); check(v == 256'h6cd30a46cf7f7d2d3a4e4dabcfde957555319ab0645fa7c1ed49aff44735c26c, "k*G x");
    rd256(32, v); check(v == 256'h77440f105d2b7a6abbb6939fff7d1c238efa74fd6b188f022cceebdfb1fdf4d3, "k*G y");
    if (v == 256'h77440f105d2b7a6abbb6939fff7d1c238efa74fd6b188f022cceebdfb1fdf4d3) n_ecc++;

    // 3. divided engine clock, AES-GCM
    wr(16'h1004, 0); wr(16'h1000, 2); wr(16'h1004, 1);
    e0 = n_de; repeat (80) tick();
    check(n_de - e0 >= 19 && n_de - e0 <= 21, $sformatf("clk/4: %0d edges in 80 cycles", n_de - e0));
    if (n_de - e0 >= 19 && n_de - e0 <= 21) n_div++;
    wr(acc(0), 32'hfeffe992); wr(acc(1), 32'h8665731c); wr(acc(2), 32'h6d6a8f94); wr(acc(3), 32'h67308308);
    wr(acc(4), 32'hcafebabe); wr(acc(5), 32'hfacedbad); wr(acc(6), 32'hdecaf888);
    wr(acc(7), {16'd20, 16'd40}); wr(acc(12), 0);
    wr_bytes(13, 20, 3, 1); wr_bytes(21, 40, 5, 7);
    run_sleep(CMD_GCM);
    rd(acc(8), d);  check(d == 32'h503fd2e9, "GCM tag word 0");
    rd(acc(11), d); check(d == 32'h912102b7, "GCM tag word 3");
    rd(acc(21), d); check(d == 32'h9cbe3df1, "GCM ciphertext word 0");
    if (d == 32'h9cbe3df1) n_gcm++;
    wr(16'h1004, 0); wr(16'h1000, 0); wr(16'h1004, 1);

    // 4. engine clock gate
    wr(16'h1004, 0); e0 = n_de; repeat (50) tick();
    check(n_de == e0, "engine clock gated"); if (n_de == e0) n_gate++;
    wr(16'h1004, 1); rd(acc(21), d); check(d == 32'h9cbe3df1, "engine state kept while gated");

    // 5. DRBG and transcript
    for (int q = 0; q < 8; q++) begin
      d = '0;
      for (int b = 0; b < 4; b++) d[31 - 8*b -: 8] = 8'(((4*q + b) * 7 + 9) & 255);
      wr(4 * (CFG_BASE + 100 + q), d);
    end
    run_sleep(CMD_DRBG_INST); run_sleep(CMD_DRBG_GEN); rd256(0, v);
    check(v == 256'h9cb3ad7e81ea47d2000fe83ef3a497e4d8c0ca84bdba0fd9a25f99dfbbd28101, "DRBG output");
    if (v == 256'h9cb3ad7e81ea47d2000fe83ef3a497e4d8c0ca84bdba0fd9a25f99dfbbd28101) n_drbg++;
    for (int q = 0; q < 8; q++) begin
      d = '0;
      for (int b = 0; b < 4; b++) d[31 - 8*b -: 8] = 8'((5*(4*q + b) + 1) & 255);
      wr(acc(q), d);
      for (int b = 0; b < 4; b++) d[31 - 8*b -: 8] = 8'((3*(4*q + b) + 7) & 255);
      wr(acc(8 + q), d);
    end
    run_sleep(CMD_HKDF_EXT); rd256(0, v);
    check(v == 256'h61d5e6a163cf15e2de7d07c24301b62eaab4e6d14cb4e2c68453f4f816235c3b, "HKDF extract");
    if (v == 256'h61d5e6a163cf15e2de7d07c24301b62eaab4e6d14cb4e2c68453f4f816235c3b) n_hkdf++;
    for (int i = 0; i < 150; i++) wr(16'h0808, 32'((i * 7 + 3) & 255));
    wr(acc(0), 150); run_sleep(CMD_TPUSH); run_sleep(CMD_TSNAP); rd256(0, v);
    check(v == 256'hc695ceb0b71f85051f19f35d77dcf44ed433c9db49f46d7858a599f6186af365, "transcript hash");
    if (v == 256'hc695ceb0b71f85051f19f35d77dcf44ed433c9db49f46d7858a599f6186af365) n_hash++;

    // 6. FIFO overflow, timer interrupt, external interrupt
    for (int i = 0; i < 258; i++) wr(16'h0808, 32'(i));
    rd(16'h0814, d); check(d[8:0] == 256 && d[9], "IN FIFO full"); if (d[9]) n_ovf++;
    wr(16'h0818, 300); wr(16'h081C, 0); wr(16'h0820, 1);
    wr(16'h1014, 1); tick();
    check(sleeping, "asleep waiting for the timer");
    c0 = 0; while (sleeping && c0 < 2000) begin tick(); c0++; end
    rd(16'h1010, d); check(d[1], "timer interrupt pending"); if (d[1]) n_timer++;
    wr(16'h0820, 6); wr(16'h1010, 32'h02); repeat (6) tick();
    rd(16'h1010, d); check(!d[1] && !irq, "timer interrupt cleared");
    wr(16'h1014, 1); tick(); repeat (20) tick();
    check(sleeping, "asleep with no interrupt");
    ext_irq[0] = 1; tick(); tick();
    check(!sleeping && irq, "external interrupt wakes"); if (!sleeping) n_ext++;
    ext_irq[0] = 0; tick(); check(!irq, "level interrupt follows its source");

    $display("mechanisms: cdc=%0d stack=%0d sleep=%0d wake=%0d div=%0d gate=%0d ecc=%0d gcm=%0d drbg=%0d hkdf=%0d hash=%0d fifo_full=%0d timer=%0d ext_irq=%0d imiss=%0d ihit=%0d dmem=%0d",
             n_cdc, n_stack, n_sleep, n_wake, n_div, n_gate, n_ecc, n_gcm, n_drbg, n_hkdf, n_hash, n_ovf, n_timer, n_ext, n_imiss, n_ihit, n_dmem);
    check(n_cdc > 0 && n_stack > 0 && n_sleep > 0 && n_wake > 0 && n_div > 0 && n_gate > 0 && n_ecc > 0 &&
          n_gcm > 0 && n_drbg > 0 && n_hkdf > 0 && n_hash > 0 && n_ovf > 0 && n_timer > 0 && n_ext > 0 &&
          n_imiss > 0 && n_ihit > 0 && n_dmem > 0, "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
