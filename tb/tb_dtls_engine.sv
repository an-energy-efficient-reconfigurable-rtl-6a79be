// tb_dtls_engine: self-checking test of the DTLS engine through its
// memory-mapped port, at its default sizes. Each command is set up in the
// accelerator config region, started through CMD, waited for through
// STATUS and its results read back from the RAM:
//   SHA    100-byte message (byte i = 9i+2) against an independent SHA2-256;
//   GCM    key/IV of the standard GCM test case, 20 AAD bytes (3i+1) and 40
//          text bytes (5i+7), encrypt and decrypt, tag and tag check;
//   DRBG   instantiate from a seed in the config region (byte b = 7b+9), then
//          generate; the result matches an independent HMAC-DRBG, and the
//          state in the micro stack reads as zero from the bus;
//   TPUSH/TSNAP  150 bytes (7i+3) through the IN FIFO into the transcript,
//          snapshot, 40 more bytes (11i+1), snapshot; TCLEAR;
//   HKDF   extract, then expand with a 49-byte TLS 1.3 style info;
//   ECC    comb pre-computation and k*P on a 61-bit curve (p = 2^61-1) with
//          the full 256-bit datapath, against an independent model;
//   FIFOs and timer: DATA/OUT FIFO paths, IN FIFO overflow, timer expiry.
module tb_dtls_engine;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        s_valid, s_we, irq, timer_flag, timer_expired;
  logic [11:0] s_addr;
  logic [31:0] s_wdata, s_rdata;
  logic        sm_in_rd, sm_in_empty, sm_data_rd, sm_data_empty, sm_out_wr, sm_out_full, sm_timer_arm;
  logic [7:0]  sm_in_rdata, sm_data_rdata, sm_out_wdata;
  int checks = 0, failures = 0;

  dtls_engine dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(input int a, input logic [31:0] d);
    s_valid = 1; s_we = 1; s_addr = 12'(a); s_wdata = d; tick(); s_valid = 0; s_we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    s_valid = 1; s_we = 0; s_addr = 12'(a); tick(); s_valid = 0; d = s_rdata;
  endtask
  function automatic int acc(input int w); return 4 * (ACC_BASE + w); endfunction
  task automatic wr256(input int w, input logic [255:0] v);
    for (int j = 0; j < 8; j++) wr(acc(w + j), v[255 - 32*j -: 32]);
  endtask
  task automatic rd256(input int w, output logic [255:0] v);
    logic [31:0] d;
    for (int j = 0; j < 8; j++) begin rd(acc(w + j), d); v[255 - 32*j -: 32] = d; end
  endtask
  task automatic rd128(input int w, output logic [127:0] v);
    logic [31:0] d;
    for (int j = 0; j < 4; j++) begin rd(acc(w + j), d); v[127 - 32*j -: 32] = d; end
  endtask
  task automatic run(input de_cmd_e c, output int cyc);
    logic [31:0] st;
    wr(12'h800, 32'(c));
    cyc = 0;
    do begin rd(12'h804, st); cyc++; end while (st[0] && cyc < 300000);
    check(st[1] && irq, $sformatf("command %0d done flag", c));
    wr(12'h804, 0);
  endtask
  // byte i of a pattern, packed big-endian into RAM words from word w
  task automatic wr_bytes(input int w, input int len, input int mul, input int add);
    logic [31:0] d;
    for (int q = 0; q < (len + 3) / 4; q++) begin
      d = '0;
      for (int b = 0; b < 4; b++)
        if (4*q + b < len) d[31 - 8*b -: 8] = 8'(((4*q + b) * mul + add) & 255);
      wr(acc(w + q), d);
    end
  endtask

  initial begin
    logic [255:0] v;
    logic [127:0] t;
    logic [31:0]  d;
    int cyc, bad;
    s_valid = 0; s_we = 0; s_addr = 0; s_wdata = 0;
    sm_in_rd = 0; sm_data_rd = 0; sm_out_wr = 0; sm_out_wdata = 0; sm_timer_arm = 0;
    tick(); tick(); rst_n = 1; tick();

    // SHA2-256
    wr(acc(0), 100); wr_bytes(9, 100, 9, 2);
    run(CMD_SHA, cyc); rd256(1, v);
    check(v == 256'hc5d8e7cc6a5e70d607218d3e899baca038f02e477324800d42063525f23f46ac, "SHA digest");

    // AES-GCM encrypt
    wr(acc(0), 32'hfeffe992); wr(acc(1), 32'h8665731c); wr(acc(2), 32'h6d6a8f94); wr(acc(3), 32'h67308308);
    wr(acc(4), 32'hcafebabe); wr(acc(5), 32'hfacedbad); wr(acc(6), 32'hdecaf888);
    wr(acc(7), {16'd20, 16'd40}); wr(acc(12), 0);
    wr_bytes(13, 20, 3, 1); wr_bytes(21, 40, 5, 7);
    run(CMD_GCM, cyc);
    rd128(8, t);  check(t == 128'h503fd2e9a131ba49b9ff9347912102b7, "GCM tag");
    rd128(21, t); check(t == 128'h9cbe3df1c2d357ebc11f114c686dbf54, "GCM ciphertext block 0");
    rd128(29, t); check(t == 128'h9a45a9917ace5f850000000000000000, "GCM ciphertext block 2");
    // decrypt in place: the ciphertext is already there
    wr(acc(12), 1); run(CMD_GCM, cyc);
    rd(acc(12), d); check(d[1], "GCM tag accepted");
    rd128(25, t); check(t == {8'((16*5+7)&255), 8'((17*5+7)&255), 8'((18*5+7)&255), 8'((19*5+7)&255),
                               8'((20*5+7)&255), 8'((21*5+7)&255), 8'((22*5+7)&255), 8'((23*5+7)&255),
                               8'((24*5+7)&255), 8'((25*5+7)&255), 8'((26*5+7)&255), 8'((27*5+7)&255),
                               8'((28*5+7)&255), 8'((29*5+7)&255), 8'((30*5+7)&255), 8'((31*5+7)&255)},
                        "GCM decrypted block 1");
    wr(acc(8), 32'h0); wr(acc(12), 1); wr_bytes(21, 40, 5, 7);  // wrong tag
    run(CMD_GCM, cyc); rd(12'h804, d);
    rd(acc(12), d); check(!d[1], "GCM wrong tag rejected");

    // HMAC-DRBG
    for (int q = 0; q < 8; q++) begin
      d = '0;
      for (int b = 0; b < 4; b++) d[31 - 8*b -: 8] = 8'(((4*q + b) * 7 + 9) & 255);
      wr(4 * (CFG_BASE + 100 + q), d);
    end
    run(CMD_DRBG_INST, cyc);
    run(CMD_DRBG_GEN, cyc); rd256(0, v);
    check(v == 256'h9cb3ad7e81ea47d2000fe83ef3a497e4d8c0ca84bdba0fd9a25f99dfbbd28101, "DRBG output");
    bad = 0;
    for (int w = STACK_BASE; w < STACK_BASE + 16; w++) begin rd(4 * w, d); if (d != 0) bad++; end
    check(bad == 0, "micro stack hidden from the bus");

    // session hash
    for (int i = 0; i < 150; i++) wr(12'h808, 32'((i * 7 + 3) & 255));
    wr(acc(0), 150); run(CMD_TPUSH, cyc);
    rd(acc(0), d); check(d == 150, "TPUSH count");
    run(CMD_TSNAP, cyc); rd256(0, v);
    check(v == 256'hc695ceb0b71f85051f19f35d77dcf44ed433c9db49f46d7858a599f6186af365, "transcript 150");
    for (int i = 0; i < 40; i++) wr(12'h808, 32'((i * 11 + 1) & 255));
    wr(acc(0), 200); run(CMD_TPUSH, cyc);
    rd(acc(0), d); check(d == 40, "TPUSH stops at empty FIFO");
    run(CMD_TSNAP, cyc); rd256(0, v);
    check(v == 256'h0b5bd49920b933fcbf3e9ae1ee07eb44e98a13fd2b995671aa2f92caf25737a0, "transcript 190");
    run(CMD_TCLEAR, cyc); run(CMD_TSNAP, cyc); rd256(0, v);
    check(v == 256'he3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, "cleared transcript");

    // HKDF
    for (int q = 0; q < 8; q++) begin
      d = '0;
      for (int b = 0; b < 4; b++) d[31 - 8*b -: 8] = 8'((5*(4*q + b) + 1) & 255);
      wr(acc(q), d);
      for (int b = 0; b < 4; b++) d[31 - 8*b -: 8] = 8'((3*(4*q + b) + 7) & 255);
      wr(acc(8 + q), d);
    end
    run(CMD_HKDF_EXT, cyc); rd256(0, v);
    check(v == 256'h61d5e6a163cf15e2de7d07c24301b62eaab4e6d14cb4e2c68453f4f816235c3b, "HKDF extract");
    begin
      logic [511:0] info = {392'h00200d746c733133206465726976656420e3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855, 120'd0};
      for (int q = 0; q < 16; q++) wr(acc(17 + q), info[511 - 32*q -: 32]);
    end
    wr(acc(16), {15'd0, 1'b0, 8'd1, 1'b0, 7'd49});
    run(CMD_HKDF_EXP, cyc); rd256(0, v);
    check(v == 256'hcbd25185309ec4cd9b601b4de9402060ef6c85dbf9b4a398eaa762418aed18af, "HKDF expand");

    // ECC on a 61-bit curve
    wr256(0, 256'h1fffffffffffffff); wr256(8, 256'h1e54e9bc52e6b438);
    wr256(24, 256'hca264e1269e0d37); wr256(32, 256'h18b8ffaa6a3a450);
    wr(acc(40), {17'd0, 3'(ECC_PRECOMP), 3'd0, 9'd61}); run(CMD_ECC, cyc);
    wr256(16, 256'h3031d03125f2056);
    wr(acc(40), {17'd0, 3'(ECC_ECSM), 3'd0, 9'd61}); run(CMD_ECC, cyc);
    rd256(24, v); check(v == 256'h17c3d1a234d60c5e, "ECC x");
    rd256(32, v); check(v == 256'h14a2addfdc720625, "ECC y");

    // FIFOs and timer
    for (int i = 0; i < 260; i++) wr(12'h808, 32'(i));
    rd(12'h814, d); check(d[8:0] == 256 && d[9], "IN FIFO full, overflow dropped");
    check(sm_in_rdata == 8'd0, "IN FIFO head");
    sm_in_rd = 1; tick(); sm_in_rd = 0;
    check(sm_in_rdata == 8'd1, "IN FIFO read by the state machine");
    wr(12'h80C, 32'h5A); check(!sm_data_empty && sm_data_rdata == 8'h5A, "DATA FIFO");
    sm_out_wr = 1; sm_out_wdata = 8'hC3; tick(); sm_out_wr = 0;
    rd(12'h810, d); check(d == 32'hC3, "OUT FIFO read");
    rd(12'h814, d); check(d[29], "OUT FIFO empty after read");
    wr(12'h818, 50); wr(12'h81C, 0); wr(12'h820, 1);
    cyc = 0; while (!timer_expired && cyc < 1000) begin tick(); cyc++; end
    check(cyc == 50, $sformatf("timer expiry %0d cycles after arming", cyc));
    tick(); rd(12'h820, d); check(d[1] && timer_flag, "timer flag");
    wr(12'h820, 6); rd(12'h820, d); check(d[1:0] == 0, "timer stopped, flag cleared");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
