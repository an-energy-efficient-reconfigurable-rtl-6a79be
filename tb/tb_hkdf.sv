// tb_hkdf: self-checking test of HKDF with a SHA2-256 core. Salt byte i is
// 5i+1 and IKM byte i is 3i+7 (32 bytes each). Checked against an independent
// HKDF: extract; expand of block 1 with a 49-byte TLS 1.3 style info
// (length 0x0020, label "tls13 derived", hash of the empty transcript);
// block 2 chained from block 1; and an expand with empty info.
module tb_hkdf;
  import dtls_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic extract, expand, use_prev, busy, done;
  logic [255:0] salt, ikm, prk, t_prev, out;
  logic [511:0] info;
  logic [6:0] info_len;
  logic [7:0] ctr;
  sha_req_t sha_req;
  sha_rsp_t sha_rsp;
  int checks = 0, failures = 0;

  hkdf dut (.*);
  sha256_core u_sha (.clk, .rst_n, .req(sha_req), .rsp(sha_rsp));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s %h", what, out); end
  endtask
  task automatic waitdone(); while (!done) tick(); tick(); endtask

  initial begin
    extract = 0; expand = 0; use_prev = 0; prk = '0; t_prev = '0; info = '0; info_len = 0; ctr = 0;
    for (int i = 0; i < 32; i++) begin
      salt[255 - 8*i -: 8] = 8'((5*i + 1) & 255);
      ikm[255 - 8*i -: 8]  = 8'((3*i + 7) & 255);
    end
    tick(); tick(); rst_n = 1; tick();
    extract = 1; tick(); extract = 0; waitdone();
    check(out == 256'h61d5e6a163cf15e2de7d07c24301b62eaab4e6d14cb4e2c68453f4f816235c3b, "extract");
    prk = out;
    info[511 -: 392] = 392'h00200d746c733133206465726976656420e3b0c44298fc1c149afbf4c8996fb92427ae41e4649b934ca495991b7852b855;
    info_len = 49; ctr = 1; use_prev = 0;
    expand = 1; tick(); expand = 0; waitdone();
    check(out == 256'hcbd25185309ec4cd9b601b4de9402060ef6c85dbf9b4a398eaa762418aed18af, "expand T1");
    t_prev = out; use_prev = 1; ctr = 2;
    expand = 1; tick(); expand = 0; waitdone();
    check(out == 256'hf4c03c80ff055c02dc9a2aa8b36e340878b2dbdfa25f541c5f76470e7e80fa24, "expand T2");
    use_prev = 0; info_len = 0; ctr = 1;
    expand = 1; tick(); expand = 0; waitdone();
    check(out == 256'h9bdeb5215287770082a61fff0202dffa6b172f6f0eabcd1f8db4990956a55d52, "expand, empty info");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
