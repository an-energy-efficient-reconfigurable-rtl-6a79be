// tb_aes128_core: self-checking test of the AES-128 core.
//
// Encrypts the FIPS-197 Appendix C.1 vector and four blocks whose ciphertexts
// were computed with an independent AES implementation, back to back with a
// new key each time, and checks that each block takes 11 cycles from start
// to done.
module tb_aes128_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start;
  logic [127:0] key, din, dout;
  logic busy, done;
  int checks = 0, failures = 0;

  aes128_core dut (.clk, .rst_n, .start, .key, .din, .busy, .done, .dout);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask

  task automatic enc(input logic [127:0] k, input logic [127:0] p, input logic [127:0] c);
    int n;
    key = k; din = p; start = 1'b1;
    tick(); start = 1'b0; n = 1;
    while (!done) begin tick(); n++; end
    checks++;
    if (dout !== c) begin failures++; $display("FAIL: key %h pt %h got %h exp %h", k, p, dout, c); end
    checks++;
    if (n != 11) begin failures++; $display("FAIL: %0d cycles, expected 11", n); end
  endtask

  initial begin
    start = 1'b0; key = '0; din = '0;
    tick(); tick(); rst_n = 1'b1; tick();
    enc(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    enc(128'hcd613e30d8f16adf91b7584a2265b1f5, 128'h1e2feb89414c343c1027c4d1c386bbc4, 128'h32e9240b6fbd40edc89a03d1219a79c1);
    enc(128'h78e510617311d8a3c2ce6f447ed4d57b, 128'h35bf992dc9e9c616612e7696a6cecc1b, 128'h31fcd5e41abde551f64eab33e7cc659f);
    enc(128'he4b06ce60741c7a87ce42c8218072e8c, 128'h9b810e766ec9d28663ca828dd5f4b3b2, 128'h42d9b42d12f5eeb00578ecea40adaa87);
    enc(128'hb2221a58008a05a6c4647159c324c985, 128'hcd447e35b8b6d8fe442e3d437204e52d, 128'hf6ae75a93f655d67a9c9d4eecf514b7f);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
