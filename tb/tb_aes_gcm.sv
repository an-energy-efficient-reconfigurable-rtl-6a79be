// tb_aes_gcm: self-checking test of the AES-128-GCM engine.
//
// Key and IV are those of the GCM specification's test case 3; AAD byte i is
// 3i+1 and plaintext byte i is 5i+7 (mod 256). Ciphertexts and tags were
// computed with an independent AES-GCM implementation. Encrypts five messages
// (including empty text, empty AAD and partial last blocks), decrypts one and
// checks tag verification, a corrupted tag, and the latency 54 + 32(m+n).
module tb_aes_gcm;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, decrypt, in_valid, in_ready, out_valid, busy, done, tag_ok;
  logic [127:0] key, tag_in, in_data, out_data, tag;
  logic [95:0]  iv;
  logic [15:0]  aad_len, txt_len;
  int checks = 0, failures = 0;

  aes_gcm dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(); @(posedge clk); #1; endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [127:0] gen(input int blk, input int len, input int mul, input int add);
    logic [127:0] b = '0;
    for (int j = 0; j < 16; j++)
      if (16*blk + j < len) b[127-8*j -: 8] = 8'(((16*blk + j) * mul + add) & 255);
    return b;
  endfunction

  logic [127:0] exp_c [4];
  int outs;
  task automatic run(input int al, input int tl, input bit dec, input logic [127:0] t_exp,
                     input bit corrupt);
    int m, n, cyc, bi;
    m = (al + 15) / 16; n = (tl + 15) / 16;
    aad_len = 16'(al); txt_len = 16'(tl); decrypt = dec;
    tag_in = corrupt ? t_exp ^ 128'h1 : t_exp;
    start = 1'b1; in_valid = 1'b0; bi = 0; cyc = 0; outs = 0;
    fork
      begin
        tick(); start = 1'b0; cyc = 1;
        while (!done) begin
          if (bi < m + n) begin
            in_valid = 1'b1;
            in_data  = (bi < m) ? gen(bi, al, 3, 1) : (dec ? exp_c[bi-m] : gen(bi - m, tl, 5, 7));
          end else in_valid = 1'b0;
          @(posedge clk);
          if (in_valid && in_ready) bi++;
          #1; cyc++;
        end
        in_valid = 1'b0;
      end
      begin
        while (!done) begin
          @(posedge clk);
          if (out_valid) begin
            check(out_data == (dec ? gen(outs, tl, 5, 7) : exp_c[outs]),
                  $sformatf("block %0d of (%0d,%0d) dec=%0d", outs, al, tl, dec));
            outs++;
          end
        end
      end
    join
    check(tag == t_exp, $sformatf("tag (%0d,%0d): %h", al, tl, tag));
    check(cyc == 54 + 32 * (m + n), $sformatf("latency %0d, expected %0d", cyc, 54 + 32 * (m + n)));
    if (dec) check(tag_ok == !corrupt, "tag verification");
    check(outs == n, "number of output blocks");
    tick();
  endtask

  initial begin
    start = 0; decrypt = 0; in_valid = 0; in_data = '0; tag_in = '0; aad_len = 0; txt_len = 0;
    key = 128'hfeffe9928665731c6d6a8f9467308308; iv = 96'hcafebabefacedbaddecaf888;
    exp_c[0] = 128'h9cbe3df1c2d357ebc11f114c686dbf54; exp_c[1] = 128'h3251e91a524626406409c7903005b6fe;
    exp_c[2] = 128'h9a45a9917ace5f850000000000000000; exp_c[3] = '0;
    tick(); tick(); rst_n = 1; tick();
    run(20, 40, 0, 128'h503fd2e9a131ba49b9ff9347912102b7, 0);
    run(20, 40, 1, 128'h503fd2e9a131ba49b9ff9347912102b7, 0);
    run(20, 40, 1, 128'h503fd2e9a131ba49b9ff9347912102b7, 1);
    run(0, 16, 0, 128'h8d04176aa57abe98061bd6f633deed59, 0);
    run(16, 0, 0, 128'h445587f0136d108efbedf5759b8a099e, 0);
    run(0, 0, 0, 128'h3247184b3c4f69a44dbcd22887bbb418, 0);
    exp_c[2] = 128'h9a45a9917ace5f859d94bda006caf2d2; exp_c[3] = 128'h5d35e7cacb175fda981fb2866ea8b692;
    run(32, 64, 0, 128'h17d0c863abb6bd5fd11a5939b8c977e5, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
