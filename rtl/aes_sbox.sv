// aes_sbox: combinational AES S-box (FIPS-197 SubBytes on one byte).
//
// The byte is inverted in GF(2^8) (modulo x^8+x^4+x^3+x+1) and then passed
// through the AES affine map. The inverse is computed as x^254 with an
// addition chain of four multiplications and seven squarings, so the table is
// computed by logic rather than stored. The paper uses the compact
// composite-field S-box of Canright; this module computes the same function
// with a plain GF(2^8) inversion, which is this design's simplification.
//
// Lint: Verilator reports UNOPTFLAT (a simulation-speed note) on the
// chained GF(2^8) products of the inverter; the logic is acyclic.
module aes_sbox (
  input  logic [7:0] a,
  output logic [7:0] y
);

  function automatic logic [7:0] gmul(input logic [7:0] x, input logic [7:0] z);
    logic [7:0] r, p;
    r = '0; p = x;
    for (int i = 0; i < 8; i++) begin
      if (z[i]) r = r ^ p;
      p = {p[6:0], 1'b0} ^ (p[7] ? 8'h1b : 8'h00);
    end
    return r;
  endfunction

  logic [7:0] x2, x3, x6, x12, x15, x30, x60, x120, x240, x14, inv;
  always_comb begin
    x2   = gmul(a, a);
    x3   = gmul(x2, a);
    x6   = gmul(x3, x3);
    x12  = gmul(x6, x6);
    x15  = gmul(x12, x3);
    x30  = gmul(x15, x15);
    x60  = gmul(x30, x30);
    x120 = gmul(x60, x60);
    x240 = gmul(x120, x120);
    x14  = gmul(x12, x2);
    inv  = gmul(x240, x14);           // a^254 = a^-1, and 0 -> 0
    y    = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^
           {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
  end

endmodule
