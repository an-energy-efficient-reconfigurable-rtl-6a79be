// aes128_core: AES-128 forward cipher, 128-bit datapath, 11 cycles per block.
//
// This is the parallel architecture (A2) the paper selects: the whole state
// goes through ShiftRows, 16 S-boxes and MixColumns in one cycle while the key
// expansion, with its own 4 S-boxes, produces the next round key in the same
// cycle (20 S-boxes in all). The cycle that takes `start` loads
// state = din ^ key; each of the next 10 cycles performs one round, the last
// without MixColumns. `done` pulses with `dout` valid 11 cycles after start,
// the paper's figure. Round keys are computed on the fly, so a new key may be
// given with every start. Blocks are big-endian: byte 0 of the AES state is
// bits [127:120].
module aes128_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [127:0] key,
  input  logic [127:0] din,
  output logic         busy,
  output logic         done,
  output logic [127:0] dout
);

  logic [127:0] st, rk;
  logic [7:0]   rcon;
  logic [3:0]   rnd;

  function automatic logic [7:0] xt(input logic [7:0] b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  // SubBytes on the state (16 S-boxes) and on the rotated last key word (4).
  logic [7:0] sb_in [16], sb_out [16];
  logic [7:0] kb_in [4],  kb_out [4];
  for (genvar i = 0; i < 16; i++) begin : g_sb
    aes_sbox u_sb (.a(sb_in[i]), .y(sb_out[i]));
  end
  for (genvar i = 0; i < 4; i++) begin : g_kb
    aes_sbox u_kb (.a(kb_in[i]), .y(kb_out[i]));
  end

  logic [127:0] nxt_state, nxt_key;
  logic [7:0]   sr [16];
  logic [31:0]  w0, w1, w2, w3, t;
  always_comb begin
    // ShiftRows feeds the S-boxes: byte r+4c takes byte r+4((c+r)%4).
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sb_in[r + 4*c] = st[127 - 8*(r + 4*((c + r) % 4)) -: 8];
    for (int i = 0; i < 16; i++) sr[i] = sb_out[i];
    // Key expansion.
    {w0, w1, w2, w3} = rk;
    kb_in[0] = w3[23:16]; kb_in[1] = w3[15:8]; kb_in[2] = w3[7:0]; kb_in[3] = w3[31:24];
    t  = {kb_out[0] ^ rcon, kb_out[1], kb_out[2], kb_out[3]};
    w0 = w0 ^ t; w1 = w1 ^ w0; w2 = w2 ^ w1; w3 = w3 ^ w2;
    nxt_key = {w0, w1, w2, w3};
    // MixColumns (skipped in the last round) and AddRoundKey.
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      a0 = sr[4*c]; a1 = sr[4*c+1]; a2 = sr[4*c+2]; a3 = sr[4*c+3];
      if (rnd != 4'd10) begin
        nxt_state[127 - 32*c -: 32] = {xt(a0) ^ xt(a1) ^ a1 ^ a2 ^ a3,
                                       a0 ^ xt(a1) ^ xt(a2) ^ a2 ^ a3,
                                       a0 ^ a1 ^ xt(a2) ^ xt(a3) ^ a3,
                                       xt(a0) ^ a0 ^ a1 ^ a2 ^ xt(a3)};
      end else begin
        nxt_state[127 - 32*c -: 32] = {a0, a1, a2, a3};
      end
    end
    nxt_state = nxt_state ^ nxt_key;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= '0; rk <= '0; rcon <= 8'h01; rnd <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        st   <= din ^ key;
        rk   <= key;
        rcon <= 8'h01;
        rnd  <= 4'd1;
        busy <= 1'b1;
      end else if (busy) begin
        st   <= nxt_state;
        rk   <= nxt_key;
        rcon <= xt(rcon);
        rnd  <= rnd + 4'd1;
        if (rnd == 4'd10) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign dout = st;

endmodule
