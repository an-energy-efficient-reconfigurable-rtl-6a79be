// ecc_ecsm: reconfigurable prime-field elliptic-curve scalar multiplier.
//
// Works on any short Weierstrass curve y^2 = x^3 + ax + b over a prime p of up
// to W bits (tlen = bit length of p), in affine coordinates, as in the paper:
// point addition and doubling each use one modular inversion (mod_inv) plus
// multiplications (mod_mult). A small micro-program drives the field units
// over an 8-entry register file {X1, Y1, X2, Y2, A, T1, T2, T3}:
//   DBL: (X1,Y1) <- 2(X1,Y1)        4 multiplications + 1 inversion
//   ADD: (X1,Y1) <- (X1,Y1)+(X2,Y2) 3 multiplications + 1 inversion
// (the paper counts 3M+I and 2M+I; the extra multiplication here computes
// lambda*(x1-x3) as a separate product).
//
// Scalar multiplication uses the comb method with window 4 and the
// zero-less signed-digit form ZSD* of the paper: the scalar is first made odd
// without a data-dependent branch, k' = k + 1 + k0, and digit j of k' is
// +1/-1 for bit j+1 of k' being 1/0, with the top digit +1. With d = ceil(t/4)
// columns, column c combines digits c, d+c, 2d+c, 3d+c, so one doubling and one
// addition are done for every column regardless of the scalar (SPA
// resistance). A column's point is s3*(P3 + s2*s3*P2 + s1*s3*P1 + s0*s3*P0)
// with P_i = 2^(i*d)*P, so 8 pre-computed points per base point suffice.
// Finally Q = k'P - P (k even) or k'P - 2P (k odd), both paths doing one
// addition.
//
// Commands (cmd, pulsed with start):
//   ECC_PRECOMP  store P=(x_in,y_in), 2P and the 8 comb points in `slot`
//   ECC_ECSM     (x_out,y_out) = k * P for the P in `slot`
//   ECC_FMUL/FADD/FSUB/FINV  x_out = x_in op y_in mod p (for ECDSA mod n)
// The point at infinity and the exceptional cases P = +/-Q of the affine
// formulas are not handled; they occur with negligible probability for
// random scalars on cryptographic curves. Montgomery-form curves must be
// mapped to Weierstrass form first.
//
// Lint: the busy outputs of the multiplier and inverter are unused; the
// executor waits for their done pulses.
module ecc_ecsm
  import dtls_pkg::*;
#(
  parameter int W     = 256,
  parameter int SLOTS = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  ecc_cmd_e               cmd,
  input  logic [2:0]             slot,
  input  logic [W-1:0]           p,
  input  logic [W-1:0]           a_coef,
  input  logic [$clog2(W+1)-1:0] tlen,
  input  logic [W-1:0]           k,
  input  logic [W-1:0]           x_in,
  input  logic [W-1:0]           y_in,
  output logic                   busy,
  output logic                   done,
  output logic [W-1:0]           x_out,
  output logic [W-1:0]           y_out
);

  localparam int STRIDE = 20;                // words per slot: T[0..7], P, 2P
  localparam int SCR    = SLOTS * STRIDE;    // scratch: P1, P2, P3
  localparam int CW     = SCR + 8;           // cache words (128 = 4 KB at W = 256)
  localparam int TW     = $clog2(W+1);

  localparam logic [2:0] RX1 = 3'd0, RY1 = 3'd1, RX2 = 3'd2, RY2 = 3'd3,
                         RA  = 3'd4, RT1 = 3'd5, RT2 = 3'd6, RT3 = 3'd7;

  typedef struct packed {
    fop_e       op;
    logic [2:0] dst, s1, s2;
    logic       last;
  } uop_t;

  // Point micro-programs: DBL at 0..13, ADD at 14..24.
  function automatic uop_t urom(input logic [4:0] pc);
    case (pc)
      5'd0:  return '{FOP_MUL, RT1, RX1, RX1, 1'b0};
      5'd1:  return '{FOP_ADD, RT2, RT1, RT1, 1'b0};
      5'd2:  return '{FOP_ADD, RT1, RT2, RT1, 1'b0};   // 3x^2
      5'd3:  return '{FOP_ADD, RT1, RT1, RA , 1'b0};   // 3x^2 + a
      5'd4:  return '{FOP_ADD, RT2, RY1, RY1, 1'b0};   // 2y
      5'd5:  return '{FOP_INV, RT2, RT2, RT2, 1'b0};
      5'd6:  return '{FOP_MUL, RT1, RT1, RT2, 1'b0};   // lambda
      5'd7:  return '{FOP_MUL, RT2, RT1, RT1, 1'b0};
      5'd8:  return '{FOP_SUB, RT2, RT2, RX1, 1'b0};
      5'd9:  return '{FOP_SUB, RT2, RT2, RX1, 1'b0};   // x3
      5'd10: return '{FOP_SUB, RT3, RX1, RT2, 1'b0};
      5'd11: return '{FOP_MUL, RT3, RT1, RT3, 1'b0};
      5'd12: return '{FOP_SUB, RY1, RT3, RY1, 1'b0};   // y3
      5'd13: return '{FOP_MOV, RX1, RT2, RT2, 1'b1};
      5'd14: return '{FOP_SUB, RT1, RY2, RY1, 1'b0};
      5'd15: return '{FOP_SUB, RT2, RX2, RX1, 1'b0};
      5'd16: return '{FOP_INV, RT2, RT2, RT2, 1'b0};
      5'd17: return '{FOP_MUL, RT1, RT1, RT2, 1'b0};   // lambda
      5'd18: return '{FOP_MUL, RT2, RT1, RT1, 1'b0};
      5'd19: return '{FOP_SUB, RT2, RT2, RX1, 1'b0};
      5'd20: return '{FOP_SUB, RT2, RT2, RX2, 1'b0};   // x3
      5'd21: return '{FOP_SUB, RT3, RX1, RT2, 1'b0};
      5'd22: return '{FOP_MUL, RT3, RT1, RT3, 1'b0};
      5'd23: return '{FOP_SUB, RY1, RT3, RY1, 1'b0};   // y3
      default: return '{FOP_MOV, RX1, RT2, RT2, 1'b1};
    endcase
  endfunction

  localparam logic [4:0] PC_DBL = 5'd0, PC_ADD = 5'd14;

  // ------------------------------------------------------------ field units
  logic [W-1:0] R [8];
  logic [W-1:0] p_r;
  logic [TW-1:0] tlen_r;
  uop_t  u;
  logic  mm_start, mm_busy, mm_done, mi_start, mi_busy, mi_done;
  logic [W-1:0] mm_z, mi_z;

  mod_mult #(.W(W)) u_mm (.clk, .rst_n, .start(mm_start), .op(u.op), .a(R[u.s1]), .b(R[u.s2]),
                          .p(p_r), .tlen(tlen_r), .busy(mm_busy), .done(mm_done), .z(mm_z));
  mod_inv  #(.W(W)) u_mi (.clk, .rst_n, .start(mi_start), .a(R[u.s1]), .p(p_r),
                          .busy(mi_busy), .done(mi_done), .z(mi_z));

  // ------------------------------------------------------------ comb cache
  logic                  c_en, c_we;
  logic [$clog2(CW)-1:0] c_addr;
  logic [W-1:0]          c_wdata, c_rdata;
  comb_cache #(.W(W), .WORDS(CW)) u_cache (.clk, .en(c_en), .we(c_we), .addr(c_addr),
                                           .wdata(c_wdata), .rdata(c_rdata));

  // ----------------------------------------------------- macro operations
  typedef enum logic [2:0] {M_NONE, M_LOAD, M_STORE, M_DBL, M_ADD, M_FOP} mac_e;
  mac_e        mac;            // operation in progress
  logic [1:0]  mph;            // phase inside a load/store
  logic [6:0]  maddr;
  logic        mneg, mdst2;    // negate y; load into X2/Y2 instead of X1/Y1
  logic [4:0]  pc;
  logic        uwait;          // waiting for a field unit
  logic        mac_done;

  // ------------------------------------------------------------- sequencer
  typedef enum logic [4:0] {
    E_IDLE, E_FOP,
    E_PC_STP, E_PC_DBL2P, E_PC_ST2P, E_PC_LDP, E_PC_DBLN, E_PC_STS,
    E_PC_L3, E_PC_L2, E_PC_A2, E_PC_L1, E_PC_A1, E_PC_L0, E_PC_A0, E_PC_ST,
    E_SM_L, E_SM_DBL, E_SM_LC, E_SM_ADD, E_SM_LCOR, E_SM_ACOR, E_DONE
  } est_e;
  est_e        es;
  logic        issued;
  ecc_cmd_e    cmd_r;
  logic [6:0]  base;           // slot * STRIDE
  logic [W:0]  kp;             // k + 1 + k0 (odd)
  logic        k0;
  logic [6:0]  dcols;          // columns d = ceil(t/4)
  logic [6:0]  col, rep;
  logic [1:0]  row;
  logic [2:0]  tidx;

  // Signed digit j of the ZSD* form: 1 means +1, 0 means -1.
  function automatic logic zdig(input logic [W:0] kk, input int j, input int nd);
    if (j >= nd - 1) return 1'b1;
    return kk[j+1];
  endfunction

  // Column c: index into the 8-entry table and the sign of the whole point.
  logic [2:0] col_idx;
  logic       col_neg;
  always_comb begin
    logic s0, s1, s2, s3;
    int nd, c;
    nd = 4 * int'(dcols);
    c  = int'(col);
    s0 = zdig(kp, c, nd);
    s1 = zdig(kp, int'(dcols) + c, nd);
    s2 = zdig(kp, 2 * int'(dcols) + c, nd);
    s3 = zdig(kp, 3 * int'(dcols) + c, nd);
    col_idx = {s2 ~^ s3, s1 ~^ s3, s0 ~^ s3};
    col_neg = !s3;
  end

  // Macro to issue for the current sequencer state.
  mac_e        want;
  logic [6:0]  waddr;
  logic        wneg, wdst2;
  always_comb begin
    want = M_NONE; waddr = '0; wneg = 1'b0; wdst2 = 1'b0;
    case (es)
      E_FOP:      want = M_FOP;
      E_PC_STP:   begin want = M_STORE; waddr = base + 7'd16; end
      E_PC_DBL2P: want = M_DBL;
      E_PC_ST2P:  begin want = M_STORE; waddr = base + 7'd18; end
      E_PC_LDP:   begin want = M_LOAD;  waddr = base + 7'd16; end
      E_PC_DBLN:  want = M_DBL;
      E_PC_STS:   begin want = M_STORE; waddr = 7'(SCR) + 7'(2 * int'(2'(row - 2'd1))); end
      E_PC_L3:    begin want = M_LOAD;  waddr = 7'(SCR + 4); end
      E_PC_L2:    begin want = M_LOAD;  waddr = 7'(SCR + 2); wneg = !tidx[2]; wdst2 = 1'b1; end
      E_PC_L1:    begin want = M_LOAD;  waddr = 7'(SCR);     wneg = !tidx[1]; wdst2 = 1'b1; end
      E_PC_L0:    begin want = M_LOAD;  waddr = base + 7'd16; wneg = !tidx[0]; wdst2 = 1'b1; end
      E_PC_A2, E_PC_A1, E_PC_A0, E_SM_ADD, E_SM_ACOR: want = M_ADD;
      E_PC_ST:    begin want = M_STORE; waddr = base + 7'({tidx, 1'b0}); end
      E_SM_L:     begin want = M_LOAD;  waddr = base + 7'({col_idx, 1'b0}); wneg = col_neg; end
      E_SM_DBL:   want = M_DBL;
      E_SM_LC:    begin want = M_LOAD;  waddr = base + 7'({col_idx, 1'b0}); wneg = col_neg; wdst2 = 1'b1; end
      E_SM_LCOR:  begin want = M_LOAD;  waddr = base + (k0 ? 7'd18 : 7'd16); wneg = 1'b1; wdst2 = 1'b1; end
      default:    want = M_NONE;
    endcase
  end

  // Field-unit starts for the current micro-op.
  always_comb begin
    if (mac == M_FOP) begin
      case (cmd_r)
        ECC_FMUL: u.op = FOP_MUL;
        ECC_FADD: u.op = FOP_ADD;
        ECC_FSUB: u.op = FOP_SUB;
        default:  u.op = FOP_INV;
      endcase
      u.dst = RX1; u.s1 = RX1; u.s2 = RY1; u.last = 1'b1;
    end else begin
      u = urom(pc);
    end
    mm_start = (mac == M_DBL || mac == M_ADD || mac == M_FOP) && !uwait &&
               (u.op == FOP_MUL || u.op == FOP_ADD || u.op == FOP_SUB);
    mi_start = (mac == M_DBL || mac == M_ADD || mac == M_FOP) && !uwait && u.op == FOP_INV;
  end

  // Cache port.
  always_comb begin
    c_en = 1'b0; c_we = 1'b0; c_addr = maddr; c_wdata = R[RX1];
    if (mac == M_LOAD && mph < 2) begin
      c_en = 1'b1; c_addr = maddr + 7'(mph);
    end
    if (mac == M_STORE) begin
      c_en = 1'b1; c_we = 1'b1; c_addr = maddr + 7'(mph);
      c_wdata = mph[0] ? R[RY1] : R[RX1];
    end
  end

  logic [W-1:0] neg_y;
  assign neg_y = (c_rdata == '0) ? '0 : p_r - c_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 8; i++) R[i] <= '0;
      p_r <= '0; tlen_r <= '0; mac <= M_NONE; mph <= '0; maddr <= '0; mneg <= 1'b0;
      mdst2 <= 1'b0; pc <= '0; uwait <= 1'b0; mac_done <= 1'b0;
      es <= E_IDLE; issued <= 1'b0; cmd_r <= ECC_PRECOMP; base <= '0; kp <= '0; k0 <= 1'b0;
      dcols <= '0; col <= '0; rep <= '0; row <= '0; tidx <= '0;
    end else begin
      mac_done <= 1'b0;

      // ---------------- macro executor
      case (mac)
        M_LOAD: begin
          mph <= mph + 2'd1;
          if (mph == 2'd1) R[mdst2 ? RX2 : RX1] <= c_rdata;
          if (mph == 2'd2) begin
            R[mdst2 ? RY2 : RY1] <= mneg ? neg_y : c_rdata;
            mac <= M_NONE; mac_done <= 1'b1;
          end
        end
        M_STORE: begin
          mph <= mph + 2'd1;
          if (mph == 2'd1) begin mac <= M_NONE; mac_done <= 1'b1; end
        end
        M_DBL, M_ADD, M_FOP: begin
          if (!uwait) begin
            if (u.op == FOP_MOV) begin
              R[u.dst] <= R[u.s1];
              if (u.last) begin mac <= M_NONE; mac_done <= 1'b1; end
              else pc <= pc + 5'd1;
            end else uwait <= 1'b1;
          end else if (mm_done || mi_done) begin
            R[u.dst] <= mm_done ? mm_z : mi_z;
            uwait <= 1'b0;
            if (u.last) begin mac <= M_NONE; mac_done <= 1'b1; end
            else pc <= pc + 5'd1;
          end
        end
        default: ;
      endcase

      // ---------------- sequencer
      if (es != E_IDLE && es != E_DONE && !issued && want != M_NONE) begin
        mac <= want; maddr <= waddr; mneg <= wneg; mdst2 <= wdst2; mph <= '0; uwait <= 1'b0;
        pc <= (want == M_ADD) ? PC_ADD : PC_DBL;
        issued <= 1'b1;
      end

      case (es)
        E_IDLE: if (start) begin
          cmd_r  <= cmd;
          p_r    <= p; tlen_r <= tlen;
          R[RX1] <= x_in; R[RY1] <= y_in; R[RA] <= a_coef;
          base   <= 7'(int'(slot) * STRIDE);
          kp     <= {1'b0, k} + {{W{1'b0}}, 1'b1} + {{W{1'b0}}, k[0]};
          k0     <= k[0];
          dcols  <= 7'((int'(tlen) + 3) / 4);
          issued <= 1'b0;
          case (cmd)
            ECC_PRECOMP: es <= E_PC_STP;
            ECC_ECSM:    es <= E_SM_L;
            default:     es <= E_FOP;
          endcase
        end
        E_DONE: es <= E_IDLE;
        default: if (issued && mac_done) begin
          issued <= 1'b0;
          case (es)
            E_FOP:      es <= E_DONE;
            E_PC_STP:   es <= E_PC_DBL2P;
            E_PC_DBL2P: es <= E_PC_ST2P;
            E_PC_ST2P:  begin es <= E_PC_LDP; row <= 2'd1; end
            E_PC_LDP:   begin es <= E_PC_DBLN; rep <= '0; end
            E_PC_DBLN:  begin
              rep <= rep + 7'd1;
              if (rep == dcols - 7'd1) es <= E_PC_STS;
            end
            E_PC_STS:   begin
              if (row == 2'd3) begin es <= E_PC_L3; tidx <= '0; end
              else begin row <= row + 2'd1; rep <= '0; es <= E_PC_DBLN; end
            end
            E_PC_L3:    es <= E_PC_L2;
            E_PC_L2:    es <= E_PC_A2;
            E_PC_A2:    es <= E_PC_L1;
            E_PC_L1:    es <= E_PC_A1;
            E_PC_A1:    es <= E_PC_L0;
            E_PC_L0:    es <= E_PC_A0;
            E_PC_A0:    es <= E_PC_ST;
            E_PC_ST:    begin
              tidx <= tidx + 3'd1;
              es   <= (tidx == 3'd7) ? E_DONE : E_PC_L3;
            end
            E_SM_L:     begin
              if (col == '0) es <= E_SM_LCOR;
              else begin col <= col - 7'd1; es <= E_SM_DBL; end
            end
            E_SM_DBL:   es <= E_SM_LC;
            E_SM_LC:    es <= E_SM_ADD;
            E_SM_ADD:   begin
              if (col == '0) es <= E_SM_LCOR;
              else begin col <= col - 7'd1; es <= E_SM_DBL; end
            end
            E_SM_LCOR:  es <= E_SM_ACOR;
            E_SM_ACOR:  es <= E_DONE;
            default:    es <= E_IDLE;
          endcase
        end
      endcase
      // first column of a scalar multiplication
      if (es == E_IDLE && start) col <= 7'((int'(tlen) + 3) / 4 - 1);
    end
  end

  assign busy  = (es != E_IDLE);
  assign done  = (es == E_DONE);
  assign x_out = R[RX1];
  assign y_out = R[RY1];

endmodule
