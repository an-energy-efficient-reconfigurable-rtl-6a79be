// dtls_engine: the DTLS engine (DE) datapath and its memory-mapped front end
// (paper Sec. V, Fig. 15): the DTLS RAM, the AES-128-GCM, SHA2-256, HMAC-DRBG
// and ECC accelerators, the running session hash, the three 256-byte packet
// FIFOs and the 64-bit retransmission timer.
//
// Bus port (engine clock; single accesses with s_rdata valid one cycle after
// s_valid), byte addresses:
//   0x000-0x7FF  DTLS RAM (word = addr[10:2]); the micro stack reads as 0
//   0x800  CMD    write: start a command (ignored while busy); read: last cmd
//   0x804  STATUS read: [0] busy [1] done [2] GCM tag ok [3] GCM busy
//          [4] ECC busy [5] DRBG busy [6] HKDF busy; write: clear done
//   0x808  IN FIFO write byte        0x80C  DATA FIFO write byte
//   0x810  OUT FIFO read byte (pops)
//   0x814  FIFO state: IN count [8:0], IN full [9], DATA count [18:10],
//          DATA full [19], OUT count [28:20], OUT empty [29]
//   0x818/0x81C  retransmission timeout, low/high word
//   0x820  timer: write [0] arm [1] stop [2] clear expired flag;
//          read [0] running [1] expired flag (sticky)
//   0x824/0x828  timer count, low/high word (read only)
// A command loads its operands from the accelerator config region (word
// ACC_BASE + offset, values most-significant word first) into an operand
// buffer, runs the accelerator and writes the results back:
//   SHA       +0 length in bytes (<= 272), message bytes from +9 (big endian
//             within words); digest -> +1..+8
//   GCM       +0..3 key, +4..6 IV, +7 {AAD bytes, text bytes}, +8..11 tag,
//             +12 [0] decrypt; AAD then text from +13, each padded to 16
//             bytes (<= 16 blocks); output text replaces the input text,
//             tag -> +8..11, +12 [1] tag ok
//   ECC       +0..7 p, +8..15 a, +16..23 k, +24..31 x, +32..39 y,
//             +40 {cmd[15:12], slot[11:9], bit length[8:0]}; x, y -> +24..39
//   DRBG_INST seed from config words 100..107; K, V -> micro stack 0..15
//   DRBG_GEN  K, V from micro stack 0..15 and back; 256 random bits -> +0..7
//   TPUSH     hash +0 bytes from the IN FIFO into the transcript (stops early
//             if the FIFO runs empty); number hashed -> +0
//   TSNAP     transcript hash so far -> +0..7      TCLEAR  new transcript
//   HKDF_EXT  +0..7 salt, +8..15 IKM; PRK -> +0..7
//   HKDF_EXP  +0..7 PRK, +8..15 previous block, +16 {use previous [16],
//             counter [15:8], info bytes [6:0] (<= 64)}, info from +17;
//             output block -> +0..7
// One SHA2-256 core is shared by the SHA command, the HMAC-DRBG, HKDF and
// the session hash. `irq` is the sticky done flag. The handshake state machine and
// certificate parser are not part of this design; their connections (IN FIFO
// read, DATA FIFO read, OUT FIFO write, timer arm and expiry) are ports.
//
// Own choices: the register map, the operand layouts (the paper names the
// regions and their contents but not the layouts), the 2-cycle-per-word
// operand load and store, and keeping the transcript state in registers. The
// accelerators are not individually clock-gated here; the whole engine clock
// is gated in clock_ctrl. The session hash's state_out (for saving the
// transcript state) is not used: the state stays in the session hash.
//
// Lint: sh_state is unused on purpose (see above).
module dtls_engine
  import dtls_pkg::*;
#(
  parameter int ECC_W = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // memory-mapped port
  input  logic        s_valid,
  input  logic        s_we,
  input  logic [11:0] s_addr,
  input  logic [31:0] s_wdata,
  output logic [31:0] s_rdata,
  output logic        irq,
  output logic        timer_flag,
  // protocol state machine side
  input  logic        sm_in_rd,
  output logic [7:0]  sm_in_rdata,
  output logic        sm_in_empty,
  input  logic        sm_data_rd,
  output logic [7:0]  sm_data_rdata,
  output logic        sm_data_empty,
  input  logic        sm_out_wr,
  input  logic [7:0]  sm_out_wdata,
  output logic        sm_out_full,
  input  logic        sm_timer_arm,
  output logic        timer_expired
);

  localparam int NAB = 77;   // operand buffer = accelerator config region

  // ---------------------------------------------------------------- RAM
  logic        b_en, b_we;
  logic [8:0]  b_addr;
  logic [31:0] b_wdata, b_rdata, a_rdata;
  logic        a_en;
  assign a_en = s_valid && !s_addr[11];
  dtls_ram u_ram (
    .clk, .a_en, .a_we(s_we), .a_addr(s_addr[10:2]), .a_wdata(s_wdata), .a_rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );

  // ---------------------------------------------------------------- FIFOs
  logic       in_wr, in_rd, in_full, in_empty;
  logic [7:0] in_rdata;
  logic [8:0] in_cnt, data_cnt, out_cnt;
  logic       data_wr, data_full, out_rd, out_empty, out_full;
  logic [7:0] out_rdata;
  logic       tp_pop;
  byte_fifo u_in (.clk, .rst_n, .wr_en(in_wr), .wdata(s_wdata[7:0]), .rd_en(in_rd),
                  .rdata(in_rdata), .full(in_full), .empty(in_empty), .count(in_cnt));
  byte_fifo u_data (.clk, .rst_n, .wr_en(data_wr), .wdata(s_wdata[7:0]), .rd_en(sm_data_rd),
                    .rdata(sm_data_rdata), .full(data_full), .empty(sm_data_empty), .count(data_cnt));
  byte_fifo u_out (.clk, .rst_n, .wr_en(sm_out_wr), .wdata(sm_out_wdata), .rd_en(out_rd),
                   .rdata(out_rdata), .full(out_full), .empty(out_empty), .count(out_cnt));
  assign in_rd       = sm_in_rd || tp_pop;
  assign sm_in_rdata = in_rdata;
  assign sm_in_empty = in_empty;
  assign sm_out_full = out_full;

  // ---------------------------------------------------------------- timer
  logic [63:0] tmo, tcount;
  logic        t_arm, t_stop, t_run;
  retransmit_timer u_timer (.clk, .rst_n, .arm(t_arm || sm_timer_arm), .stop(t_stop),
                            .timeout(tmo), .running(t_run), .expired(timer_expired), .count(tcount));

  // ---------------------------------------------------------------- units
  logic [31:0] ab [NAB];
  de_cmd_e     cmd;

  // AES-GCM
  logic         g_start, g_in_valid, g_in_ready, g_out_valid, g_busy, g_done, g_tag_ok;
  logic [127:0] g_key, g_tag_in, g_in_data, g_out_data, g_tag;
  logic [95:0]  g_iv;
  aes_gcm u_gcm (.clk, .rst_n, .start(g_start), .decrypt(ab[12][0]), .key(g_key), .iv(g_iv),
                 .aad_len(ab[7][31:16]), .txt_len(ab[7][15:0]), .tag_in(g_tag_in),
                 .in_valid(g_in_valid), .in_data(g_in_data), .in_ready(g_in_ready),
                 .out_valid(g_out_valid), .out_data(g_out_data), .busy(g_busy), .done(g_done),
                 .tag(g_tag), .tag_ok(g_tag_ok));

  // ECC
  logic               e_start, e_busy, e_done;
  logic [ECC_W-1:0]   e_p, e_a, e_k, e_x, e_y, e_xo, e_yo;
  ecc_cmd_e           e_cmd;
  logic [255:0]       e_xo256, e_yo256;
  assign e_cmd   = ecc_cmd_e'(ab[40][14:12]);
  assign e_xo256 = 256'(e_xo);
  assign e_yo256 = 256'(e_yo);
  ecc_ecsm #(.W(ECC_W)) u_ecc (.clk, .rst_n, .start(e_start), .cmd(e_cmd), .slot(ab[40][11:9]),
                  .p(e_p), .a_coef(e_a), .tlen(ab[40][$clog2(ECC_W+1)-1:0]), .k(e_k),
                  .x_in(e_x), .y_in(e_y), .busy(e_busy), .done(e_done), .x_out(e_xo), .y_out(e_yo));

  // SHA2-256 core, shared
  sha_req_t sha_req, own_req, drbg_req, sh_req;
  sha_rsp_t sha_rsp;
  sha256_core u_sha (.clk, .rst_n, .req(sha_req), .rsp(sha_rsp));

  // HMAC-DRBG
  logic         d_inst, d_gen, d_load, d_busy, d_done;
  logic [255:0] d_seed, d_kin, d_vin, d_rnd, d_k, d_v;
  hmac_drbg u_drbg (.clk, .rst_n, .inst(d_inst), .seed(d_seed), .gen(d_gen), .load(d_load),
                    .k_in(d_kin), .v_in(d_vin), .busy(d_busy), .done(d_done), .rnd(d_rnd),
                    .k_out(d_k), .v_out(d_v), .sha_req(drbg_req), .sha_rsp(sha_rsp));

  // session hash
  logic         sh_clear, sh_push, sh_ready, sh_snap, sh_busy, sh_done;
  logic [255:0] sh_digest;
  logic [838:0] sh_state;
  session_hash u_sh (.clk, .rst_n, .clear(sh_clear), .push_valid(sh_push), .push_byte(in_rdata),
                     .push_ready(sh_ready), .snap(sh_snap), .busy(sh_busy), .done(sh_done),
                     .digest(sh_digest), .state_out(sh_state), .restore(1'b0), .state_in('0),
                     .sha_req(sh_req), .sha_rsp(sha_rsp));

  // HKDF
  logic         k_ext, k_exp, k_busy, k_done;
  logic [255:0] k_out;
  sha_req_t     hk_req;
  logic [511:0] k_info;
  always_comb for (int q = 0; q < 16; q++) k_info[511 - 32*q -: 32] = ab[17 + q];
  hkdf u_hkdf (.clk, .rst_n, .extract(k_ext), .expand(k_exp), .salt(w8(0)), .ikm(w8(8)),
               .prk(w8(0)), .t_prev(w8(8)), .use_prev(ab[16][16]), .info(k_info),
               .info_len(ab[16][6:0]), .ctr(ab[16][15:8]), .busy(k_busy), .done(k_done),
               .out(k_out), .sha_req(hk_req), .sha_rsp(sha_rsp));

  always_comb begin
    case (cmd)
      CMD_SHA:                     sha_req = own_req;
      CMD_HKDF_EXT, CMD_HKDF_EXP:  sha_req = hk_req;
      CMD_DRBG_INST, CMD_DRBG_GEN: sha_req = drbg_req;
      default:                     sha_req = sh_req;
    endcase
  end

  // operand vectors from the buffer
  function automatic logic [255:0] w8(input int base);
    logic [255:0] v;
    for (int j = 0; j < 8; j++) v[255 - 32*j -: 32] = ab[base + j];
    return v;
  endfunction
  function automatic logic [127:0] w4(input int base);
    logic [127:0] v;
    for (int j = 0; j < 4; j++) v[127 - 32*j -: 32] = ab[base + j];
    return v;
  endfunction

  assign g_key    = w4(0);
  assign g_iv     = {ab[4], ab[5], ab[6]};
  assign g_tag_in = w4(8);
  assign e_p      = ECC_W'(w8(0));
  assign e_a      = ECC_W'(w8(8));
  assign e_k      = ECC_W'(w8(16));
  assign e_x      = ECC_W'(w8(24));
  assign e_y      = ECC_W'(w8(32));
  assign d_seed   = w8(0);
  assign d_kin    = w8(0);
  assign d_vin    = w8(8);

  // ---------------------------------------------------------------- control
  typedef enum logic [3:0] {X_IDLE, X_RDA, X_RDD, X_GO, X_GO2, X_RUN, X_WB, X_FIN} xstate_e;
  xstate_e     xs;
  logic [8:0]  rbase, wbase;      // RAM word address of load / store area
  logic [6:0]  idx, cnt;          // word counter and word count
  logic [6:0]  wsrc;              // first buffer word to store
  logic        wb2;               // second store pass pending (DRBG_GEN)
  logic        done_f, tag_ok_f, tflag;
  logic [8:0]  j;                 // byte / block counter
  logic [4:0]  ob;                // GCM output block counter
  logic [4:0]  nab, nblk;

  assign nab  = 5'((ab[7][31:16] + 16'd15) >> 4);
  assign nblk = 5'((ab[7][31:16] + 16'd15) >> 4) + 5'((ab[7][15:0] + 16'd15) >> 4);

  // per-command load/store plan
  always_comb begin
    b_en = 1'b0; b_we = 1'b0; b_addr = '0; b_wdata = '0;
    if (xs == X_RDA) begin b_en = 1'b1; b_addr = rbase + 9'(idx); end
    if (xs == X_WB)  begin b_en = 1'b1; b_we = 1'b1; b_addr = wbase + 9'(idx); b_wdata = ab[wsrc + idx]; end
  end

  // accelerator handshakes
  logic [8:0] sha_len;
  logic [7:0] sha_byte;
  logic [6:0] gwi;
  assign sha_len  = (ab[0] > 32'd272) ? 9'd272 : ab[0][8:0];
  assign sha_byte = ab[9 + int'(j[8:2])][8*(3 - int'(j[1:0])) +: 8];
  assign gwi      = 7'(13 + 4 * int'(j));

  always_comb begin
    own_req           = SHA_REQ_IDLE;
    own_req.init      = (xs == X_GO) && (cmd == CMD_SHA);
    own_req.din_valid = (xs == X_RUN) && (cmd == CMD_SHA) && (j < sha_len);
    own_req.din       = sha_byte;
    own_req.finish    = (xs == X_RUN) && (cmd == CMD_SHA) && (j == sha_len) && !tflag && sha_rsp.din_ready;
    g_start    = (xs == X_GO) && (cmd == CMD_GCM);
    g_in_valid = (xs == X_RUN) && (cmd == CMD_GCM) && (j < 9'(nblk));
    g_in_data  = w4(int'(gwi));
    e_start    = (xs == X_GO) && (cmd == CMD_ECC);
    d_inst     = (xs == X_GO) && (cmd == CMD_DRBG_INST);
    d_load     = (xs == X_GO) && (cmd == CMD_DRBG_GEN);
    d_gen      = (xs == X_GO2);
    k_ext      = (xs == X_GO) && (cmd == CMD_HKDF_EXT);
    k_exp      = (xs == X_GO) && (cmd == CMD_HKDF_EXP);
    sh_clear   = (xs == X_GO) && (cmd == CMD_TCLEAR);
    sh_snap    = (xs == X_GO) && (cmd == CMD_TSNAP);
    sh_push    = (xs == X_RUN) && (cmd == CMD_TPUSH) && !in_empty && (j < ab[0][8:0]) && sh_ready;
    tp_pop     = sh_push;
  end

  // register side of the bus
  logic reg_we, reg_rd;
  assign reg_we  = s_valid && s_we && s_addr[11];
  assign reg_rd  = s_valid && !s_we && s_addr[11];
  assign in_wr   = reg_we && (s_addr[7:0] == 8'h08);
  assign data_wr = reg_we && (s_addr[7:0] == 8'h0C);
  assign out_rd  = reg_rd && (s_addr[7:0] == 8'h10);
  assign t_arm   = reg_we && (s_addr[7:0] == 8'h20) && s_wdata[0];
  assign t_stop  = reg_we && (s_addr[7:0] == 8'h20) && s_wdata[1];

  logic        sel_reg;
  logic [31:0] reg_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_reg <= 1'b0; reg_q <= '0; tmo <= '0; tflag <= 1'b0;
    end else begin
      if (s_valid) sel_reg <= s_addr[11];
      if (reg_rd) begin
        case (s_addr[7:0])
          8'h00:   reg_q <= 32'(cmd);
          8'h04:   reg_q <= {25'd0, k_busy, d_busy, e_busy, g_busy, tag_ok_f, done_f, xs != X_IDLE};
          8'h10:   reg_q <= {24'd0, out_rdata};
          8'h14:   reg_q <= {2'd0, out_empty, out_cnt, data_full, data_cnt, in_full, in_cnt};
          8'h18:   reg_q <= tmo[31:0];
          8'h1C:   reg_q <= tmo[63:32];
          8'h20:   reg_q <= {30'd0, timer_flag, t_run};
          8'h24:   reg_q <= tcount[31:0];
          8'h28:   reg_q <= tcount[63:32];
          default: reg_q <= '0;
        endcase
      end
      if (reg_we && s_addr[7:0] == 8'h18) tmo[31:0]  <= s_wdata;
      if (reg_we && s_addr[7:0] == 8'h1C) tmo[63:32] <= s_wdata;
      // tflag: SHA finish already issued
      if (xs == X_GO) tflag <= 1'b0;
      else if (own_req.finish) tflag <= 1'b1;
    end
  end
  assign s_rdata = sel_reg ? reg_q : a_rdata;

  logic tflag_exp;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tflag_exp <= 1'b0;
    else if (timer_expired) tflag_exp <= 1'b1;
    else if (reg_we && s_addr[7:0] == 8'h20 && s_wdata[2]) tflag_exp <= 1'b0;
  end
  assign timer_flag = tflag_exp;

  // main sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs <= X_IDLE; cmd <= CMD_NOP; rbase <= '0; wbase <= '0; idx <= '0; cnt <= '0;
      wsrc <= '0; wb2 <= 1'b0; done_f <= 1'b0; tag_ok_f <= 1'b0; j <= '0; ob <= '0;
      for (int w = 0; w < NAB; w++) ab[w] <= '0;
    end else begin
      if (reg_we && s_addr[7:0] == 8'h04) done_f <= 1'b0;
      case (xs)
        X_IDLE: if (reg_we && s_addr[7:0] == 8'h00) begin
          cmd <= de_cmd_e'(s_wdata[3:0]); idx <= '0; done_f <= 1'b0; wb2 <= 1'b0;
          case (de_cmd_e'(s_wdata[3:0]))
            CMD_SHA, CMD_GCM:  begin rbase <= 9'(ACC_BASE); cnt <= 7'(NAB); xs <= X_RDA; end
            CMD_ECC:           begin rbase <= 9'(ACC_BASE); cnt <= 7'd41; xs <= X_RDA; end
            CMD_DRBG_INST:     begin rbase <= 9'(CFG_BASE + 100); cnt <= 7'd8; xs <= X_RDA; end
            CMD_DRBG_GEN:      begin rbase <= 9'(STACK_BASE); cnt <= 7'd16; xs <= X_RDA; end
            CMD_TPUSH:         begin rbase <= 9'(ACC_BASE); cnt <= 7'd1; xs <= X_RDA; end
            CMD_HKDF_EXT, CMD_HKDF_EXP: begin rbase <= 9'(ACC_BASE); cnt <= 7'd33; xs <= X_RDA; end
            CMD_TSNAP, CMD_TCLEAR: xs <= X_GO;
            default:           xs <= X_IDLE;
          endcase
        end
        X_RDA: xs <= X_RDD;
        X_RDD: begin
          ab[idx] <= b_rdata;
          idx <= idx + 7'd1;
          xs  <= (idx + 7'd1 == cnt) ? X_GO : X_RDA;
        end
        X_GO: begin
          j <= '0; ob <= '0; idx <= '0;
          xs <= (cmd == CMD_DRBG_GEN) ? X_GO2 : (cmd == CMD_TCLEAR) ? X_FIN : X_RUN;
        end
        X_GO2: xs <= X_RUN;
        X_RUN: begin
          case (cmd)
            CMD_SHA: begin
              if (own_req.din_valid && sha_rsp.din_ready) j <= j + 9'd1;
              if (tflag && sha_rsp.done) begin
                for (int w = 0; w < 8; w++) ab[1 + w] <= sha_rsp.h_out[255 - 32*w -: 32];
                wbase <= 9'(ACC_BASE); wsrc <= 7'd0; cnt <= 7'd9; xs <= X_WB;
              end
            end
            CMD_GCM: begin
              if (g_in_valid && g_in_ready) j <= j + 9'd1;
              if (g_out_valid) begin
                for (int w = 0; w < 4; w++)
                  ab[13 + 4*(int'(nab) + int'(ob)) + w] <= g_out_data[127 - 32*w -: 32];
                ob <= ob + 5'd1;
              end
              if (g_done) begin
                for (int w = 0; w < 4; w++) ab[8 + w] <= g_tag[127 - 32*w -: 32];
                ab[12][1] <= g_tag_ok; tag_ok_f <= g_tag_ok;
                wbase <= 9'(ACC_BASE + 8); wsrc <= 7'd8; cnt <= 7'(NAB - 8); xs <= X_WB;
              end
            end
            CMD_ECC: if (e_done) begin
              for (int w = 0; w < 8; w++) begin
                ab[24 + w] <= e_xo256[255 - 32*w -: 32];
                ab[32 + w] <= e_yo256[255 - 32*w -: 32];
              end
              wbase <= 9'(ACC_BASE + 24); wsrc <= 7'd24; cnt <= 7'd16; xs <= X_WB;
            end
            CMD_DRBG_INST, CMD_DRBG_GEN: if (d_done) begin
              for (int w = 0; w < 8; w++) begin
                ab[w]      <= d_k[255 - 32*w -: 32];
                ab[8 + w]  <= d_v[255 - 32*w -: 32];
                ab[16 + w] <= d_rnd[255 - 32*w -: 32];
              end
              wb2 <= (cmd == CMD_DRBG_GEN);
              wbase <= 9'(STACK_BASE); wsrc <= 7'd0; cnt <= 7'd16; xs <= X_WB;
            end
            CMD_TPUSH: begin
              if (sh_push) j <= j + 9'd1;
              else if ((j == ab[0][8:0] || in_empty) && !sh_busy) begin
                ab[0] <= 32'(j);
                wbase <= 9'(ACC_BASE); wsrc <= 7'd0; cnt <= 7'd1; xs <= X_WB;
              end
            end
            CMD_HKDF_EXT, CMD_HKDF_EXP: if (k_done) begin
              for (int w = 0; w < 8; w++) ab[w] <= k_out[255 - 32*w -: 32];
              wbase <= 9'(ACC_BASE); wsrc <= 7'd0; cnt <= 7'd8; xs <= X_WB;
            end
            CMD_TSNAP: if (sh_done) begin
              for (int w = 0; w < 8; w++) ab[w] <= sh_digest[255 - 32*w -: 32];
              wbase <= 9'(ACC_BASE); wsrc <= 7'd0; cnt <= 7'd8; xs <= X_WB;
            end
            default: xs <= X_FIN;
          endcase
        end
        X_WB: begin
          idx <= idx + 7'd1;
          if (idx + 7'd1 == cnt) begin
            idx <= '0;
            if (wb2) begin
              wb2 <= 1'b0; wbase <= 9'(ACC_BASE); wsrc <= 7'd16; cnt <= 7'd8;
            end else begin
              xs <= X_FIN;
            end
          end
        end
        X_FIN: begin done_f <= 1'b1; xs <= X_IDLE; end
        default: xs <= X_IDLE;
      endcase
    end
  end

  assign irq = done_f;

endmodule
