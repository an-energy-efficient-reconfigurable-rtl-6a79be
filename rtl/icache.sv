// icache: instruction cache of the processor, backed by a block device.
//
// A 16 KB, 4-way set-associative cache with 512-byte lines (8 sets of 4 ways,
// 128 words per line). Its line size matches the 512-byte block of an SD card,
// which refills it. To keep access energy low, each cycle reads one 32-bit
// word of the data array and at most one tag. The tag array holds 32 entries
// of {valid, 20-bit tag}, which is 84 bytes.
//
// A fetch is looked up in three ways:
//  * Last-line register. It holds the set, way and tag of the last line that
//    hit. A fetch from that line needs no tag read: its word is read at once.
//  * MRU way predictor. Otherwise the ways are probed one per cycle, starting
//    with the most recently used way of the set. That way is decoded from the
//    set's tree pseudo-LRU bits, so the predictor needs no storage of its own.
//  * Refill. If all four probes miss, the line chosen by the pseudo-LRU tree is
//    refilled from the backing store. Then the fetch is probed again and hits.
//
// Interface:
//  * Fetch side. The core raises `req` with `addr` and holds both until `rdy`
//    is high for one cycle; `instr` is valid in that cycle. Hit latency:
//    - last-line hit: `rdy` one cycle after `req`;
//    - hit in the predicted way: two cycles;
//    - hit in the n-th way probed: n+1 cycles.
//  * Refill side. `mem_req` is a one-cycle pulse carrying the line's base
//    address on `mem_addr`. The store then returns the line's 128 words in
//    order, each with a `mem_valid` pulse; gaps between pulses are allowed.
//
// From the paper:
//  * 16 KB, 512-byte lines, 4 ways;
//  * tree pseudo-LRU replacement;
//  * an 84-byte tag array read one way at a time;
//  * one 32-bit word read per access;
//  * an MRU predictor taken from the replacement bits;
//  * a register caching the last tag read.
// This design's own choices:
//  * the handshakes;
//  * one fetch per two cycles;
//  * probing ways in increasing order after the predicted one;
//  * no flush input.
// The pseudo-LRU tree is written for four ways; the other sizes are free.
// Lint: addr[1:0] is unused because fetches are whole words. mem_addr is the
// fetch address's line part with nine zero bits below it, so its bits are
// copies of inputs and constants by design.
module icache #(
  parameter int SIZE_BYTES  = 16384,
  parameter int BLOCK_BYTES = 512,
  parameter int WAYS        = 4,
  parameter int AW          = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  // fetch side
  input  logic          req,
  input  logic [AW-1:0] addr,
  output logic          rdy,
  output logic [31:0]   instr,
  // refill side
  output logic          mem_req,
  output logic [AW-1:0] mem_addr,
  input  logic          mem_valid,
  input  logic [31:0]   mem_data
);

  localparam int SETS = SIZE_BYTES / BLOCK_BYTES / WAYS;  // 8
  localparam int WPL  = BLOCK_BYTES / 4;                  // 128 words per line
  localparam int OB   = $clog2(BLOCK_BYTES);              // 9 offset bits
  localparam int SB   = $clog2(SETS);                     // 3 set bits
  localparam int WB   = $clog2(WPL);                      // 7 word bits
  localparam int YB   = $clog2(WAYS);                     // 2 way bits
  localparam int TW   = AW - OB - SB;                     // 20 tag bits

  typedef enum logic [2:0] {S_IDLE, S_PROBE, S_RESP, S_MISS, S_FILL} state_e;
  state_e state;

  // storage
  logic [31:0]   data_mem [WAYS*SETS*WPL];
  logic [TW:0]   tag_mem  [WAYS*SETS];    // {valid, tag}
  logic [2:0]    plru     [SETS];         // tree bits: [0] root, [1] ways 0/1, [2] ways 2/3

  // fetch address fields
  logic [TW-1:0] a_tag;
  logic [SB-1:0] a_set;
  logic [WB-1:0] a_word;
  assign a_tag  = addr[AW-1 -: TW];
  assign a_set  = addr[OB +: SB];
  assign a_word = addr[2 +: WB];

  // last-line register
  logic          ll_v;
  logic [TW-1:0] ll_tag;
  logic [SB-1:0] ll_set;
  logic [YB-1:0] ll_way;

  logic [YB-1:0] pw;        // way being probed
  logic [YB:0]   probes;    // probes done for this fetch
  logic [WB-1:0] fcnt;      // refill word counter
  logic [31:0]   rdata;

  // pseudo-LRU decode for the fetch's set
  logic [2:0]    pl;
  logic [YB-1:0] victim, mru;
  assign pl     = plru[a_set];
  assign victim = pl[0] ? {1'b1, pl[2]} : {1'b0, pl[1]};
  assign mru    = pl[0] ? {1'b0, ~pl[1]} : {1'b1, ~pl[2]};

  logic [TW:0] ptag;
  logic        phit;
  assign ptag = tag_mem[{pw, a_set}];
  assign phit = ptag[TW] && ptag[TW-1:0] == a_tag;

  logic ll_hit;
  assign ll_hit = ll_v && ll_set == a_set && ll_tag == a_tag;

  assign rdy      = state == S_RESP;
  assign instr    = rdata;
  assign mem_req  = state == S_MISS;
  assign mem_addr = {a_tag, a_set, {OB{1'b0}}};

  // after an access to way w, point every tree bit on w's path away from it
  function automatic logic [2:0] touch(input logic [2:0] b, input logic [YB-1:0] w);
    logic [2:0] r;
    r = b;
    r[0] = ~w[1];
    if (w[1]) r[2] = ~w[0];
    else      r[1] = ~w[0];
    return r;
  endfunction

  // data array: one word read or written per cycle
  always_ff @(posedge clk) begin
    if (state == S_FILL && mem_valid)
      data_mem[{pw, a_set, fcnt}] <= mem_data;
    else if (state == S_IDLE && req && ll_hit)
      rdata <= data_mem[{ll_way, a_set, a_word}];
    else if (state == S_PROBE)
      rdata <= data_mem[{pw, a_set, a_word}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      ll_v   <= 1'b0;
      ll_tag <= '0;
      ll_set <= '0;
      ll_way <= '0;
      pw     <= '0;
      probes <= '0;
      fcnt   <= '0;
      for (int i = 0; i < WAYS*SETS; i++) tag_mem[i] <= '0;
      for (int i = 0; i < SETS; i++) plru[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req) begin
          if (ll_hit) begin
            plru[a_set] <= touch(pl, ll_way);
            state       <= S_RESP;
          end else begin
            pw     <= mru;
            probes <= '0;
            state  <= S_PROBE;
          end
        end
        S_PROBE: begin
          if (phit) begin
            plru[a_set] <= touch(pl, pw);
            ll_v   <= 1'b1;
            ll_tag <= a_tag;
            ll_set <= a_set;
            ll_way <= pw;
            state  <= S_RESP;
          end else if (probes == (YB+1)'(WAYS-1)) begin
            pw    <= victim;
            state <= S_MISS;
          end else begin
            pw     <= pw + 1'b1;
            probes <= probes + 1'b1;
          end
        end
        S_RESP: state <= S_IDLE;
        S_MISS: begin
          // the victim stops being valid while it is overwritten
          tag_mem[{pw, a_set}] <= '0;
          if (ll_set == a_set && ll_way == pw) ll_v <= 1'b0;
          fcnt  <= '0;
          state <= S_FILL;
        end
        S_FILL: if (mem_valid) begin
          fcnt <= fcnt + 1'b1;
          if (fcnt == WB'(WPL-1)) begin
            tag_mem[{pw, a_set}] <= {1'b1, a_tag};
            probes <= (YB+1)'(WAYS-1);
            state  <= S_PROBE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
