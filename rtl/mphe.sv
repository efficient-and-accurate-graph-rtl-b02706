// mphe: Minimal Perfect Hashing Engine, code -> histogram index in O(1).
//
// The codebook of each hop is indexed by a BBHash-style minimal perfect hash:
// a cascade of bit arrays (levels) A_0, A_1, ... where a key that hashed
// without collision at level d owns a 1 at position h_d(key) mod |A_d|. A
// lookup walks the levels until it finds a 1; the MPH index is
//   rank[word] + popcount(word bits 0..i) - 1,
// where rank[word] is the number of 1s before that 64-bit word counted over
// all levels of the hop. The index addresses a codebook store of
// (code, hist_idx) pairs; the code is compared with the stored one, and only
// on a match is hist_idx emitted. A code that meets no 1 in any level, or
// whose stored code differs, is absent and produces no output.
//
// Pipeline (one lookup enters per cycle, fixed latency LEVELS + 3):
//   lookup queue (sync_fifo) -> hash function engine (two seeded 64-bit
//   hashes) -> one probe stage per level, each reading its own level-table
//   bank; after level 1 the next hash is made by a xorshift128+ step ->
//   rank stage (rank vector banked per level) -> codebook stage -> compare.
// Level d uses h0 for d = 0, h1 for d = 1 and the xorshift128+ sequence after.
//
// Per-hop configuration (held stable during a hop): lvl_log2[d] gives
// |A_d| = 2^lvl_log2[d] bits (0 = level unused, at least 6), lvl_base[d] the
// first word of the hop's level d in bank d, cb_base the hop's first codebook
// entry. Load port: sel 0 level words, sel 1 rank entries (addr = d*LT_DEPTH
// + word), sel 2 codebook {code[47:16], hist_idx[15:0]}.
//
// From the published design: level cascade, rank vector, popcount index,
// codebook verify, seeded integer hash plus xorshift rehash, 64-bit words,
// banking of level tables and rank vectors, one lookup per cycle. This
// implementation's choices: power-of-two level sizes (so "mod |A_d|" is a
// mask), the hash mixing constants, seeds, 8 levels, 16-bit rank entries,
// one pipeline stage per level, and a single codebook port (only one lookup
// reaches the codebook stage per cycle).
module mphe
  import hx_pkg::*;
#(
  parameter int unsigned LEVELS   = 8,
  parameter int unsigned LT_DEPTH = 256,    // 64-bit words per level bank
  parameter int unsigned CB_DEPTH = 4096,   // codebook entries (all hops)
  parameter int unsigned QDEPTH   = 16,     // lookup queue depth
  parameter logic [63:0] SEED0    = 64'h9E37_79B9_7F4A_7C15,
  parameter logic [63:0] SEED1    = 64'hC2B2_AE3D_27D4_EB4F,
  localparam int unsigned WA = $clog2(LT_DEPTH),
  localparam int unsigned CA = $clog2(CB_DEPTH),
  localparam int unsigned LB = (LEVELS > 1) ? $clog2(LEVELS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld_we,
  input  logic [1:0]        ld_sel,
  input  logic [31:0]       ld_addr,
  input  logic [63:0]       ld_data,
  input  logic [5:0]        lvl_log2 [LEVELS],
  input  logic [WA-1:0]     lvl_base [LEVELS],
  input  logic [CA-1:0]     cb_base,
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t             in_code,
  output logic              out_valid,
  output logic [15:0]       out_idx,
  output logic              idle,
  output logic [31:0]       n_hit,
  output logic [31:0]       n_absent,     // no level hit
  output logic [31:0]       n_mismatch    // hit, but the codebook code differs
);

  logic [63:0] lt_mem [LEVELS][LT_DEPTH];
  logic [15:0] rk_mem [LEVELS][LT_DEPTH];
  logic [47:0] cb_mem [CB_DEPTH];

  always_ff @(posedge clk) begin
    if (ld_we) begin
      unique case (ld_sel)
        2'd0: lt_mem[LB'(ld_addr / LT_DEPTH)][WA'(ld_addr % LT_DEPTH)] <= ld_data;
        2'd1: rk_mem[LB'(ld_addr / LT_DEPTH)][WA'(ld_addr % LT_DEPTH)] <= ld_data[15:0];
        2'd2: cb_mem[CA'(ld_addr)] <= ld_data[47:0];
        default: ;
      endcase
    end
  end

  // ---------------- lookup queue ----------------
  logic  q_valid;
  data_t q_code;
  logic [$clog2(QDEPTH):0] q_count;
  sync_fifo #(.WIDTH(DATA_W), .DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_code),
    .out_valid(q_valid), .out_ready(1'b1), .out_data(q_code), .count(q_count)
  );

  // ---------------- probe pipeline ----------------
  typedef struct packed {
    logic          v;
    logic [31:0]   code;
    xs_state_t     hs;      // xorshift state
    logic [63:0]   h;       // hash for the level probed next
    logic          found;
    logic [LB-1:0] lvl;
    logic [WA-1:0] waddr;
    logic [6:0]    pc;      // popcount of word bits 0..i
  } probe_t;

  probe_t pr [LEVELS+1];     // pr[d] enters level stage d; pr[LEVELS] leaves the last
  logic          rk_v, rk_found;
  logic [31:0]   rk_code;
  logic [15:0]   rk_idx;
  logic          cb_v;

  // stage outputs computed combinationally, registered into pr[d+1]
  probe_t nx [LEVELS];
  always_comb begin
    for (int unsigned d = 0; d < LEVELS; d++) begin
      logic [63:0] idx, word, mask;
      xs_state_t   ns;
      nx[d] = pr[d];
      idx   = pr[d].h & ((64'd1 << lvl_log2[d]) - 64'd1);
      word  = lt_mem[d][WA'(32'(lvl_base[d]) + 32'(idx >> 6))];
      mask  = (64'd2 << idx[5:0]) - 64'd1;
      if (pr[d].v && !pr[d].found && lvl_log2[d] != 0 && word[idx[5:0]]) begin
        nx[d].found = 1'b1;
        nx[d].lvl   = LB'(d);
        nx[d].waddr = WA'(32'(lvl_base[d]) + 32'(idx >> 6));
        nx[d].pc    = 7'($countones(word & mask));
      end
      if (d == 0) begin
        nx[d].h = pr[d].hs.s1;
      end else begin
        ns       = xs128p_next(pr[d].hs);
        nx[d].hs = ns;
        nx[d].h  = ns.s1 + pr[d].hs.s1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned d = 0; d <= LEVELS; d++) pr[d] <= '0;
      rk_v <= 1'b0; rk_found <= 1'b0; rk_code <= '0; rk_idx <= '0;
      cb_v <= 1'b0; out_valid <= 1'b0; out_idx <= '0;
      n_hit <= '0; n_absent <= '0; n_mismatch <= '0;
    end else begin
      // hash function engine
      pr[0]       <= '0;
      if (q_valid) begin
        automatic logic [63:0] h0 = hash64({{32{q_code[31]}}, q_code}, SEED0);
        automatic logic [63:0] h1 = hash64({{32{q_code[31]}}, q_code}, SEED1);
        pr[0].v    <= 1'b1;
        pr[0].code <= q_code;
        pr[0].hs   <= '{s0: h0, s1: h1};
        pr[0].h    <= h0;
      end
      for (int unsigned d = 0; d < LEVELS; d++) pr[d+1] <= nx[d];
      // rank stage
      rk_v     <= pr[LEVELS].v;
      rk_found <= pr[LEVELS].found;
      rk_code  <= pr[LEVELS].code;
      rk_idx   <= rk_mem[pr[LEVELS].lvl][pr[LEVELS].waddr] + 16'(pr[LEVELS].pc) - 16'd1;
      // codebook stage and compare
      cb_v      <= rk_v;
      out_valid <= 1'b0;
      if (rk_v) begin
        automatic logic [47:0] e = cb_mem[CA'(32'(cb_base) + 32'(rk_idx))];
        if (!rk_found)                    n_absent <= n_absent + 1;
        else if (e[47:16] != rk_code)     n_mismatch <= n_mismatch + 1;
        else begin
          n_hit     <= n_hit + 1;
          out_valid <= 1'b1;
          out_idx   <= e[15:0];
        end
      end
    end
  end

  always_comb begin
    idle = !q_valid && !rk_v && !cb_v;
    for (int unsigned d = 0; d <= LEVELS; d++) if (pr[d].v) idle = 1'b0;
  end

endmodule
