// hyperx_top: HyperX graph-classification accelerator, one graph per run.
//
// What it does. For one input graph (node features F, adjacency A) it runs the
// Nystrom-HDC inference: for every hop t = 0 .. H-1 the LSH unit produces one
// integer code per node, the minimal perfect hash engine maps each code to its
// histogram bin (codes absent from the training codebook are dropped), the
// histogram update engine counts the bins, and the kernel similarity engine
// adds H(t) h(t) into the kernel vector C. After the last hop the Nystrom
// encoding engine streams Pnys from DDR and forms the hypervector
// sign(Pnys C); the similarity check engine scores it against the class
// prototypes and reports the arg-max label.
//
// How it works. A controller FSM sequences the engines:
//   IDLE -> (per hop) LSH: start LSHU; codes flow LSHU -> MPHE lookup queue ->
//   MPHE -> HUE, MPHE hits handed to the HUE lanes round-robin
//   -> DRAIN: wait until the MPHE pipeline is empty
//   -> MERGE: HUE reduces its private copies and writes the histogram h(t)
//      (counts in Q16.16) into the KSE input buffer
//   -> KSE: C += H(t) h(t) (C := for t = 0)
//   -> next hop, or ENC: NEE loads C and streams Pnys -> CLS: SCE -> IDLE.
// Engines run one after another per hop except LSHU, MPHE and HUE, which form
// a streaming pipeline. The NEE read master is told to prefetch Pnys at the
// start of the run, so the DDR latency and the first FIFO fill overlap the
// hop loop.
//
// Interface. Host load port cfg_we/cfg_region/cfg_addr/cfg_data writes every
// on-chip store (see hx_pkg::region_e) and the configuration registers
// (region RG_REG, map in hx_pkg). start/busy/done run one graph; label and
// best_score hold the result until the next start; run_cycles is the latency
// of the last run in clock cycles. The m_ar_* / m_r_* signals are an AXI4-style
// read master (address and data channels only) to device DDR holding Pnys.
// The remaining outputs are event counters for performance analysis.
//
// Timing. All state changes on the rising clock edge, reset is synchronous and
// active low. The HUE clears its copies during the first MAX_BINS cycles after
// reset; start must not be asserted before busy_init falls.
//
// From the published design: the engine set, their order, the per-hop loop,
// C accumulated on chip across hops, Pnys streamed from DDR, 4 PEs in LSHU,
// KSE and HUE. This implementation's choices: the load-port register map,
// strictly sequential engine phases per hop (no overlap of KSE with the next
// hop's LSHU), the early Pnys prefetch, and the round-robin hand-off of MPHE hits to the HUE lanes.
module hyperx_top
  import hx_pkg::*;
#(
  parameter int unsigned P        = 4,       // PEs in LSHU, KSE, HUE
  parameter int unsigned MAX_N    = 1024,    // nodes per graph
  parameter int unsigned MAX_F    = 128,     // features per node
  parameter int unsigned MAX_HOP  = 10,      // H
  parameter int unsigned A_NNZ    = 8192,    // adjacency nonzeros
  parameter int unsigned MAX_S    = 512,     // landmarks s and histogram bins
  parameter int unsigned H_NNZ    = 16384,   // landmark-histogram nonzeros, all hops
  parameter int unsigned LEVELS   = 8,       // MPH levels
  parameter int unsigned LT_DEPTH = 256,     // MPH level words per level
  parameter int unsigned CB_DEPTH = 4096,    // MPH codebook entries, all hops
  parameter int unsigned D_MAX    = 10000,   // hypervector dimension
  parameter int unsigned MAX_C    = 8,       // classes
  parameter int unsigned NEE_FIFO = 512,     // Pnys stream FIFO depth
  localparam int unsigned FA  = $clog2(MAX_F),
  localparam int unsigned SA  = $clog2(MAX_N / P),
  localparam int unsigned SB  = $clog2(MAX_S),
  localparam int unsigned WA  = $clog2(LT_DEPTH),
  localparam int unsigned CBA = $clog2(CB_DEPTH),
  localparam int unsigned CA  = $clog2(MAX_C),
  localparam int unsigned HW  = $clog2(MAX_HOP)
) (
  input  logic               clk,
  input  logic               rst_n,
  // host load port
  input  logic               cfg_we,
  input  region_e            cfg_region,
  input  logic [31:0]        cfg_addr,
  input  logic [63:0]        cfg_data,
  // run control
  input  logic               start,
  output logic               busy,
  output logic               busy_init,
  output logic               done,
  output logic [CA-1:0]      label,
  output logic signed [31:0] best_score,
  output logic [31:0]        run_cycles,
  input  logic [CA-1:0]      score_raddr,        // per-class score of the last run
  output logic signed [31:0] score_rdata,
  // DDR read master
  output logic               m_ar_valid,
  input  logic               m_ar_ready,
  output logic [31:0]        m_ar_addr,
  output logic [7:0]         m_ar_len,
  input  logic               m_r_valid,
  output logic               m_r_ready,
  input  logic [511:0]       m_r_data,
  input  logic               m_r_last,
  // event counters
  output logic [31:0]        a_stall_cycles,     // LSHU SpMV bank-conflict stalls
  output logic [31:0]        h_stall_cycles,     // KSE SpMV bank-conflict stalls
  output logic [31:0]        h_iterations,       // KSE schedule iterations run
  output logic [31:0]        mph_hits,
  output logic [31:0]        mph_absent,
  output logic [31:0]        mph_mismatch,
  output logic [31:0]        hist_updates,
  output logic [31:0]        hist_dropped,
  output logic [31:0]        ddr_credit_stalls,
  output logic [31:0]        ddr_starve_cycles,
  output logic [3:0]         ddr_max_outst
);

  // ---------------- configuration registers ----------------
  logic [15:0]     r_n_nodes, r_dim;
  logic [FA:0]     r_n_feat;
  logic [3:0]      r_n_hops;
  logic [SA:0]     r_a_niter;
  logic [5:0]      r_lsh_shift;
  logic [SB:0]     r_n_land;
  logic [CA:0]     r_n_classes;
  logic [31:0]     r_pnys_base;
  data_t           r_lsh_b   [MAX_HOP];
  logic [SB:0]     r_n_bins  [MAX_HOP];
  logic [CBA-1:0]  r_cb_base [MAX_HOP];
  logic [5:0]      r_lvl_log2[MAX_HOP][LEVELS];
  logic [WA-1:0]   r_lvl_base[MAX_HOP][LEVELS];

  wire reg_we = cfg_we && (cfg_region == RG_REG);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_n_nodes <= '0; r_dim <= '0; r_n_feat <= '0; r_n_hops <= '0; r_a_niter <= '0;
      r_lsh_shift <= 6'(FRAC); r_n_land <= '0; r_n_classes <= '0; r_pnys_base <= '0;
      for (int unsigned t = 0; t < MAX_HOP; t++) begin
        r_lsh_b[t] <= '0; r_n_bins[t] <= '0; r_cb_base[t] <= '0;
        for (int unsigned d = 0; d < LEVELS; d++) begin
          r_lvl_log2[t][d] <= '0; r_lvl_base[t][d] <= '0;
        end
      end
    end else if (reg_we) begin
      if (cfg_addr == REG_N_NODES)   r_n_nodes   <= cfg_data[15:0];
      if (cfg_addr == REG_N_FEAT)    r_n_feat    <= (FA+1)'(cfg_data);
      if (cfg_addr == REG_N_HOPS)    r_n_hops    <= cfg_data[3:0];
      if (cfg_addr == REG_A_NITER)   r_a_niter   <= (SA+1)'(cfg_data);
      if (cfg_addr == REG_LSH_SHIFT) r_lsh_shift <= cfg_data[5:0];
      if (cfg_addr == REG_N_LAND)    r_n_land    <= (SB+1)'(cfg_data);
      if (cfg_addr == REG_DIM)       r_dim       <= cfg_data[15:0];
      if (cfg_addr == REG_N_CLASSES) r_n_classes <= (CA+1)'(cfg_data);
      if (cfg_addr == REG_PNYS_BASE) r_pnys_base <= cfg_data[31:0];
      for (int unsigned t = 0; t < MAX_HOP; t++) begin
        if (cfg_addr == REG_LSH_B + t)   r_lsh_b[t]   <= cfg_data[31:0];
        if (cfg_addr == REG_N_BINS + t)  r_n_bins[t]  <= (SB+1)'(cfg_data);
        if (cfg_addr == REG_CB_BASE + t) r_cb_base[t] <= CBA'(cfg_data);
        for (int unsigned d = 0; d < LEVELS; d++) begin
          if (cfg_addr == REG_LVL_LOG2 + t * 8 + d) r_lvl_log2[t][d] <= cfg_data[5:0];
          if (cfg_addr == REG_LVL_BASE + t * 8 + d) r_lvl_base[t][d] <= WA'(cfg_data);
        end
      end
    end
  end

  // ---------------- controller ----------------
  typedef enum logic [2:0] {T_IDLE, T_LSH, T_DRAIN, T_MERGE, T_KSE, T_ENC, T_CLS} tst_e;
  tst_e        st;
  logic [3:0]  hop;
  logic        lshu_start, merge_start, kse_start, nee_prefetch, nee_start, sce_start;
  logic        lshu_done, mphe_idle, merge_done, kse_done, nee_done, sce_done;
  logic        lshu_busy, merge_busy, kse_busy, nee_busy, sce_busy;
  logic [31:0] cyc;

  assign busy      = (st != T_IDLE);
  assign busy_init = merge_busy && (st == T_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= T_IDLE; hop <= '0; done <= 1'b0; cyc <= '0; run_cycles <= '0;
      lshu_start <= 1'b0; merge_start <= 1'b0; kse_start <= 1'b0;
      nee_prefetch <= 1'b0; nee_start <= 1'b0; sce_start <= 1'b0;
    end else begin
      done <= 1'b0;
      lshu_start <= 1'b0; merge_start <= 1'b0; kse_start <= 1'b0;
      nee_prefetch <= 1'b0; nee_start <= 1'b0; sce_start <= 1'b0;
      if (st != T_IDLE) cyc <= cyc + 1;
      unique case (st)
        T_IDLE: if (start && !merge_busy) begin
          hop <= '0; cyc <= 32'd1; nee_prefetch <= 1'b1;
          if (r_n_hops == 0) begin st <= T_ENC; nee_start <= 1'b1; end
          else begin st <= T_LSH; lshu_start <= 1'b1; end
        end
        T_LSH:   if (lshu_done) st <= T_DRAIN;
        T_DRAIN: if (mphe_idle) begin st <= T_MERGE; merge_start <= 1'b1; end
        T_MERGE: if (merge_done) begin st <= T_KSE; kse_start <= 1'b1; end
        T_KSE: if (kse_done) begin
          if (hop + 1 == r_n_hops) begin st <= T_ENC; nee_start <= 1'b1; end
          else begin hop <= hop + 1; st <= T_LSH; lshu_start <= 1'b1; end
        end
        T_ENC: if (nee_done) begin st <= T_CLS; sce_start <= 1'b1; end
        T_CLS: if (sce_done) begin
          st <= T_IDLE; done <= 1'b1; run_cycles <= cyc + 1;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  wire [HW-1:0] hop_i = HW'(hop);

  // ---------------- LSHU ----------------
  logic  code_valid, code_ready;
  data_t code;

  lshu #(.P(P), .MAX_N(MAX_N), .MAX_F(MAX_F), .MAX_HOP(MAX_HOP), .A_NNZ(A_NNZ)) u_lshu (
    .clk, .rst_n,
    .ld_we(cfg_we), .ld_region(cfg_region), .ld_addr(cfg_addr), .ld_data(cfg_data),
    .start(lshu_start), .hop(hop), .n_nodes(r_n_nodes), .n_feat(r_n_feat),
    .a_niter(r_a_niter), .lsh_b(r_lsh_b[hop_i]), .lsh_shift(r_lsh_shift),
    .busy(lshu_busy), .done(lshu_done),
    .code_valid(code_valid), .code_ready(code_ready), .code(code),
    .a_stall_cycles(a_stall_cycles)
  );

  // ---------------- MPHE ----------------
  logic        mph_ld_we;
  logic [1:0]  mph_ld_sel;
  logic        mph_out_valid;
  logic [15:0] mph_out_idx;

  always_comb begin
    mph_ld_we  = cfg_we && (cfg_region inside {RG_MPH_LEVEL, RG_MPH_RANK, RG_MPH_CB});
    mph_ld_sel = (cfg_region == RG_MPH_LEVEL) ? 2'd0 :
                 (cfg_region == RG_MPH_RANK)  ? 2'd1 : 2'd2;
  end

  mphe #(.LEVELS(LEVELS), .LT_DEPTH(LT_DEPTH), .CB_DEPTH(CB_DEPTH)) u_mphe (
    .clk, .rst_n,
    .ld_we(mph_ld_we), .ld_sel(mph_ld_sel), .ld_addr(cfg_addr), .ld_data(cfg_data),
    .lvl_log2(r_lvl_log2[hop_i]), .lvl_base(r_lvl_base[hop_i]), .cb_base(r_cb_base[hop_i]),
    .in_valid(code_valid), .in_ready(code_ready), .in_code(code),
    .out_valid(mph_out_valid), .out_idx(mph_out_idx), .idle(mphe_idle),
    .n_hit(mph_hits), .n_absent(mph_absent), .n_mismatch(mph_mismatch)
  );

  // ---------------- HUE ----------------
  logic [P-1:0]  hue_valid;
  logic [15:0]   hue_idx [P];
  logic [$clog2(P)-1:0] lane;
  logic          h_we;
  logic [SB-1:0] h_addr;
  data_t         h_data;

  always_ff @(posedge clk) begin
    if (!rst_n) lane <= '0;
    else if (mph_out_valid) lane <= lane + 1'b1;
  end

  always_comb begin
    for (int unsigned l = 0; l < P; l++) begin
      hue_valid[l] = mph_out_valid && (32'(lane) == l);
      hue_idx[l]   = mph_out_idx;
    end
  end

  hue #(.P(P), .MAX_BINS(MAX_S)) u_hue (
    .clk, .rst_n,
    .in_valid(hue_valid), .in_idx(hue_idx),
    .merge_start(merge_start), .n_bins(r_n_bins[hop_i]),
    .merge_busy(merge_busy), .merge_done(merge_done),
    .out_we(h_we), .out_addr(h_addr), .out_data(h_data),
    .n_updates(hist_updates), .n_dropped(hist_dropped)
  );

  // ---------------- KSE ----------------
  logic        kse_ld_we;
  logic [1:0]  kse_ld_sel;
  logic [SB-1:0] c_raddr;
  data_t       c_rdata;

  always_comb begin
    kse_ld_we  = cfg_we && (cfg_region inside {RG_H_SCHED, RG_H_ROWPTR, RG_H_COLVAL, RG_KSE_DESC});
    unique case (cfg_region)
      RG_H_SCHED:  kse_ld_sel = 2'd0;
      RG_H_ROWPTR: kse_ld_sel = 2'd1;
      RG_H_COLVAL: kse_ld_sel = 2'd2;
      default:     kse_ld_sel = 2'd3;
    endcase
  end

  kse #(.P(P), .VEC_DEPTH(MAX_S), .NNZ_DEPTH(H_NNZ), .MAX_HOP(MAX_HOP)) u_kse (
    .clk, .rst_n,
    .ld_we(kse_ld_we), .ld_sel(kse_ld_sel), .ld_addr(cfg_addr), .ld_data(cfg_data),
    .hist_we(h_we), .hist_addr(h_addr), .hist_data(h_data),
    .start(kse_start), .hop(hop), .busy(kse_busy), .done(kse_done),
    .c_raddr(c_raddr), .c_rdata(c_rdata),
    .stall_cycles(h_stall_cycles), .iter_count(h_iterations)
  );

  // ---------------- NEE ----------------
  logic [$clog2((D_MAX + 63) / 64)-1:0] hv_raddr;
  logic [63:0] hv_rdata;

  nee #(.FIFO_DEPTH(NEE_FIFO), .C_DEPTH(MAX_S), .D_MAX(D_MAX)) u_nee (
    .clk, .rst_n,
    .prefetch(nee_prefetch), .start(nee_start), .n_rows(r_dim), .n_land(r_n_land), .base_addr(r_pnys_base),
    .busy(nee_busy), .done(nee_done),
    .c_raddr(c_raddr), .c_rdata(c_rdata),
    .ar_valid(m_ar_valid), .ar_ready(m_ar_ready), .ar_addr(m_ar_addr), .ar_len(m_ar_len),
    .r_valid(m_r_valid), .r_ready(m_r_ready), .r_data(m_r_data), .r_last(m_r_last),
    .hv_raddr(hv_raddr), .hv_rdata(hv_rdata),
    .credit_stalls(ddr_credit_stalls), .starve_cycles(ddr_starve_cycles),
    .max_outst_seen(ddr_max_outst)
  );

  // ---------------- SCE ----------------
  sce #(.NPE(P), .MAX_C(MAX_C), .D_MAX(D_MAX)) u_sce (
    .clk, .rst_n,
    .ld_we(cfg_we && cfg_region == RG_PROTO), .ld_addr(cfg_addr), .ld_data(cfg_data),
    .start(sce_start), .n_dim(r_dim), .n_classes(r_n_classes),
    .busy(sce_busy), .done(sce_done),
    .hv_raddr(hv_raddr), .hv_rdata(hv_rdata),
    .label(label), .best_score(best_score),
    .score_raddr(score_raddr), .score_rdata(score_rdata)
  );

  // Engines are started only when idle and finish in their own phase.
  a_phase_lshu: assert property (@(posedge clk) disable iff (!rst_n) lshu_busy |-> st == T_LSH);
  a_phase_kse:  assert property (@(posedge clk) disable iff (!rst_n) kse_busy |-> st == T_KSE);
  a_phase_nee:  assert property (@(posedge clk) disable iff (!rst_n) nee_busy |-> st == T_ENC);
  a_phase_sce:  assert property (@(posedge clk) disable iff (!rst_n) sce_busy |-> st == T_CLS);

endmodule
