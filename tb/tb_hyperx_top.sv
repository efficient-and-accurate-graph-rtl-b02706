// tb_hyperx_top: end-to-end test of the accelerator at its default (full)
// size, with no parameter overrides.
//
// The testbench plays the host: it builds a trained model here (per-hop LSH
// projections, minimal perfect hashes over a set of training codes with a
// codebook, sparse landmark histogram matrices H(t) with their schedule
// tables, class prototypes) and loads it once through the load port. It then
// classifies two random graphs (200 nodes, 3 hops, s = 48 landmarks,
// d = 10000, 4 classes); for each it loads the graph, starts the run, and
// compares every class score and the label with a reference computed here
// step by step (codes, histograms, C, sign(Pnys C), prototype scores). Pnys
// comes from the behavioural DDR model.
//
// Mechanism coverage: the run must show bank-conflict stalls in both SpMV
// engines (LSHU and KSE), codes absent from the codebook, DDR credit stalls
// (the FIFO filled by the early prefetch), MAC starvation and more than one
// burst in flight; a mechanism that never occurs counts as a failure. Timing:
// the encoder consumes at most one 512-bit word per cycle, so a run takes at
// least d * ceil(s/16) cycles; the check also bounds it from above.
module tb_hyperx_top;
  import hx_pkg::*;
  import tb_util_pkg::*;
  localparam int P = 4, MAXF = 128, LEV = 8, LTD = 256, HVW = (10000 + 63) / 64;
  localparam int N = 200, NF = 6, NH = 3, S = 48, D = 10000, NC = 4, SHIFT = 17;
  localparam int BASEW = 1000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0; region_e cfg_region = RG_REG; logic [31:0] cfg_addr = 0; logic [63:0] cfg_data = 0;
  logic start = 0, busy, busy_init, done; logic [2:0] label; logic signed [31:0] best_score;
  logic [31:0] run_cycles; logic [2:0] score_raddr = 0; logic signed [31:0] score_rdata;
  logic m_ar_valid, m_ar_ready, m_r_valid, m_r_ready, m_r_last;
  logic [31:0] m_ar_addr; logic [7:0] m_ar_len; logic [511:0] m_r_data;
  logic [31:0] a_stall_cycles, h_stall_cycles, h_iterations, mph_hits, mph_absent, mph_mismatch;
  logic [31:0] hist_updates, hist_dropped, ddr_credit_stalls, ddr_starve_cycles;
  logic [3:0]  ddr_max_outst;

  hyperx_top dut (.*);

  ddr_model u_ddr (.clk, .rst_n, .ar_valid(m_ar_valid), .ar_ready(m_ar_ready), .ar_addr(m_ar_addr),
                   .ar_len(m_ar_len), .r_valid(m_r_valid), .r_ready(m_r_ready), .r_data(m_r_data),
                   .r_last(m_r_last));

  int checks = 0, failures = 0;

  // model
  int U [NH][NF]; int B [NH];
  int keys [NH][$]; int bin_of [NH][int]; int nbins [NH];
  logic [5:0] lg2 [NH][LEV]; int lbase [NH][LEV]; int next_word [LEV];
  int_q hrp [NH]; int_q hcol [NH]; int_q hval [NH];
  logic [63:0] proto [NC][HVW];
  // graph
  int F [N][NF]; bit adj [N][N];

  task automatic ld(input region_e rg, input int a, input logic [63:0] d);
    @(negedge clk); cfg_we = 1; cfg_region = rg; cfg_addr = a; cfg_data = d;
  endtask

  function automatic logic [63:0] level_hash(input int key, input int d);
    xs_state_t s, n; logic [63:0] h0, h1, v;
    h0 = hash64({{32{key[31]}}, key}, 64'h9E37_79B9_7F4A_7C15);
    h1 = hash64({{32{key[31]}}, key}, 64'hC2B2_AE3D_27D4_EB4F);
    if (d == 0) return h0;
    if (d == 1) return h1;
    s = '{s0: h0, s1: h1};
    for (int i = 2; i <= d; i++) begin n = xs128p_next(s); v = n.s1 + s.s1; s = n; end
    return v;
  endfunction

  // node codes of hop t for the current graph
  function automatic int_q codes_of(input int t);
    longint c [N], nc [N]; int_q r;
    for (int i = 0; i < N; i++) begin c[i] = 0; for (int k = 0; k < NF; k++) c[i] += F[i][k] * U[t][k]; end
    for (int p = 0; p < t; p++) begin
      for (int i = 0; i < N; i++) begin nc[i] = 0; for (int j = 0; j < N; j++) if (adj[i][j]) nc[i] += c[j]; end
      c = nc;
    end
    for (int i = 0; i < N; i++) r.push_back(int'(floor_shift(c[i] + B[t], SHIFT - 16)));
    return r;
  endfunction

  task automatic random_graph();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) adj[i][j] = 0;
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < NF; k++) F[i][k] = $urandom_range(0, 6) - 3;
      for (int e = 0; e < 2; e++) begin
        automatic int j = $urandom_range(0, N - 1);
        if (j != i) begin adj[i][j] = 1; adj[j][i] = 1; end
      end
    end
  endtask

  task automatic load_graph();
    int_q rowptr, cols, sched;
    rowptr.push_back(0);
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) if (adj[i][j]) cols.push_back(j);
      rowptr.push_back(cols.size());
    end
    sched = build_schedule(rowptr, P);
    foreach (sched[e]) ld(RG_A_SCHED, e, (sched[e] < 0) ? 64'd0 : {47'd0, 1'b1, 16'(sched[e])});
    foreach (rowptr[r]) ld(RG_A_ROWPTR, r, 64'(rowptr[r]));
    foreach (cols[k]) ld(RG_A_COLVAL, k, {32'(cols[k]), 32'h0001_0000});
    for (int i = 0; i < N; i++) for (int k = 0; k < NF; k++) ld(RG_FEAT, i * MAXF + k, 64'(F[i][k] <<< 16));
    ld(RG_REG, REG_N_NODES, N);
    ld(RG_REG, REG_A_NITER, sched.size() / P);
    @(negedge clk); cfg_we = 0;
  endtask

  // minimal perfect hash over keys[t] (off-line construction)
  task automatic build_mph(input int t, input int cbb);
    int rem[$]; logic [63:0] words [LEV][LTD]; int nw [LEV]; int rank_acc; int cnt [int]; logic [63:0] hv;
    rem = keys[t];
    for (int d = 0; d < LEV; d++) begin
      int lg = 6; int nxt[$];
      nw[d] = 0; lg2[t][d] = 0; lbase[t][d] = 0;
      if (rem.size() == 0) continue;
      while ((1 << lg) < 2 * rem.size()) lg++;
      lg2[t][d] = 6'(lg); nw[d] = (1 << lg) / 64; lbase[t][d] = next_word[d];
      next_word[d] += nw[d];
      for (int w = 0; w < nw[d]; w++) words[d][w] = 0;
      cnt.delete();
      foreach (rem[i]) begin hv = level_hash(rem[i], d) & ((64'd1 << lg) - 1); cnt[int'(hv)]++; end
      foreach (rem[i]) begin
        hv = level_hash(rem[i], d) & ((64'd1 << lg) - 1);
        if (cnt[int'(hv)] == 1) words[d][hv >> 6][hv[5:0]] = 1'b1; else nxt.push_back(rem[i]);
      end
      rem = nxt;
    end
    if (rem.size() != 0) $fatal(1, "construction left %0d keys", rem.size());
    rank_acc = 0;
    for (int d = 0; d < LEV; d++) for (int w = 0; w < nw[d]; w++) begin
      ld(RG_MPH_LEVEL, d * LTD + lbase[t][d] + w, words[d][w]);
      ld(RG_MPH_RANK, d * LTD + lbase[t][d] + w, 64'(rank_acc));
      rank_acc += $countones(words[d][w]);
    end
    foreach (keys[t][i]) begin
      automatic int key = keys[t][i]; automatic int nbefore = 0;
      for (int d = 0; d < LEV; d++) begin
        if (lg2[t][d] == 0) break;
        hv = level_hash(key, d) & ((64'd1 << lg2[t][d]) - 1);
        if (words[d][hv >> 6][hv[5:0]]) begin
          for (int w = 0; w < (hv >> 6); w++) nbefore += $countones(words[d][w]);
          for (int b = 0; b < hv[5:0]; b++) nbefore += words[d][hv >> 6][b];
          break;
        end
        for (int w = 0; w < nw[d]; w++) nbefore += $countones(words[d][w]);
      end
      ld(RG_MPH_CB, cbb + nbefore, {16'd0, 32'(key), 16'(bin_of[t][key])});
    end
    ld(RG_REG, REG_CB_BASE + t, cbb);
    for (int d = 0; d < LEV; d++) begin
      ld(RG_REG, REG_LVL_LOG2 + t * 8 + d, lg2[t][d]);
      ld(RG_REG, REG_LVL_BASE + t * 8 + d, lbase[t][d]);
    end
  endtask

  task automatic build_model();
    int cbb = 0, sbase = 0, rbase = 0, kbase = 0;
    for (int d = 0; d < LEV; d++) next_word[d] = 0;
    for (int t = 0; t < NH; t++) begin
      B[t] = $urandom_range(0, 4) - 2;
      for (int k = 0; k < NF; k++) begin
        U[t][k] = $urandom_range(0, 4) - 2;
        ld(RG_LSHU_U, t * MAXF + k, 64'(U[t][k] <<< 16));
      end
      ld(RG_REG, REG_LSH_B + t, 64'(B[t] <<< 16));
    end
    // training codes: most codes of a training graph plus some unseen ones
    random_graph();
    for (int t = 0; t < NH; t++) begin
      automatic int_q cs = codes_of(t);
      foreach (cs[i]) if (!bin_of[t].exists(cs[i]) && $urandom_range(0, 3) != 0) begin
        bin_of[t][cs[i]] = keys[t].size(); keys[t].push_back(cs[i]);
      end
      for (int e = 0; e < 5; e++) begin
        automatic int k = $urandom_range(0, 200000) + 100000;
        if (!bin_of[t].exists(k)) begin bin_of[t][k] = keys[t].size(); keys[t].push_back(k); end
      end
      nbins[t] = keys[t].size();
      ld(RG_REG, REG_N_BINS + t, nbins[t]);
      build_mph(t, cbb);
      cbb += nbins[t];
    end
    // landmark histogram matrices H(t): S x nbins(t), CSR + schedule + descriptor
    for (int t = 0; t < NH; t++) begin
      automatic int_q rl, sch;
      hrp[t].push_back(kbase);
      for (int r = 0; r < S; r++) begin
        automatic int k = (r % 6 == 0) ? 14 : $urandom_range(0, 6);
        for (int q = 0; q < k; q++) begin
          automatic int v;
          do v = $urandom_range(0, 6) - 3; while (v == 0);
          hcol[t].push_back($urandom_range(0, nbins[t] - 1)); hval[t].push_back(v);
        end
        hrp[t].push_back(kbase + hcol[t].size());
      end
      foreach (hrp[t][i]) rl.push_back(hrp[t][i] - kbase);
      sch = build_schedule(rl, P);
      foreach (sch[e]) ld(RG_H_SCHED, sbase * P + e, (sch[e] < 0) ? 64'd0 : {47'd0, 1'b1, 16'(sch[e])});
      foreach (hrp[t][r]) ld(RG_H_ROWPTR, rbase + r, 64'(hrp[t][r]));
      foreach (hcol[t][k]) ld(RG_H_COLVAL, kbase + k, {32'(hcol[t][k]), 32'(hval[t][k] <<< 16)});
      ld(RG_KSE_DESC, t, {32'(rbase), 16'(sch.size() / P), 16'(sbase)});
      sbase += sch.size() / P; rbase += S + 1; kbase += hcol[t].size();
    end
    for (int c = 0; c < NC; c++) for (int w = 0; w < HVW; w++) begin
      proto[c][w] = {$urandom(), $urandom()};
      ld(RG_PROTO, c * HVW + w, proto[c][w]);
    end
    ld(RG_REG, REG_N_FEAT, NF);
    ld(RG_REG, REG_N_HOPS, NH);
    ld(RG_REG, REG_LSH_SHIFT, SHIFT);
    ld(RG_REG, REG_N_LAND, S);
    ld(RG_REG, REG_DIM, D);
    ld(RG_REG, REG_N_CLASSES, NC);
    ld(RG_REG, REG_PNYS_BASE, BASEW * 64);
    @(negedge clk); cfg_we = 0;
  endtask

  // reference classification of the current graph
  task automatic reference(output int scores [NC], output int lbl, output int n_absent);
    longint C [S]; bit hvb [D]; int wpr;
    n_absent = 0;
    for (int i = 0; i < S; i++) C[i] = 0;
    for (int t = 0; t < NH; t++) begin
      automatic int_q cs = codes_of(t);
      int h [];
      h = new[nbins[t]];
      foreach (h[b]) h[b] = 0;
      foreach (cs[i]) if (bin_of[t].exists(cs[i])) h[bin_of[t][cs[i]]]++; else n_absent++;
      for (int r = 0; r < S; r++)
        for (int k = hrp[t][r]; k < hrp[t][r+1]; k++)
          C[r] += longint'(hval[t][k - hrp[t][0]]) * h[hcol[t][k - hrp[t][0]]];
    end
    wpr = (S + 15) / 16;
    for (int row = 0; row < D; row++) begin
      longint y = 0;
      for (int k = 0; k < S; k++)
        y += longint'(pnys_elem(BASEW + row * wpr + k / 16, k % 16)) * (C[k] <<< 16);
      hvb[row] = (y >= 0);
    end
    lbl = 0;
    for (int c = 0; c < NC; c++) begin
      scores[c] = 0;
      for (int i = 0; i < D; i++) scores[c] += (proto[c][i / 64][i % 64] == hvb[i]) ? 1 : -1;
      if (scores[c] > scores[lbl]) lbl = c;
    end
  endtask

  initial begin repeat (400000) @(posedge clk); failures++; $display("TIMEOUT"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int a0, h0, cr0, st0, ab0;
    repeat (3) @(negedge clk); rst_n = 1;
    build_model();
    while (busy_init) @(negedge clk);
    a0 = a_stall_cycles; h0 = h_stall_cycles; cr0 = ddr_credit_stalls; st0 = ddr_starve_cycles;
    ab0 = mph_absent + mph_mismatch;
    for (int g = 0; g < 2; g++) begin
      int sc [NC]; int lbl; int nab; int ab_before;
      random_graph();
      load_graph();
      reference(sc, lbl, nab);
      ab_before = mph_absent + mph_mismatch;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      $display("graph %0d: label %0d (exp %0d) score %0d, %0d cycles, %0d absent codes",
               g, label, lbl, best_score, run_cycles, nab);
      checks++; if (label != 3'(lbl)) begin failures++; $display("FAIL label"); end
      for (int c = 0; c < NC; c++) begin
        score_raddr = 3'(c); #1;
        checks++; if (score_rdata != sc[c]) begin failures++; $display("FAIL class %0d score %0d exp %0d", c, score_rdata, sc[c]); end
      end
      checks++; if (mph_absent + mph_mismatch - ab_before != nab) begin
        failures++; $display("FAIL absent codes %0d exp %0d", mph_absent + mph_mismatch - ab_before, nab);
      end
      checks++; if (run_cycles < D * ((S + 15) / 16) || run_cycles > 2 * D * ((S + 15) / 16) + 20000) begin
        failures++; $display("FAIL run length %0d", run_cycles);
      end
    end
    $display("mechanisms: A bank stalls %0d, H bank stalls %0d, absent codes %0d, credit stalls %0d, starve %0d, max outstanding %0d",
             a_stall_cycles - a0, h_stall_cycles - h0, mph_absent + mph_mismatch - ab0,
             ddr_credit_stalls - cr0, ddr_starve_cycles - st0, ddr_max_outst);
    checks++; if (a_stall_cycles == a0) begin failures++; $display("FAIL no LSHU bank conflict"); end
    checks++; if (h_stall_cycles == h0) begin failures++; $display("FAIL no KSE bank conflict"); end
    checks++; if (mph_absent + mph_mismatch == ab0) begin failures++; $display("FAIL no absent code"); end
    checks++; if (ddr_credit_stalls == cr0) begin failures++; $display("FAIL no credit stall"); end
    checks++; if (ddr_starve_cycles == st0) begin failures++; $display("FAIL no MAC starvation"); end
    checks++; if (ddr_max_outst < 2) begin failures++; $display("FAIL never two bursts in flight"); end
    checks++; if (hist_dropped != 0) begin failures++; $display("FAIL histogram index out of range"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
