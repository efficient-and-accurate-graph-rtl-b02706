// tb_mphe: builds minimal perfect hashes for two hops' codebooks here (the
// off-line construction: keys that land alone at level d set a 1 and leave,
// colliding keys go on to level d+1; rank = 1s nbefore each word), loads them,
// streams present and absent codes through the engine back to back, and
// checks every emitted histogram index, the hit/absent counts, that no absent
// code produces output, and the throughput (one lookup per cycle).
module tb_mphe;
  import hx_pkg::*;
  localparam int L = 8, LTD = 64, CBD = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0; logic [1:0] ld_sel = 0; logic [31:0] ld_addr = 0; logic [63:0] ld_data = 0;
  logic [5:0] lvl_log2 [L]; logic [5:0] lvl_base [L]; logic [8:0] cb_base;
  logic in_valid = 0, in_ready; data_t in_code = 0;
  logic out_valid; logic [15:0] out_idx; logic idle; logic [31:0] n_hit, n_absent, n_mismatch;
  mphe #(.LEVELS(L), .LT_DEPTH(LTD), .CB_DEPTH(CBD)) dut (.*);

  int checks = 0, failures = 0;
  // per hop tables
  logic [5:0]  cfg_log2 [2][L]; logic [5:0] cfg_base [2][L]; int cfg_cb [2];
  int keys [2][$]; int hidx [2][int];
  int got[$];
  int next_word [L];

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

  task automatic ld(input int sel, input int a, input logic [63:0] d);
    @(negedge clk); ld_we = 1; ld_sel = 2'(sel); ld_addr = a; ld_data = d;
  endtask

  task automatic build(input int hp, input int nkeys, input int cbb);
    int rem[$]; logic [63:0] words [L][8]; int nw [L]; int rank_acc; int idx;
    int cnt [int]; logic [63:0] hv;
    for (int k = 0; k < nkeys; k++) begin
      automatic int key;
      do key = $urandom_range(0, 100000) - 50000; while (hidx[hp].exists(key));
      keys[hp].push_back(key); hidx[hp][key] = $urandom_range(0, 4095);
    end
    rem = keys[hp];
    for (int d = 0; d < L; d++) begin
      int lg = 6; int nxt[$];
      while ((1 << lg) < 2 * rem.size()) lg++;
      if (rem.size() == 0) begin cfg_log2[hp][d] = 0; cfg_base[hp][d] = 0; nw[d] = 0; continue; end
      cfg_log2[hp][d] = 6'(lg); nw[d] = (1 << lg) / 64; cfg_base[hp][d] = 6'(next_word[d]);
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
    for (int d = 0; d < L; d++) for (int w = 0; w < nw[d]; w++) begin
      ld(0, d*LTD + cfg_base[hp][d] + w, words[d][w]);
      ld(1, d*LTD + cfg_base[hp][d] + w, 64'(rank_acc));
      rank_acc += $countones(words[d][w]);
    end
    checks++; if (rank_acc != nkeys) begin failures++; $display("FAIL mph size"); end
    // codebook store: position of each key's bit in the global order
    foreach (keys[hp][i]) begin
      automatic int key = keys[hp][i]; automatic int nbefore = 0;
      for (int d = 0; d < L; d++) begin
        if (cfg_log2[hp][d] == 0) break;
        hv = level_hash(key, d) & ((64'd1 << cfg_log2[hp][d]) - 1);
        if (words[d][hv >> 6][hv[5:0]]) begin
          for (int w = 0; w < (hv >> 6); w++) nbefore += $countones(words[d][w]);
          for (int b = 0; b < hv[5:0]; b++) nbefore += words[d][hv >> 6][b];
          break;
        end
        for (int w = 0; w < nw[d]; w++) nbefore += $countones(words[d][w]);
      end
      ld(2, cbb + nbefore, {16'd0, 32'(key), 16'(hidx[hp][key])});
    end
    cfg_cb[hp] = cbb;
  endtask

  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (out_valid) got.push_back(out_idx);

  initial begin
    int q[$]; int exp_idx[$]; int nabs; int t0, t1;
    for (int d = 0; d < L; d++) next_word[d] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    build(0, 40, 0);
    build(1, 90, 100);
    @(negedge clk); ld_we = 0;
    for (int hp = 0; hp < 2; hp++) begin
      for (int d = 0; d < L; d++) begin lvl_log2[d] = cfg_log2[hp][d]; lvl_base[d] = cfg_base[hp][d]; end
      cb_base = 9'(cfg_cb[hp]);
      q.delete(); exp_idx.delete(); got.delete(); nabs = 0;
      for (int i = 0; i < 120; i++) begin
        if ($urandom_range(0, 2) != 0) begin
          automatic int k = keys[hp][$urandom_range(0, keys[hp].size()-1)];
          q.push_back(k); exp_idx.push_back(hidx[hp][k]);
        end else begin
          automatic int k;
          do k = $urandom_range(0, 100000) - 50000; while (hidx[hp].exists(k));
          q.push_back(k); nabs++;
        end
      end
      begin
        automatic int h0 = n_hit, a0 = n_absent, m0 = n_mismatch;
        t0 = $time;
        foreach (q[i]) begin @(negedge clk); in_valid = 1; in_code = q[i]; end
        @(negedge clk); in_valid = 0;
        while (!idle) @(negedge clk);
        t1 = $time;
        checks++; if (got.size() != exp_idx.size()) begin failures++; $display("FAIL hop %0d outputs %0d exp %0d", hp, got.size(), exp_idx.size()); end
        foreach (exp_idx[i]) if (i < got.size()) begin
          checks++; if (got[i] != exp_idx[i]) begin failures++; $display("FAIL hop %0d out %0d got %0d exp %0d", hp, i, got[i], exp_idx[i]); end
        end
        checks++; if (n_hit - h0 != exp_idx.size()) begin failures++; $display("FAIL hits"); end
        checks++; if ((n_absent - a0) + (n_mismatch - m0) != nabs) begin failures++; $display("FAIL absent"); end
        $display("hop %0d: %0d lookups in %0d cycles, absent-by-level %0d, absent-by-compare %0d",
                 hp, q.size(), (t1 - t0) / 10, n_absent - a0, n_mismatch - m0);
        checks++; if ((t1 - t0) / 10 > q.size() + L + 6) begin failures++; $display("FAIL throughput"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
