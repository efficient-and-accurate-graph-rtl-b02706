// tb_lshu: end-to-end check of the LSH unit on a random undirected graph.
// For hops 0..3 it compares every emitted code with
// floor((A^t F u(t) + b(t)) / w), w = 2, computed here in integer arithmetic,
// applies random back-pressure on the code port, and checks that the SpMV
// propagation ran (hop > 0) and saw bank conflicts.
module tb_lshu;
  import hx_pkg::*;
  import tb_util_pkg::*;
  localparam int P = 4, MAX_N = 64, MAX_F = 8, N = 23, NF = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0; region_e ld_region = RG_FEAT; logic [31:0] ld_addr = 0; logic [63:0] ld_data = 0;
  logic start = 0; logic [3:0] hop = 0; logic [15:0] n_nodes = N; logic [3:0] n_feat = NF;
  logic [4:0] a_niter; data_t lsh_b; logic [5:0] lsh_shift = 6'd17;
  logic busy, done, code_valid, code_ready; data_t code; logic [31:0] a_stall_cycles;
  lshu #(.P(P), .MAX_N(MAX_N), .MAX_F(MAX_F), .MAX_HOP(4), .A_NNZ(512)) dut (.*);

  int checks = 0, failures = 0;
  int F[N][NF]; int U[4][NF]; int B[4]; bit adj[N][N];
  int_q rowptr, sched, cols; longint c[N], nc[N]; int got_q[$];

  task automatic ld(input region_e rg, input int a, input logic [63:0] d);
    @(negedge clk); ld_we = 1; ld_region = rg; ld_addr = a; ld_data = d;
  endtask

  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (code_valid && code_ready) got_q.push_back(code);
  always @(negedge clk) code_ready = ($urandom_range(0, 3) != 0);

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
      if ($urandom_range(0, 5) == 0 || j == i + 1) begin adj[i][j] = 1; adj[j][i] = 1; end
    rowptr.push_back(0);
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) if (adj[i][j]) cols.push_back(j);
      rowptr.push_back(cols.size());
    end
    sched = build_schedule(rowptr, P);
    a_niter = 5'(sched.size() / P);
    for (int e = 0; e < sched.size(); e++) ld(RG_A_SCHED, e, (sched[e] < 0) ? 64'd0 : {47'd0, 1'b1, 16'(sched[e])});
    foreach (rowptr[r]) ld(RG_A_ROWPTR, r, 64'(rowptr[r]));
    foreach (cols[k]) ld(RG_A_COLVAL, k, {32'(cols[k]), 32'h0001_0000});
    for (int r = 0; r < N; r++) for (int k = 0; k < NF; k++) begin
      F[r][k] = $urandom_range(0, 20) - 10; ld(RG_FEAT, r*MAX_F + k, 64'(F[r][k] <<< 16));
    end
    for (int h = 0; h < 4; h++) begin
      B[h] = $urandom_range(0, 6) - 3;
      for (int k = 0; k < NF; k++) begin U[h][k] = $urandom_range(0, 8) - 4; ld(RG_LSHU_U, h*MAX_F + k, 64'(U[h][k] <<< 16)); end
    end
    @(negedge clk); ld_we = 0;
    for (int h = 0; h < 4; h++) begin
      for (int r = 0; r < N; r++) begin c[r] = 0; for (int k = 0; k < NF; k++) c[r] += F[r][k] * U[h][k]; end
      for (int t = 0; t < h; t++) begin
        for (int r = 0; r < N; r++) begin nc[r] = 0; for (int j = 0; j < N; j++) if (adj[r][j]) nc[r] += c[j]; end
        c = nc;
      end
      got_q.delete();
      hop = 4'(h); lsh_b = B[h] <<< 16;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++; if (got_q.size() != N) begin failures++; $display("FAIL count %0d", got_q.size()); end
      for (int r = 0; r < N && r < got_q.size(); r++) begin
        checks++;
        if (longint'(got_q[r]) != floor_shift(c[r] + B[h], 1)) begin
          failures++; $display("FAIL hop %0d node %0d got %0d exp %0d", h, r, got_q[r], floor_shift(c[r] + B[h], 1));
        end
      end
    end
    checks++; if (a_stall_cycles == 0) begin failures++; $display("FAIL no bank conflicts seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
