// tb_kse: three hops of landmark similarity. Each hop has its own random
// sparse landmark histogram matrix (different bin counts) and schedule table
// in the shared memories; the query histogram is written, the engine run, and
// the kernel vector C is compared after every hop with the running sum
// sum_t H(t) h(t) computed here. Checks iteration counts and that C restarts
// on hop 0 of a second query.
module tb_kse;
  import hx_pkg::*;
  import tb_util_pkg::*;
  localparam int P = 4, S = 21, NH = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0; logic [1:0] ld_sel = 0; logic [31:0] ld_addr = 0; logic [63:0] ld_data = 0;
  logic hist_we = 0; logic [6:0] hist_addr = 0; data_t hist_data = 0;
  logic start = 0; logic [3:0] hop = 0; logic busy, done; logic [6:0] c_raddr = 0; data_t c_rdata;
  logic [31:0] stall_cycles, iter_count;
  kse #(.P(P), .VEC_DEPTH(128), .SCHED_DEPTH(64), .RP_DEPTH(256), .NNZ_DEPTH(2048), .MAX_HOP(4)) dut (.*);

  int checks = 0, failures = 0;
  int nb [NH] = '{40, 33, 57};
  int_q rp [NH]; int_q cols [NH]; int_q vals [NH]; int_q sch [NH];
  longint C [S];

  task automatic ld(input int sel, input int a, input logic [63:0] d);
    @(negedge clk); ld_we = 1; ld_sel = 2'(sel); ld_addr = a; ld_data = d;
  endtask

  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int sbase = 0, rbase = 0, kbase = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < NH; t++) begin
      rp[t].push_back(kbase);
      for (int r = 0; r < S; r++) begin
        automatic int k = (r % 5 == 0) ? 15 : $urandom_range(0, 6);
        for (int q = 0; q < k; q++) begin cols[t].push_back($urandom_range(0, nb[t]-1)); vals[t].push_back($urandom_range(1, 9)); end
        rp[t].push_back(kbase + cols[t].size());
      end
      begin
        automatic int_q rl;
        foreach (rp[t][i]) rl.push_back(rp[t][i] - kbase);
        sch[t] = build_schedule(rl, P);
      end
      foreach (sch[t][e]) ld(0, sbase*P + e, (sch[t][e] < 0) ? 64'd0 : {47'd0, 1'b1, 16'(sch[t][e])});
      foreach (rp[t][r]) ld(1, rbase + r, 64'(rp[t][r]));
      foreach (cols[t][k]) ld(2, kbase + k, {32'(cols[t][k]), 32'(vals[t][k] <<< 16)});
      ld(3, t, {32'(rbase), 16'(sch[t].size() / P), 16'(sbase)});
      sbase += sch[t].size() / P; rbase += S + 1; kbase += cols[t].size();
    end
    @(negedge clk); ld_we = 0;
    for (int g = 0; g < 2; g++) begin
      for (int r = 0; r < S; r++) C[r] = 0;
      for (int t = 0; t < NH; t++) begin
        int h [64]; int it0;
        for (int b = 0; b < nb[t]; b++) begin
          h[b] = $urandom_range(0, 5);
          @(negedge clk); hist_we = 1; hist_addr = 7'(b); hist_data = h[b] <<< 16;
        end
        @(negedge clk); hist_we = 0;
        for (int r = 0; r < S; r++)
          for (int k = rp[t][r]; k < rp[t][r+1]; k++) C[r] += longint'(vals[t][k - rp[t][0]]) * h[cols[t][k - rp[t][0]]];
        it0 = iter_count; hop = 4'(t);
        @(negedge clk); start = 1; @(negedge clk); start = 0;
        while (!done) @(negedge clk);
        checks++; if (iter_count - it0 != sch[t].size() / P) begin failures++; $display("FAIL iterations"); end
        for (int r = 0; r < S; r++) begin
          c_raddr = 7'(r); #1;
          checks++; if (c_rdata != 32'(C[r] <<< 16)) begin failures++; $display("FAIL g%0d hop %0d row %0d got %0d exp %0d", g, t, r, c_rdata >>> 16, C[r]); end
        end
      end
    end
    checks++; if (stall_cycles == 0) begin failures++; $display("FAIL no conflicts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
