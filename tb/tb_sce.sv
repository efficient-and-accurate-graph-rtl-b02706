// tb_sce: six random bipolar class prototypes of d = 1000 (not a multiple of
// 64, so masking matters), one of them a noisy copy of the query. Checks every
// score against a bit-by-bit reference dot product, the chosen label (three
// runs: two winners, then a tie that the lower class index must win), and the run time CPP*ceil(d/64) + n_classes + 1.
module tb_sce;
  localparam int D = 1000, NW = (D + 63) / 64, NC = 6, DM = 1024, HW = (DM + 63) / 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0; logic [31:0] ld_addr = 0; logic [63:0] ld_data = 0;
  logic start = 0; logic [15:0] n_dim = D; logic [3:0] n_classes = NC;
  logic busy, done; logic [3:0] hv_raddr; logic [63:0] hv_rdata;
  logic [2:0] label; logic signed [31:0] best_score; logic [2:0] score_raddr = 0; logic signed [31:0] score_rdata;
  sce #(.NPE(4), .MAX_C(8), .D_MAX(DM)) dut (.*);

  int checks = 0, failures = 0;
  logic [63:0] hv [HW]; logic [63:0] g [NC][HW];
  assign hv_rdata = hv[hv_raddr];

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run_and_check(input int winner);
    int cyc; int sc [NC]; int best;
    best = 0;
    for (int c = 0; c < NC; c++) begin
      sc[c] = 0;
      for (int i = 0; i < D; i++) sc[c] += (g[c][i/64][i%64] == hv[i/64][i%64]) ? 1 : -1;
      if (sc[c] > sc[best]) best = c;
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int c = 0; c < NC; c++) begin
      score_raddr = 3'(c); #1;
      checks++; if (score_rdata != sc[c]) begin failures++; $display("FAIL score %0d got %0d exp %0d", c, score_rdata, sc[c]); end
    end
    checks++; if (label != 3'(best) || best != winner) begin failures++; $display("FAIL label %0d exp %0d (%0d)", label, best, winner); end
    checks++; if (best_score != sc[best]) begin failures++; $display("FAIL best score"); end
    checks++; if (cyc != 2 * NW + NC + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
  endtask

  initial begin
    for (int w = 0; w < HW; w++) hv[w] = {$urandom, $urandom};
    for (int c = 0; c < NC; c++) for (int w = 0; w < HW; w++) g[c][w] = {$urandom, $urandom};
    for (int w = 0; w < HW; w++) g[4][w] = hv[w] ^ (64'd1 << (w % 64));
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < NC; c++) for (int w = 0; w < HW; w++) begin
      @(negedge clk); ld_we = 1; ld_addr = c * HW + w; ld_data = g[c][w];
    end
    @(negedge clk); ld_we = 0;
    run_and_check(4);
    for (int w = 0; w < HW; w++) hv[w] = g[1][w] ^ (64'h3 << (w % 60));
    run_and_check(1);
    // tie: class 5 becomes a copy of class 1, the lower index must win
    for (int w = 0; w < HW; w++) begin
      g[5][w] = g[1][w];
      @(negedge clk); ld_we = 1; ld_addr = 5 * HW + w; ld_data = g[5][w];
    end
    @(negedge clk); ld_we = 0;
    run_and_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
