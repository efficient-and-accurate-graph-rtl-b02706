// tb_nee: streams a 300 x 37 projection matrix from the DDR model through the
// encoder (FIFO shrunk to 32 entries so that the credit check has to hold
// bursts back) and compares every hypervector bit with sign(Pnys C) computed
// here from the same matrix content. Also checks that several bursts were in
// flight at once and that the run took at least d*ceil(s/16) cycles (one
// word per cycle) but not much more.
module tb_nee;
  import hx_pkg::*;
  import tb_util_pkg::*;
  localparam int D = 300, S = 37, WPR = (S + 15) / 16;
  localparam longint BASEW = 1000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prefetch = 0;
  logic start = 0; logic [15:0] n_rows = D; logic [6:0] n_land = S; logic [31:0] base_addr = 32'(BASEW * 64);
  logic busy, done; logic [5:0] c_raddr; data_t c_rdata;
  logic ar_valid, ar_ready; logic [31:0] ar_addr; logic [7:0] ar_len;
  logic r_valid, r_ready, r_last; logic [511:0] r_data;
  logic [2:0] hv_raddr = 0; logic [63:0] hv_rdata;
  logic [31:0] credit_stalls, starve_cycles; logic [3:0] max_outst_seen;
  nee #(.FIFO_DEPTH(32), .C_DEPTH(64), .D_MAX(320)) dut (.*);
  ddr_model #(.LATENCY(20)) u_ddr (.*);

  int checks = 0, failures = 0; int C [64];
  assign c_rdata = C[c_raddr];

  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int cyc;
    for (int k = 0; k < 64; k++) C[k] = $urandom_range(0, 1 << 20) - (1 << 19);
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("cycles=%0d words=%0d credit_stalls=%0d starve=%0d max_outstanding=%0d",
             cyc, D*WPR, credit_stalls, starve_cycles, max_outst_seen);
    for (int i = 0; i < D; i++) begin
      longint y; bit e;
      y = 0;
      for (int k = 0; k < S; k++) y += longint'(pnys_elem(BASEW + i*WPR + k/16, k%16)) * C[k];
      e = (y >= 0);
      hv_raddr = 3'(i / 64); #1;
      checks++; if (hv_rdata[i%64] != e) begin failures++; $display("FAIL bit %0d got %0d exp %0d", i, hv_rdata[i%64], e); end
    end
    checks++; if (cyc < D*WPR + S) begin failures++; $display("FAIL too fast"); end
    checks++; if (cyc > 2*D*WPR + S + 100) begin failures++; $display("FAIL too slow"); end
    checks++; if (credit_stalls == 0) begin failures++; $display("FAIL credit check never held a burst"); end
    checks++; if (max_outst_seen < 2) begin failures++; $display("FAIL no overlapping bursts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
