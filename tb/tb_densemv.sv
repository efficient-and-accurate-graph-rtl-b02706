// tb_densemv: checks c = F u(t) of the DenseMV unit against a reference,
// for two hops' u vectors, and checks the cycle count ceil(N/P)*(f+1)+1.
module tb_densemv;
  import hx_pkg::*;
  localparam int P = 4, MAX_N = 32, MAX_F = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_we = 0, ld_sel = 0; logic [31:0] ld_addr = 0; data_t ld_data = 0;
  logic start = 0; logic [15:0] n_rows; logic [3:0] n_feat; logic [3:0] hop;
  logic busy, done; logic [P-1:0] out_we; logic [2:0] out_addr; data_t out_data [P];
  densemv #(.P(P), .MAX_N(MAX_N), .MAX_F(MAX_F), .MAX_HOP(4)) dut (.*);

  int checks = 0, failures = 0;
  int F[MAX_N][MAX_F]; int U[4][MAX_F]; longint got[MAX_N]; int seen;
  localparam int N = 14, NF = 6;

  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) for (int j = 0; j < P; j++) if (out_we[j]) begin got[out_addr*P+j] = out_data[j]; seen++; end

  initial begin
    n_rows = N; n_feat = NF; hop = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < N; r++) for (int k = 0; k < NF; k++) begin
      F[r][k] = $urandom_range(0, 40) - 20;
      @(negedge clk); ld_we = 1; ld_sel = 0; ld_addr = r*MAX_F + k; ld_data = F[r][k] <<< 16;
    end
    for (int h = 0; h < 2; h++) for (int k = 0; k < NF; k++) begin
      U[h][k] = $urandom_range(0, 16) - 8;
      @(negedge clk); ld_we = 1; ld_sel = 1; ld_addr = h*MAX_F + k; ld_data = U[h][k] <<< 15; // u = U/2
    end
    @(negedge clk); ld_we = 0;
    for (int h = 0; h < 2; h++) begin
      int cyc; cyc = 0;
      seen = 0; hop = 4'(h);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc + 1 != ((N+P-1)/P)*(NF+1) + 1) begin failures++; $display("FAIL cycles %0d", cyc+1); end
      @(negedge clk);
      checks++; if (seen != N) begin failures++; $display("FAIL seen %0d", seen); end
      for (int r = 0; r < N; r++) begin
        longint e; e = 0;
        for (int k = 0; k < NF; k++) e += longint'(F[r][k]) * U[h][k];   // value*2 in Q16.16 units of 1/2
        checks++;
        if (got[r] != (e <<< 15)) begin failures++; $display("FAIL hop %0d row %0d got %0d exp %0d", h, r, got[r], e<<<15); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
