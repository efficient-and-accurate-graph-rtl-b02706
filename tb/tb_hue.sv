// tb_hue: drives random histogram indices on all four lanes at once (with
// repeated indices across lanes in the same cycle), merges, and compares every
// bin with a reference count; a second round checks that merging cleared the
// private copies. Also checks the merge time (n_bins + 1 cycles).
module tb_hue;
  import hx_pkg::*;
  localparam int P = 4, MB = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [P-1:0] in_valid = '0; logic [15:0] in_idx [P];
  logic merge_start = 0; logic [6:0] n_bins; logic merge_busy, merge_done, out_we;
  logic [5:0] out_addr; data_t out_data; logic [31:0] n_updates, n_dropped;
  hue #(.P(P), .MAX_BINS(MB)) dut (.*);
  int checks = 0, failures = 0; int refc[MB]; int got[MB]; int ngot;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (out_we) begin got[out_addr] = out_data >>> 16; ngot++; end
  initial begin
    for (int j = 0; j < P; j++) in_idx[j] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); while (merge_busy) @(negedge clk);
    for (int round = 0; round < 2; round++) begin
      int cyc; int nb;
      nb = (round == 0) ? 50 : 37;
      for (int b = 0; b < MB; b++) refc[b] = 0;
      for (int c = 0; c < 200; c++) begin
        @(negedge clk);
        for (int j = 0; j < P; j++) begin
          in_valid[j] = ($urandom_range(0, 4) != 0);
          in_idx[j]   = (c % 5 == 0) ? 16'(c % nb) : 16'($urandom_range(0, nb - 1));
          if (c == 77 && j == 2) in_idx[j] = 16'd900;   // outside the histogram: dropped
          if (in_valid[j] && in_idx[j] < MB) refc[in_idx[j]]++;
        end
      end
      @(negedge clk); in_valid = '0;
      ngot = 0; n_bins = 7'(nb);
      @(negedge clk); merge_start = 1; @(negedge clk); merge_start = 0; cyc = 1;
      while (!merge_done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      checks++; if (cyc != nb + 1) begin failures++; $display("FAIL merge cycles %0d", cyc); end
      checks++; if (ngot != nb) begin failures++; $display("FAIL bins written %0d", ngot); end
      for (int b = 0; b < nb; b++) begin
        checks++; if (got[b] != refc[b]) begin failures++; $display("FAIL round %0d bin %0d got %0d exp %0d", round, b, got[b], refc[b]); end
      end
    end
    checks++; if (n_dropped != 2) begin failures++; $display("FAIL dropped %0d", n_dropped); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
