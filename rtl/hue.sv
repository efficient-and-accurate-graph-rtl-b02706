// hue: Histogram Update Engine.
//
// Builds the query histogram h(t) of one hop from the stream of verified
// histogram indices. Each of the P PEs owns a private copy of the histogram
// (its own memory bank) and increments it for the index on its lane, so P
// increments can happen in the same cycle without write conflicts; the
// published design uses exactly this private-copy scheme. After the last index
// of the hop, `merge_start` runs the reduction: for bin b = 0 .. n_bins-1 (one
// bin per cycle) the P copies are summed, the sum is written out through the
// out_* port (as a Q16.16 count, ready for the landmark SpMV) and the private
// copies are cleared for the next hop. merge_done pulses after the last bin.
// Timing: one increment per lane per cycle; merge takes n_bins + 1 cycles.
// After reset the copies are zeroed one bin per cycle (MAX_BINS cycles,
// merge_busy high); no index may arrive before that.
// The counter width (16 bits) and the read-modify-write in one cycle
// (distributed-RAM style) are this implementation's choices.
module hue
  import hx_pkg::*;
#(
  parameter int unsigned P        = 4,
  parameter int unsigned MAX_BINS = 512,
  parameter int unsigned CW       = 16,   // count width
  localparam int unsigned BA = $clog2(MAX_BINS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [P-1:0]  in_valid,
  input  logic [15:0]   in_idx [P],
  input  logic          merge_start,
  input  logic [BA:0]   n_bins,
  output logic          merge_busy,
  output logic          merge_done,
  output logic          out_we,
  output logic [BA-1:0] out_addr,
  output data_t         out_data,
  output logic [31:0]   n_updates,
  output logic [31:0]   n_dropped      // indices outside the histogram
);

  logic [CW-1:0] hist [P][MAX_BINS];
  logic [BA:0]   b;
  logic          merging, clearing;

  assign merge_busy = merging || clearing;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      merging <= 1'b0; b <= '0; merge_done <= 1'b0;
      out_we <= 1'b0; out_addr <= '0; out_data <= '0;
      n_updates <= '0; n_dropped <= '0;
      clearing <= 1'b1;
    end else if (clearing) begin
      // after reset: zero the private copies, one bin per cycle
      for (int unsigned j = 0; j < P; j++) hist[j][BA'(b)] <= '0;
      b <= b + 1;
      if (32'(b) + 1 == MAX_BINS) begin clearing <= 1'b0; b <= '0; end
    end else begin
      merge_done <= 1'b0;
      out_we     <= 1'b0;
      // private-copy increments
      for (int unsigned j = 0; j < P; j++) begin
        if (in_valid[j]) begin
          if (32'(in_idx[j]) < MAX_BINS) hist[j][BA'(in_idx[j])] <= hist[j][BA'(in_idx[j])] + 1'b1;
        end
      end
      n_updates <= n_updates + 32'($countones(in_valid));
      begin
        automatic int unsigned nd = 0;
        for (int unsigned j = 0; j < P; j++) if (in_valid[j] && 32'(in_idx[j]) >= MAX_BINS) nd++;
        n_dropped <= n_dropped + nd;
      end
      // reduction
      if (!merging) begin
        if (merge_start) begin
          b <= '0;
          if (n_bins == 0) merge_done <= 1'b1; else merging <= 1'b1;
        end
      end else begin
        automatic logic [CW+3:0] sum = '0;
        for (int unsigned j = 0; j < P; j++) begin
          sum = sum + (CW+4)'(hist[j][BA'(b)]);
          hist[j][BA'(b)] <= '0;
        end
        out_we   <= 1'b1;
        out_addr <= BA'(b);
        out_data <= data_t'(sum) <<< FRAC;
        b <= b + 1;
        if (b + 1 == n_bins) begin merging <= 1'b0; merge_done <= 1'b1; end
      end
    end
  end

  a_no_update_in_merge: assert property (@(posedge clk) disable iff (!rst_n) merging |-> in_valid == '0);

endmodule
