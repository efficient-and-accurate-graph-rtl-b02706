// tb_sync_fifo: random push/pop traffic against a queue reference model.
// Checks every popped word, the occupancy count, that a full FIFO refuses a
// push and an empty one shows no data, and the first-word fall-through
// latency (a word pushed into an empty FIFO is visible one cycle later).
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data; logic [3:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  int q[$];

  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // fall-through latency
    @(negedge clk); in_valid = 1; in_data = 16'hBEEF;
    @(negedge clk); in_valid = 0;
    checks++; if (!out_valid || out_data != 16'hBEEF) begin failures++; $display("FAIL fall-through"); end
    out_ready = 1; @(negedge clk); out_ready = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      bit push, pop;
      in_valid  = ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 70 : 30));
      in_data   = W'($urandom);
      out_ready = ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 30 : 70));
      #1;
      checks++; if (count != q.size()) begin failures++; $display("FAIL count %0d exp %0d", count, q.size()); end
      checks++; if (in_ready != (q.size() < D)) begin failures++; $display("FAIL in_ready"); end
      checks++; if (out_valid != (q.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (out_valid && q.size() > 0) begin
        checks++; if (out_data != W'(q[0])) begin failures++; $display("FAIL data %h exp %h", out_data, q[0]); end
      end
      push = in_valid && in_ready; pop = out_valid && out_ready;
      @(negedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
