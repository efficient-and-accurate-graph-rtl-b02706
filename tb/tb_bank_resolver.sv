// tb_bank_resolver: random requests from 4 PEs to 4 banks for 2000 cycles.
// Every cycle it checks against a reference model of the rotating-priority
// arbiter: no bank granted twice, every bank that is requested is granted to
// exactly the requester nearest the priority pointer, refused requesters are
// flagged by `conflict`. It also checks fairness: a PE that keeps requesting
// a contended bank is granted within NREQ cycles.
module tb_bank_resolver;
  localparam int NREQ = 4, NBANK = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NREQ-1:0] req = '0; logic [NREQ-1:0][1:0] bank = '0; logic [NREQ-1:0] gnt; logic conflict;
  bank_resolver #(.NREQ(NREQ), .NBANK(NBANK)) dut (.*);

  int checks = 0, failures = 0;
  int ptr = 0; int wait_cnt [NREQ];

  initial begin #1ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (wait_cnt[i]) wait_cnt[i] = 0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      logic [NREQ-1:0] eg; logic [NBANK-1:0] taken; bit refused;
      @(negedge clk);
      for (int i = 0; i < NREQ; i++) begin
        req[i]  = ($urandom_range(0, 3) != 0);
        bank[i] = 2'($urandom_range(0, (cyc < 1000) ? 1 : 3));
      end
      #1;
      eg = '0; taken = '0;
      for (int k = 0; k < NREQ; k++) begin
        automatic int r = (k + ptr) % NREQ;
        if (req[r] && !taken[bank[r]]) begin eg[r] = 1; taken[bank[r]] = 1; end
      end
      refused = |(req & ~eg);
      checks++; if (gnt !== eg) begin failures++; $display("FAIL cycle %0d gnt %b exp %b", cyc, gnt, eg); end
      checks++; if (conflict != refused) begin failures++; $display("FAIL conflict flag"); end
      for (int i = 0; i < NREQ; i++) begin
        if (req[i] && !gnt[i]) wait_cnt[i]++; else wait_cnt[i] = 0;
        checks++; if (wait_cnt[i] > NREQ) begin failures++; $display("FAIL PE %0d starved", i); end
      end
      if (refused) ptr = (ptr + 1) % NREQ;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
