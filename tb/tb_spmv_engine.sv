// tb_spmv_engine: self-checking test of the schedule-driven SpMV unit.
//
// Builds random CSR matrices (rows with 0..MAXK nonzeros, some dense rows to
// provoke bank conflicts), an offline schedule table made by bucketing rows
// by nonzero count (ascending) and filling P rows per iteration, loads them,
// runs the engine in overwrite mode and then in accumulate mode, and compares
// every output entry with a reference product computed here. It also checks
// the number of iterations (ceil(N/P)) and that the resolver stalled at least
// once.
module tb_spmv_engine;
  import hx_pkg::*;
  localparam int P = 4;
  localparam int N = 37;        // rows
  localparam int M = 29;        // columns
  localparam int MAXK = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_we; logic [1:0] ld_sel; logic [31:0] ld_addr; logic [63:0] ld_data;
  logic vec_we, vec_wbuf, vec_rbuf; logic [15:0] vec_waddr, vec_raddr; data_t vec_wdata, vec_rdata;
  logic [P-1:0] vecp_we = '0; logic [3:0] vecp_addr = '0; data_t vecp_data [P];
  logic start, src_buf, acc_mode, busy, done;
  logic [7:0] sched_base; logic [8:0] n_iter; logic [31:0] rp_base, stall_cycles, iter_count;

  spmv_engine #(.P(P), .VEC_DEPTH(64), .SCHED_DEPTH(256), .ROWPTR_DEPTH(256), .NNZ_DEPTH(1024)) dut (.*);

  int checks = 0, failures = 0;
  int rowptr[N+1]; int colv[1024]; int valv[1024]; int xv[M]; longint ref_out[N]; int outv[N];
  int sched[64][P]; int nsched;

  task automatic chk(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic ld(input int sel, input int addr, input logic [63:0] data);
    @(negedge clk); ld_we = 1; ld_sel = 2'(sel); ld_addr = addr; ld_data = data;
    @(negedge clk); ld_we = 0;
  endtask

  task automatic build_sched();
    int order[N]; int k = 0;
    for (int nz = 0; nz <= MAXK*4; nz++)
      for (int r = 0; r < N; r++) if (rowptr[r+1]-rowptr[r] == nz) order[k++] = r;
    nsched = (N + P - 1) / P;
    for (int i = 0; i < nsched; i++)
      for (int j = 0; j < P; j++) sched[i][j] = (i*P+j < N) ? order[i*P+j] : -1;
  endtask

  task automatic run(input bit accm);
    int t0, t1;
    @(negedge clk); start = 1; src_buf = 0; acc_mode = accm; sched_base = 8'd3; n_iter = 9'(nsched); rp_base = 5;
    t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    t1 = $time;
    $display("run acc=%0d cycles=%0d stalls=%0d", accm, (t1-t0)/10, stall_cycles);
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nnz; int it0;
    ld_we = 0; vec_we = 0; start = 0; vec_rbuf = 0; vec_raddr = 0; vec_wbuf = 0; vec_waddr = 0; vec_wdata = 0;
    ld_sel = 0; ld_addr = 0; ld_data = 0; src_buf = 0; acc_mode = 0; sched_base = 0; n_iter = 0; rp_base = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // random CSR, absolute pointers start at 11 to test offsets
    nnz = 11; rowptr[0] = nnz;
    for (int r = 0; r < N; r++) begin
      automatic int k = (r % 7 == 0) ? MAXK*3 : $urandom_range(0, MAXK);
      for (int q = 0; q < k; q++) begin
        colv[nnz] = $urandom_range(0, M-1);
        valv[nnz] = $urandom_range(0, 200) - 100;
        nnz++;
      end
      rowptr[r+1] = nnz;
    end
    for (int c = 0; c < M; c++) xv[c] = $urandom_range(0, 1000) - 500;
    build_sched();
    for (int i = 0; i < nsched; i++)
      for (int j = 0; j < P; j++)
        ld(0, (i+3)*P + j, (sched[i][j] < 0) ? 64'd0 : {47'd0, 1'b1, 16'(sched[i][j])});
    for (int r = 0; r <= N; r++) ld(1, 5 + r, 64'(rowptr[r]));
    for (int k = 11; k < nnz; k++) ld(2, k, {32'(colv[k]), 32'(valv[k] <<< 16)});
    for (int c = 0; c < M; c++) begin
      @(negedge clk); vec_we = 1; vec_wbuf = 0; vec_waddr = 16'(c); vec_wdata = xv[c] <<< 16;
    end
    for (int r = 0; r < N; r++) begin
      @(negedge clk); vec_we = 1; vec_wbuf = 1; vec_waddr = 16'(r); vec_wdata = 32'(12345);
    end
    @(negedge clk); vec_we = 0;
    // reference
    for (int r = 0; r < N; r++) begin
      ref_out[r] = 0;
      for (int k = rowptr[r]; k < rowptr[r+1]; k++) ref_out[r] += longint'(valv[k]) * longint'(xv[colv[k]]);
    end
    it0 = iter_count;
    run(0);
    chk(iter_count - it0 == nsched, "iteration count");
    for (int r = 0; r < N; r++) begin
      vec_rbuf = 1; vec_raddr = 16'(r); #1;
      chk(vec_rdata == 32'(ref_out[r] <<< 16), $sformatf("row %0d got %0d exp %0d", r, vec_rdata >>> 16, ref_out[r]));
    end
    // accumulate mode: out += A x
    run(1);
    for (int r = 0; r < N; r++) begin
      vec_rbuf = 1; vec_raddr = 16'(r); #1;
      chk(vec_rdata == 32'((2*ref_out[r]) <<< 16), $sformatf("acc row %0d", r));
    end
    chk(stall_cycles > 0, "bank conflicts occurred and were resolved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
