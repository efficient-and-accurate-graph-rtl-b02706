// kse: Kernel Similarity Engine.
//
// For hop t it computes the landmark similarities v(t) = H(t) h(t), where
// H(t) (s landmarks x |B(t)| bins) is the sparse landmark histogram matrix
// kept on chip in CSR form, and adds them into the kernel similarity vector
// C: C = v(0) on hop 0, C += v(t) afterwards. The product runs on a
// statically load-balanced SpMV unit (4 PEs, banked CSR, bank conflict
// resolver); the rows of H(t) (one per landmark) are distributed by that
// hop's schedule table. The query histogram arrives from the histogram engine
// through hist_* into vector buffer 0; C lives in vector buffer 1 and is read
// by the Nystrom encoder through c_raddr/c_rdata (combinational, engine idle).
//
// The matrices of all hops share the CSR and schedule memories; a small
// descriptor table, one entry per hop, holds where each starts:
//   desc[t] = {rp_base[63:32], n_iter[31:16], sched_base[15:0]}.
// Load port sel: 0 schedule, 1 row pointers, 2 {col,val}, 3 descriptor.
// Timing: start -> done as for spmv_engine, roughly
//   sum over iterations (4 + 2 * max nnz of the iteration) plus stalls.
// The per-hop descriptor table and the accumulate-in-place C buffer are this
// implementation's choices; the SpMV with schedule tables follows the published design.
module kse
  import hx_pkg::*;
#(
  parameter int unsigned P           = 4,
  parameter int unsigned VEC_DEPTH   = 512,    // max(landmarks, bins)
  parameter int unsigned SCHED_DEPTH = 1024,
  parameter int unsigned RP_DEPTH    = 4096,
  parameter int unsigned NNZ_DEPTH   = 16384,
  parameter int unsigned MAX_HOP     = 10,
  localparam int unsigned SA = $clog2(SCHED_DEPTH),
  localparam int unsigned VB = $clog2(VEC_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld_we,
  input  logic [1:0]    ld_sel,
  input  logic [31:0]   ld_addr,
  input  logic [63:0]   ld_data,
  input  logic          hist_we,
  input  logic [VB-1:0] hist_addr,
  input  data_t         hist_data,
  input  logic          start,
  input  logic [3:0]    hop,
  output logic          busy,
  output logic          done,
  input  logic [VB-1:0] c_raddr,
  output data_t         c_rdata,
  output logic [31:0]   stall_cycles,
  output logic [31:0]   iter_count
);

  logic [63:0] desc [MAX_HOP];
  always_ff @(posedge clk) if (ld_we && ld_sel == 2'd3) desc[$clog2(MAX_HOP)'(ld_addr)] <= ld_data;

  logic [63:0] d;
  assign d = desc[$clog2(MAX_HOP)'(hop)];

  logic [P-1:0] nop_we;
  data_t        nop_data [P];
  always_comb begin
    nop_we = '0;
    for (int unsigned j = 0; j < P; j++) nop_data[j] = '0;
  end

  spmv_engine #(.P(P), .VEC_DEPTH(VEC_DEPTH), .SCHED_DEPTH(SCHED_DEPTH), .ROWPTR_DEPTH(RP_DEPTH),
                .NNZ_DEPTH(NNZ_DEPTH)) u_spmv (
    .clk, .rst_n,
    .ld_we    (ld_we && ld_sel != 2'd3), .ld_sel(ld_sel), .ld_addr(ld_addr), .ld_data(ld_data),
    .vec_we   (hist_we), .vec_wbuf(1'b0), .vec_waddr(16'(hist_addr)), .vec_wdata(hist_data),
    .vec_rbuf (1'b1), .vec_raddr(16'(c_raddr)), .vec_rdata(c_rdata),
    .vecp_we  (nop_we), .vecp_addr('0), .vecp_data(nop_data),
    .start    (start), .src_buf(1'b0), .acc_mode(hop != 4'd0),
    .sched_base(SA'(d[15:0])), .n_iter((SA+1)'(d[31:16])), .rp_base(d[63:32]),
    .busy, .done, .stall_cycles, .iter_count
  );

endmodule
