// lshu: Locality Sensitive Hashing Unit. Produces the node codes of one hop,
//   c(t) = floor((A^t F u(t) + b(t)) / w).
//
// The computation is restructured as a chain of matrix-vector products, as
// published: the DenseMV unit first forms F u(t) (N values instead of an N x f
// feature matrix), then the SpMV unit applies the adjacency matrix A t times,
// ping-ponging between its two vector buffers. A is stored in CSR form with a
// precomputed schedule table (static load balancing). Finally the code
// emitter (post-processing) reads the vector, adds b(t), divides by w and
// floors, and streams one code per cycle out through a valid/ready port to
// the code buffer / lookup queue of the hashing engine.
//
// The bucket width w is restricted here to a power of two: w = 2^(lsh_shift-16)
// in Q16.16, so division and floor become one arithmetic right shift by
// lsh_shift. This is this implementation's choice (the published algorithm
// allows any w > 0).
//
// Interface: ld_* loads F, u(t) and the adjacency CSR/schedule (region codes of
// hx_pkg::region_e); start with hop, n_nodes, a_niter (schedule iterations of
// A), lsh_b (b(t), Q16.16) and lsh_shift; done pulses after the last code has
// been accepted. Timing per hop: DenseMV ceil(N/4)*(f+1), then t SpMV passes,
// then N cycles of emission (without back-pressure).
module lshu
  import hx_pkg::*;
#(
  parameter int unsigned P         = 4,
  parameter int unsigned MAX_N     = 1024,
  parameter int unsigned MAX_F     = 128,
  parameter int unsigned MAX_HOP   = 10,
  parameter int unsigned A_NNZ     = 8192,
  localparam int unsigned GA = $clog2(MAX_N / P),
  localparam int unsigned FA = $clog2(MAX_F),
  localparam int unsigned SA = $clog2(MAX_N / P)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ld_we,
  input  region_e       ld_region,
  input  logic [31:0]   ld_addr,
  input  logic [63:0]   ld_data,
  input  logic          start,
  input  logic [3:0]    hop,
  input  logic [15:0]   n_nodes,
  input  logic [FA:0]   n_feat,
  input  logic [SA:0]   a_niter,
  input  data_t         lsh_b,
  input  logic [5:0]    lsh_shift,
  output logic          busy,
  output logic          done,
  output logic          code_valid,
  input  logic          code_ready,
  output data_t         code,
  output logic [31:0]   a_stall_cycles
);

  // ---------------- DenseMV ----------------
  logic          dm_start, dm_busy, dm_done;
  logic [P-1:0]  dm_we;
  logic [GA-1:0] dm_addr;
  data_t         dm_data [P];

  densemv #(.P(P), .MAX_N(MAX_N), .MAX_F(MAX_F), .MAX_HOP(MAX_HOP)) u_dense (
    .clk, .rst_n,
    .ld_we   (ld_we && (ld_region == RG_FEAT || ld_region == RG_LSHU_U)),
    .ld_sel  (ld_region == RG_LSHU_U),
    .ld_addr (ld_addr),
    .ld_data (ld_data[31:0]),
    .start   (dm_start), .n_rows(n_nodes), .n_feat(n_feat), .hop(hop),
    .busy    (dm_busy), .done(dm_done),
    .out_we  (dm_we), .out_addr(dm_addr), .out_data(dm_data)
  );

  // ---------------- SpMV over A ----------------
  logic        sp_start, sp_busy, sp_done, cur;
  logic [15:0] rd_addr;
  data_t       rd_data;
  logic [31:0] sp_iters;
  logic [1:0]  sp_sel;
  always_comb begin
    unique case (ld_region)
      RG_A_SCHED:  sp_sel = 2'd0;
      RG_A_ROWPTR: sp_sel = 2'd1;
      default:     sp_sel = 2'd2;
    endcase
  end

  spmv_engine #(.P(P), .VEC_DEPTH(MAX_N), .SCHED_DEPTH(MAX_N / P), .ROWPTR_DEPTH(2 * MAX_N),
                .NNZ_DEPTH(A_NNZ)) u_spmv (
    .clk, .rst_n,
    .ld_we   (ld_we && (ld_region == RG_A_SCHED || ld_region == RG_A_ROWPTR || ld_region == RG_A_COLVAL)),
    .ld_sel  (sp_sel), .ld_addr(ld_addr), .ld_data(ld_data),
    .vec_we  (1'b0), .vec_wbuf(1'b0), .vec_waddr('0), .vec_wdata('0),
    .vec_rbuf(cur), .vec_raddr(rd_addr), .vec_rdata(rd_data),
    .vecp_we (dm_we), .vecp_addr(dm_addr), .vecp_data(dm_data),
    .start   (sp_start), .src_buf(cur), .acc_mode(1'b0),
    .sched_base('0), .n_iter(a_niter), .rp_base(32'd0),
    .busy    (sp_busy), .done(sp_done), .stall_cycles(a_stall_cycles), .iter_count(sp_iters)
  );

  // ---------------- controller and code emitter ----------------
  typedef enum logic [2:0] {L_IDLE, L_DENSE, L_PROP, L_EMIT} lst_e;
  lst_e        st;
  logic [3:0]  props;     // propagation passes still to run
  logic [15:0] v;
  data_t       r_b;
  logic [5:0]  r_shift;

  assign busy       = (st != L_IDLE);
  assign rd_addr    = v;
  assign code_valid = (st == L_EMIT);
  // post-processing: floor((x + b) / w) with w a power of two
  assign code       = data_t'((acc_t'(rd_data) + acc_t'(r_b)) >>> r_shift);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= L_IDLE; props <= '0; v <= '0; cur <= 1'b0; r_b <= '0; r_shift <= '0;
      dm_start <= 1'b0; sp_start <= 1'b0; done <= 1'b0;
    end else begin
      dm_start <= 1'b0; sp_start <= 1'b0; done <= 1'b0;
      unique case (st)
        L_IDLE: if (start) begin
          r_b <= lsh_b; r_shift <= lsh_shift; props <= hop; cur <= 1'b0;
          dm_start <= 1'b1; st <= L_DENSE;
        end
        L_DENSE: if (dm_done) begin
          if (props == 0) begin v <= '0; st <= (n_nodes == 0) ? L_IDLE : L_EMIT; done <= (n_nodes == 0); end
          else begin sp_start <= 1'b1; st <= L_PROP; end
        end
        L_PROP: if (sp_done) begin
          cur   <= ~cur;
          props <= props - 1;
          if (props == 1) begin v <= '0; st <= L_EMIT; end
          else sp_start <= 1'b1;
        end
        L_EMIT: if (code_ready) begin
          v <= v + 1;
          if (v + 1 == n_nodes) begin st <= L_IDLE; done <= 1'b1; end
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  // DenseMV writes land in buffer 0 (vec_wbuf tied low), so the chain starts there.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
