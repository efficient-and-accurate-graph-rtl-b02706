// spmv_engine: statically load-balanced sparse matrix-vector unit.
//
// Computes out[r] = (acc_mode ? out[r] : 0) + sum_k val[k] * x[col[k]] for the
// rows of one CSR matrix, using P processing elements (PEs). Work is assigned
// by a precomputed schedule table: iteration i gives PE j the row stored in
// entry (sched_base + i) of schedule bank j (a valid bit marks padding
// entries). The controller issues iterations one after another; an iteration
// ends when every PE has written its row, so rows of similar nonzero count in
// one iteration keep all PEs busy (the off-line table builder groups rows by
// nonzero count). This is the published static load balancing scheme.
//
// Memories, all banked P ways with bank = index mod P:
//   sched  : P banks, one per PE, entry {valid, row}        (conflict free)
//   rowptr : CSR row pointers, absolute nonzero positions
//   colval : CSR {col, val} pairs, bank = nonzero position mod P
//   vec    : two vector buffers; x is vec[src_buf], out is vec[~src_buf]
// Every bank has one access port. Four bank_resolver instances (row pointers,
// col/val, x and out) grant one PE per bank per cycle; refused PEs stall and
// retry, and `stall_cycles` counts cycles in which any PE was refused.
// Banks are read in the cycle of the grant (distributed-RAM style).
//
// PE sequence per row: read rowptr[r], rowptr[r+1]; in acc_mode read out[r];
// then per nonzero one cycle for {col,val} and one for x[col] with a
// multiply-accumulate (Q16.16); finally write out[r]. A PE with an empty row
// goes straight to the write. Timing: start -> done takes, per iteration,
// about 4 + 2*max_nnz_in_iteration cycles plus stalls.
//
// Host side: `ld_*` writes the schedule, row pointer and col/val memories;
// `vec_*` writes or reads either vector buffer while the engine is idle;
// `vecp_*` writes P entries at once (one per bank) into buffer vec_wbuf.
// The published design gives the schedule table, CSR banks, resolver, PEs
// with private accumulators and banked outputs; the single-ported banks,
// the round-robin resolver and the two-cycle-per-nonzero PE are this
// implementation's choices.
module spmv_engine
  import hx_pkg::*;
#(
  parameter int unsigned P            = 4,     // PEs and banks (power of two)
  parameter int unsigned VEC_DEPTH    = 1024,  // entries per vector buffer
  parameter int unsigned SCHED_DEPTH  = 256,   // iterations per schedule bank
  parameter int unsigned ROWPTR_DEPTH = 2048,  // row pointer entries
  parameter int unsigned NNZ_DEPTH    = 8192,  // nonzeros
  parameter int unsigned IW           = 16,    // row/column index width
  localparam int unsigned PB  = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned VA  = $clog2(VEC_DEPTH / P),
  localparam int unsigned SA  = $clog2(SCHED_DEPTH),
  localparam int unsigned RA  = $clog2(ROWPTR_DEPTH / P),
  localparam int unsigned NA  = $clog2(NNZ_DEPTH / P)
) (
  input  logic         clk,
  input  logic         rst_n,
  // memory load port: sel 0 = schedule (addr = iter*P + pe, data = {valid, row}),
  // 1 = row pointer, 2 = {col[63:32], val[31:0]}
  input  logic         ld_we,
  input  logic [1:0]   ld_sel,
  input  logic [31:0]  ld_addr,
  input  logic [63:0]  ld_data,
  // vector buffer port (engine idle)
  input  logic         vec_we,
  input  logic         vec_wbuf,
  input  logic [IW-1:0] vec_waddr,
  input  data_t        vec_wdata,
  input  logic         vec_rbuf,
  input  logic [IW-1:0] vec_raddr,
  output data_t        vec_rdata,
  // parallel vector write, one entry per bank (entry index = vecp_addr*P + bank)
  input  logic [P-1:0] vecp_we,
  input  logic [VA-1:0] vecp_addr,
  input  data_t        vecp_data [P],
  // run control
  input  logic         start,
  input  logic         src_buf,
  input  logic         acc_mode,
  input  logic [SA-1:0] sched_base,
  input  logic [SA:0]  n_iter,
  input  logic [31:0]  rp_base,
  output logic         busy,
  output logic         done,
  output logic [31:0]  stall_cycles,
  output logic [31:0]  iter_count
);

  // ---------------- storage ----------------
  logic [IW:0]    sched_mem  [P][SCHED_DEPTH];
  logic [31:0]    rowptr_mem [P][ROWPTR_DEPTH/P];
  logic [63:0]    colval_mem [P][NNZ_DEPTH/P];
  data_t          vec_mem    [2][P][VEC_DEPTH/P];

  // ---------------- PE state ----------------
  typedef enum logic [2:0] {PE_IDLE, PE_RP0, PE_RP1, PE_INIT, PE_CV, PE_X, PE_WR, PE_DONE} pe_st_e;
  pe_st_e          st    [P];
  logic [IW-1:0]   row   [P];
  logic [31:0]     kptr  [P];
  logic [31:0]     kend  [P];
  logic [IW-1:0]   colr  [P];
  data_t           valr  [P];
  data_t           acc   [P];

  typedef enum logic [1:0] {C_IDLE, C_LAUNCH, C_WAIT} ctl_e;
  ctl_e          cst;
  logic [SA:0]   iter;
  logic          r_src, r_acc;
  logic [SA-1:0] r_sbase;
  logic [SA:0]   r_niter;
  logic [31:0]   r_rpbase;

  // ---------------- requests ----------------
  logic [P-1:0]         rp_req, cv_req, x_req, o_req;
  logic [P-1:0][PB-1:0] rp_bank, cv_bank, x_bank, o_bank;
  logic [P-1:0]         rp_gnt, cv_gnt, x_gnt, o_gnt;
  logic                 rp_cf, cv_cf, x_cf, o_cf;
  logic [31:0]          rp_addr [P];

  always_comb begin
    for (int unsigned j = 0; j < P; j++) begin
      rp_addr[j] = r_rpbase + 32'(row[j]) + ((st[j] == PE_RP1) ? 32'd1 : 32'd0);
      rp_req[j]  = (st[j] == PE_RP0) || (st[j] == PE_RP1);
      rp_bank[j] = rp_addr[j][PB-1:0];
      cv_req[j]  = (st[j] == PE_CV);
      cv_bank[j] = kptr[j][PB-1:0];
      x_req[j]   = (st[j] == PE_X);
      x_bank[j]  = colr[j][PB-1:0];
      o_req[j]   = (st[j] == PE_INIT) || (st[j] == PE_WR);
      o_bank[j]  = row[j][PB-1:0];
    end
  end

  bank_resolver #(.NREQ(P), .NBANK(P)) u_rp_res (.clk, .rst_n, .req(rp_req), .bank(rp_bank), .gnt(rp_gnt), .conflict(rp_cf));
  bank_resolver #(.NREQ(P), .NBANK(P)) u_cv_res (.clk, .rst_n, .req(cv_req), .bank(cv_bank), .gnt(cv_gnt), .conflict(cv_cf));
  bank_resolver #(.NREQ(P), .NBANK(P)) u_x_res  (.clk, .rst_n, .req(x_req),  .bank(x_bank),  .gnt(x_gnt),  .conflict(x_cf));
  bank_resolver #(.NREQ(P), .NBANK(P)) u_o_res  (.clk, .rst_n, .req(o_req),  .bank(o_bank),  .gnt(o_gnt),  .conflict(o_cf));

  // ---------------- per-bank single port: address mux by grant ----------------
  logic [RA-1:0] rp_baddr [P];
  logic [NA-1:0] cv_baddr [P];
  logic [VA-1:0] x_baddr  [P];
  logic [VA-1:0] o_baddr  [P];
  logic [31:0]   rp_bdata [P];
  logic [63:0]   cv_bdata [P];
  data_t         x_bdata  [P];
  data_t         o_bdata  [P];

  always_comb begin
    for (int unsigned b = 0; b < P; b++) begin
      rp_baddr[b] = '0; cv_baddr[b] = '0; x_baddr[b] = '0; o_baddr[b] = '0;
      for (int unsigned j = 0; j < P; j++) begin
        if (rp_gnt[j] && rp_bank[j] == PB'(b)) rp_baddr[b] = RA'(rp_addr[j] >> PB);
        if (cv_gnt[j] && cv_bank[j] == PB'(b)) cv_baddr[b] = NA'(kptr[j] >> PB);
        if (x_gnt[j]  && x_bank[j]  == PB'(b)) x_baddr[b]  = VA'(colr[j] >> PB);
        if (o_gnt[j]  && o_bank[j]  == PB'(b)) o_baddr[b]  = VA'(row[j] >> PB);
      end
      rp_bdata[b] = rowptr_mem[b][rp_baddr[b]];
      cv_bdata[b] = colval_mem[b][cv_baddr[b]];
      x_bdata[b]  = vec_mem[r_src][b][x_baddr[b]];
      o_bdata[b]  = vec_mem[!r_src][b][o_baddr[b]];
    end
  end

  assign vec_rdata = vec_mem[vec_rbuf][vec_raddr[PB-1:0]][VA'(vec_raddr >> PB)];

  // ---------------- memory writes ----------------
  always_ff @(posedge clk) begin
    if (ld_we) begin
      unique case (ld_sel)
        2'd0: sched_mem[ld_addr[PB-1:0]][SA'(ld_addr >> PB)] <= ld_data[IW:0];
        2'd1: rowptr_mem[ld_addr[PB-1:0]][RA'(ld_addr >> PB)] <= ld_data[31:0];
        2'd2: colval_mem[ld_addr[PB-1:0]][NA'(ld_addr >> PB)] <= ld_data;
        default: ;
      endcase
    end
    if (vec_we && !busy)
      vec_mem[vec_wbuf][vec_waddr[PB-1:0]][VA'(vec_waddr >> PB)] <= vec_wdata;
    for (int unsigned b = 0; b < P; b++)
      if (vecp_we[b] && !busy) vec_mem[vec_wbuf][b][vecp_addr] <= vecp_data[b];
    for (int unsigned j = 0; j < P; j++)
      if (st[j] == PE_WR && o_gnt[j])
        vec_mem[!r_src][row[j][PB-1:0]][VA'(row[j] >> PB)] <= acc[j];
  end

  // ---------------- controller and PEs ----------------
  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int unsigned j = 0; j < P; j++) if (st[j] != PE_DONE) all_done = 1'b0;
  end

  assign busy = (cst != C_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cst          <= C_IDLE;
      iter         <= '0;
      done         <= 1'b0;
      stall_cycles <= '0;
      iter_count   <= '0;
      r_src        <= 1'b0;
      r_acc        <= 1'b0;
      r_sbase      <= '0;
      r_niter      <= '0;
      r_rpbase     <= '0;
      for (int unsigned j = 0; j < P; j++) begin
        st[j] <= PE_IDLE; row[j] <= '0; kptr[j] <= '0; kend[j] <= '0;
        colr[j] <= '0; valr[j] <= '0; acc[j] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (rp_cf || cv_cf || x_cf || o_cf) stall_cycles <= stall_cycles + 1;
      unique case (cst)
        C_IDLE: if (start) begin
          r_src    <= src_buf;
          r_acc    <= acc_mode;
          r_sbase  <= sched_base;
          r_niter  <= n_iter;
          r_rpbase <= rp_base;
          iter     <= '0;
          cst      <= (n_iter == '0) ? C_IDLE : C_LAUNCH;
          done     <= (n_iter == '0);
        end
        C_LAUNCH: begin
          for (int unsigned j = 0; j < P; j++) begin
            logic [IW:0] e;
            e       = sched_mem[j][SA'(r_sbase + SA'(iter))];
            row[j]  <= e[IW-1:0];
            st[j]   <= e[IW] ? PE_RP0 : PE_DONE;
          end
          iter_count <= iter_count + 1;
          cst <= C_WAIT;
        end
        C_WAIT: if (all_done) begin
          if (iter + 1 == r_niter) begin
            cst  <= C_IDLE;
            done <= 1'b1;
          end else begin
            iter <= iter + 1;
            cst  <= C_LAUNCH;
          end
          for (int unsigned j = 0; j < P; j++) st[j] <= PE_IDLE;
        end
        default: cst <= C_IDLE;
      endcase

      // PE datapaths
      for (int unsigned j = 0; j < P; j++) begin
        unique case (st[j])
          PE_RP0: if (rp_gnt[j]) begin
            kptr[j] <= rp_bdata[rp_bank[j]];
            st[j]   <= PE_RP1;
          end
          PE_RP1: if (rp_gnt[j]) begin
            kend[j] <= rp_bdata[rp_bank[j]];
            acc[j]  <= '0;
            if (r_acc)                              st[j] <= PE_INIT;
            else if (rp_bdata[rp_bank[j]] == kptr[j]) st[j] <= PE_WR;
            else                                    st[j] <= PE_CV;
          end
          PE_INIT: if (o_gnt[j]) begin
            acc[j] <= o_bdata[o_bank[j]];
            st[j]  <= (kptr[j] == kend[j]) ? PE_WR : PE_CV;
          end
          PE_CV: if (cv_gnt[j]) begin
            colr[j] <= cv_bdata[cv_bank[j]][32 +: IW];
            valr[j] <= cv_bdata[cv_bank[j]][31:0];
            st[j]   <= PE_X;
          end
          PE_X: if (x_gnt[j]) begin
            acc[j]  <= acc[j] + fx_mul(valr[j], x_bdata[x_bank[j]]);
            kptr[j] <= kptr[j] + 1;
            st[j]   <= (kptr[j] + 1 == kend[j]) ? PE_WR : PE_CV;
          end
          PE_WR: if (o_gnt[j]) st[j] <= PE_DONE;
          default: ;
        endcase
      end
    end
  end

  // A PE never holds more than one outstanding request class.
  for (genvar j = 0; j < P; j++) begin : g_chk
    a_one_req: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({rp_req[j], cv_req[j], x_req[j], o_req[j]}));
  end

endmodule
