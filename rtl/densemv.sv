// densemv: dense matrix-vector unit of the LSH unit, c = F u(t).
//
// F (node features, N x f, Q16.16) sits in a matrix buffer of P banks with
// row r in bank r mod P; the projection vectors u(t) of all hops sit in one
// vector buffer (bank 0) at hop*MAX_F + k. The P PEs work in lockstep on one
// group of P consecutive rows: in each cycle the shared u(t)[k] is broadcast
// and every PE multiply-accumulates its own F[r][k]. After f cycles the P
// results are written in one cycle to output bank j (row g*P + j), i.e. the
// output leaves in the same bank layout the SpMV unit uses for its vectors.
// Timing: start -> done = ceil(N/P) * (f + 1) + 1 cycles.
// Bank structure and PE count follow the published DenseMV unit; the
// lockstep schedule and the fixed-point MAC are this implementation's choices.
// The offset b(t) and the division by the bucket width w are applied after the
// propagation steps, in the LSH unit's code emitter (its post-processing stage).
module densemv
  import hx_pkg::*;
#(
  parameter int unsigned P       = 4,
  parameter int unsigned MAX_N   = 1024,
  parameter int unsigned MAX_F   = 128,
  parameter int unsigned MAX_HOP = 10,
  localparam int unsigned PB = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned GA = $clog2(MAX_N / P),          // row group address
  localparam int unsigned FA = $clog2(MAX_F),
  localparam int unsigned UA = $clog2(MAX_F * MAX_HOP)
) (
  input  logic          clk,
  input  logic          rst_n,
  // load: sel 0 = F (addr = row*MAX_F + k), sel 1 = u (addr = hop*MAX_F + k)
  input  logic          ld_we,
  input  logic          ld_sel,
  input  logic [31:0]   ld_addr,
  input  data_t         ld_data,
  // run
  input  logic          start,
  input  logic [15:0]   n_rows,
  input  logic [FA:0]   n_feat,
  input  logic [3:0]    hop,
  output logic          busy,
  output logic          done,
  // banked output (row = out_addr*P + j)
  output logic [P-1:0]  out_we,
  output logic [GA-1:0] out_addr,
  output data_t         out_data [P]
);

  data_t f_mem [P][(MAX_N / P) * MAX_F];
  data_t u_mem [MAX_F * MAX_HOP];

  always_ff @(posedge clk) begin
    if (ld_we && !ld_sel) begin
      automatic logic [31:0] row = ld_addr / MAX_F;
      f_mem[row[PB-1:0]][(row >> PB) * MAX_F + (ld_addr % MAX_F)] <= ld_data;
    end
    if (ld_we && ld_sel) u_mem[UA'(ld_addr)] <= ld_data;
  end

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_WR} st_e;
  st_e            st;
  logic [GA:0]    grp;
  logic [FA:0]    k;
  data_t          acc [P];
  logic [15:0]    r_rows;
  logic [FA:0]    r_feat;
  logic [3:0]     r_hop;

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; grp <= '0; k <= '0; done <= 1'b0;
      r_rows <= '0; r_feat <= '0; r_hop <= '0;
      out_we <= '0; out_addr <= '0;
      for (int unsigned j = 0; j < P; j++) begin acc[j] <= '0; out_data[j] <= '0; end
    end else begin
      done   <= 1'b0;
      out_we <= '0;
      unique case (st)
        S_IDLE: if (start) begin
          r_rows <= n_rows; r_feat <= n_feat; r_hop <= hop;
          grp <= '0; k <= '0;
          for (int unsigned j = 0; j < P; j++) acc[j] <= '0;
          if (n_rows == 0) done <= 1'b1;
          else st <= (n_feat == 0) ? S_WR : S_MAC;
        end
        S_MAC: begin
          automatic data_t u = u_mem[UA'(32'(r_hop) * MAX_F + 32'(k))];
          for (int unsigned j = 0; j < P; j++)
            acc[j] <= acc[j] + fx_mul(f_mem[j][32'(grp) * MAX_F + 32'(k)], u);
          if (k + 1 == r_feat) st <= S_WR;
          k <= k + 1;
        end
        S_WR: begin
          for (int unsigned j = 0; j < P; j++) begin
            out_we[j]   <= (32'(grp) * P + j) < 32'(r_rows);
            out_data[j] <= acc[j];
            acc[j]      <= '0;
          end
          out_addr <= GA'(grp);
          k <= '0;
          if ((32'(grp) + 1) * P >= 32'(r_rows)) begin
            st <= S_IDLE; done <= 1'b1;
          end else begin
            grp <= grp + 1;
            st  <= (r_feat == 0) ? S_WR : S_MAC;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
