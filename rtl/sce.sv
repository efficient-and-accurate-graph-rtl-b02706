// sce: Similarity & Classification Engine.
//
// Scores the bipolar query hypervector h against the C bipolar class
// prototypes, s_c = sum_i g_c[i] * h[i], and returns argmax_c s_c. Vectors
// are stored one bit per element (1 = +1, 0 = -1), so over a 64-bit word the
// dot product is 64 - 2 * popcount(g XOR h); bits beyond d are masked out.
// The prototype buffer is split across NPE PEs, PE p holding the block of
// rows p*CPP .. p*CPP+CPP-1 (CPP = MAX_C / NPE) in its own bank. In each cycle
// one HV word is read (broadcast to all PEs) and every PE processes that word
// for the current row of its block; a block row takes ceil(d/64) cycles, the
// whole matrix-vector product CPP * ceil(d/64). Scores go to a score buffer
// and a small sequential argmax unit (ties go to the lower class index) then
// takes n_classes cycles.
// Load port: addr = class * HV_WORDS + word, data = 64 prototype bits.
// The matrix-vector formulation, per-PE row blocks, score buffer and argmax
// follow the published engine; the bit packing, XOR/popcount arithmetic, the
// PE count (4) and the maximum class count (8) are this implementation's.
module sce #(
  parameter int unsigned NPE   = 4,
  parameter int unsigned MAX_C = 8,
  parameter int unsigned D_MAX = 10000,
  localparam int unsigned HV_WORDS = (D_MAX + 63) / 64,
  localparam int unsigned HA  = $clog2(HV_WORDS),
  localparam int unsigned CPP = MAX_C / NPE,
  localparam int unsigned CA  = $clog2(MAX_C)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ld_we,
  input  logic [31:0]        ld_addr,
  input  logic [63:0]        ld_data,
  input  logic               start,
  input  logic [15:0]        n_dim,       // d
  input  logic [CA:0]        n_classes,
  output logic               busy,
  output logic               done,
  output logic [HA-1:0]      hv_raddr,
  input  logic [63:0]        hv_rdata,
  output logic [CA-1:0]      label,
  output logic signed [31:0] best_score,
  input  logic [CA-1:0]      score_raddr,
  output logic signed [31:0] score_rdata
);

  logic [63:0]        proto [NPE][CPP * HV_WORDS];
  logic signed [31:0] score [MAX_C];

  always_ff @(posedge clk) begin
    if (ld_we) begin
      automatic int unsigned c = ld_addr / HV_WORDS;
      automatic int unsigned w = ld_addr % HV_WORDS;
      proto[(c / CPP) % NPE][(c % CPP) * HV_WORDS + w] <= ld_data;
    end
  end

  assign score_rdata = score[score_raddr];

  typedef enum logic [1:0] {S_IDLE, S_DOT, S_ARGMAX} st_e;
  st_e                st;
  logic [HA:0]        w;
  logic [$clog2(CPP+1)-1:0] r;
  logic [CA:0]        c;
  logic signed [31:0] acc [NPE];
  logic [15:0]        r_dim;
  logic [CA:0]        r_ncls;
  logic [HA:0]        nwords;

  assign busy     = (st != S_IDLE);
  assign hv_raddr = HA'(w);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; w <= '0; r <= '0; c <= '0; done <= 1'b0;
      label <= '0; best_score <= '0; r_dim <= '0; r_ncls <= '0; nwords <= '0;
      for (int unsigned p = 0; p < NPE; p++) acc[p] <= '0;
      for (int unsigned k = 0; k < MAX_C; k++) score[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          r_dim <= n_dim; r_ncls <= n_classes;
          nwords <= (HA+1)'((32'(n_dim) + 63) / 64);
          w <= '0; r <= '0;
          for (int unsigned p = 0; p < NPE; p++) acc[p] <= '0;
          if (n_dim == 0 || n_classes == 0) done <= 1'b1;
          else st <= S_DOT;
        end
        S_DOT: begin
          automatic logic [63:0] mask;
          automatic logic [31:0] rem = 32'(r_dim) - 32'(w) * 64;
          mask = (rem >= 64) ? '1 : ((64'd1 << rem[5:0]) - 64'd1);
          for (int unsigned p = 0; p < NPE; p++) begin
            automatic logic [63:0] g = proto[p][32'(r) * HV_WORDS + 32'(w)];
            automatic logic signed [31:0] part;
            part = $signed(32'($countones(mask))) - 2 * $signed(32'($countones((g ^ hv_rdata) & mask)));
            if (w + 1 == nwords) begin
              score[p * CPP + 32'(r)] <= acc[p] + part;
              acc[p] <= '0;
            end else acc[p] <= acc[p] + part;
          end
          if (w + 1 == nwords) begin
            w <= '0;
            if (32'(r) + 1 == CPP) begin st <= S_ARGMAX; c <= '0; end
            else r <= r + 1;
          end else w <= w + 1;
        end
        S_ARGMAX: begin
          if (c == 0 || score[CA'(c)] > best_score) begin
            best_score <= score[CA'(c)];
            label      <= CA'(c);
          end
          c <= c + 1;
          if (c + 1 == r_ncls) begin st <= S_IDLE; done <= 1'b1; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
