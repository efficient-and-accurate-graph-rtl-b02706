// nee: Nystrom Encoding Engine, h = sign(Pnys C).
//
// Pnys (d rows x s landmarks) is too large for on-chip memory and is streamed
// from DDR. Each row of Pnys is stored as WPR = ceil(s/16) consecutive 512-bit
// words of sixteen 32-bit elements (row-major, element k of the row in lane
// k mod 16 of word k/16); rows follow one another, so the whole matrix is one
// contiguous region starting at base_addr.
//
// Fetch side: an AXI4-style read master issues contiguous bursts of up to
// BURST beats of 512 bits, keeps up to MAX_OUTST bursts in flight, and only
// issues a burst when the FIFO has room for it counting the beats already in
// flight (credit check), so the read data channel is never back-pressured.
// Returned words enter a 512-entry x 512-bit stream FIFO that decouples the
// bursty DRAM traffic from the compute side.
//
// Compute side: one FIFO word per cycle is unpacked into 16 operands for 16
// MAC lanes; lane l multiplies its operand with C[16*w + l] from bank l of the
// cyclically partitioned C buffer (16 banks, so all lanes read in parallel)
// and accumulates. After the last word of a row an adder tree sums the 16 lane
// accumulators and the sign is taken (fused into the MAC array): bit 1 means
// +1 (y >= 0), bit 0 means -1. Bits are packed into 64-bit words of the HV
// buffer, which the classification engine reads through hv_raddr/hv_rdata.
//
// Sequence: start -> s cycles loading C from the kernel buffer (c_raddr /
// c_rdata, combinational) -> stream d*WPR words (one per cycle when the FIFO
// is not empty) -> done. Lanes with k >= s contribute zero. With d = 0 or
// s = 0 the engine finishes at once and leaves the HV buffer untouched.
// Pnys does not depend on the input graph, so fetching may begin before the
// computation: a prefetch pulse (or start, whichever comes first) latches
// n_rows / n_land / base_addr and lets the read master fill the FIFO while
// the earlier engines still run; the MACs begin on start.
//
// Published: streaming from DDR, 512-bit aligned contiguous bursts, multiple
// outstanding reads, 512-entry 16-wide FIFO, 16 MAC lanes, cyclically banked
// C, sign into an HV buffer. This implementation's choices: Q16.16 fixed
// point with a 64-bit exact product sum instead of FP32, burst length 16,
// four outstanding bursts, the row-major word layout, the early prefetch
// and sign(0) = +1.
module nee
  import hx_pkg::*;
#(
  parameter int unsigned LANES      = 16,      // 512-bit word / 32-bit element
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned BURST      = 16,      // beats per burst
  parameter int unsigned MAX_OUTST  = 4,       // bursts in flight
  parameter int unsigned C_DEPTH    = 512,     // max landmarks (multiple of LANES)
  parameter int unsigned D_MAX      = 10000,   // max hypervector dimension
  localparam int unsigned AXI_W     = LANES * DATA_W,
  localparam int unsigned HV_WORDS  = (D_MAX + 63) / 64,
  localparam int unsigned HA        = $clog2(HV_WORDS),
  localparam int unsigned CB        = $clog2(C_DEPTH),
  localparam int unsigned CW        = $clog2(C_DEPTH / LANES),
  localparam int unsigned FC        = $clog2(FIFO_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              prefetch,    // begin fetching Pnys (optional)
  input  logic              start,
  input  logic [15:0]       n_rows,      // d
  input  logic [CB:0]       n_land,      // s
  input  logic [31:0]       base_addr,   // byte address of Pnys
  output logic              busy,
  output logic              done,
  // kernel vector C
  output logic [CB-1:0]     c_raddr,
  input  data_t             c_rdata,
  // AXI4 read address / data channels (subset)
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [31:0]       ar_addr,
  output logic [7:0]        ar_len,      // beats - 1
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [AXI_W-1:0]  r_data,
  input  logic              r_last,
  // hypervector buffer read port
  input  logic [HA-1:0]     hv_raddr,
  output logic [63:0]       hv_rdata,
  // statistics
  output logic [31:0]       credit_stalls,  // cycles a burst was held back by FIFO space
  output logic [31:0]       starve_cycles,  // cycles the MACs waited for data
  output logic [3:0]        max_outst_seen
);

  // ---------------- buffers ----------------
  data_t       c_mem  [LANES][C_DEPTH / LANES];
  logic [63:0] hv_mem [HV_WORDS];
  assign hv_rdata = hv_mem[hv_raddr];

  typedef enum logic [1:0] {N_IDLE, N_LOADC, N_STREAM} nst_e;
  nst_e        st;
  logic [CB:0] ci;
  logic [15:0] r_rows;
  logic [CB:0] r_land;
  logic [CW:0] wpr;        // words per row
  logic [31:0] r_base;
  logic        fetch_on;   // read master active for the current matrix
  wire         fetch_begin = (st == N_IDLE) && !fetch_on && (start || prefetch);

  assign busy    = (st != N_IDLE);
  assign c_raddr = CB'(ci);

  // ---------------- stream FIFO ----------------
  logic             f_out_valid, f_pop, f_in_ready;
  logic [AXI_W-1:0] f_out_data;
  logic [FC:0]      f_count;

  sync_fifo #(.WIDTH(AXI_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(r_valid), .in_ready(f_in_ready), .in_data(r_data),
    .out_valid(f_out_valid), .out_ready(f_pop), .out_data(f_out_data), .count(f_count)
  );
  assign r_ready = f_in_ready;

  // ---------------- read master ----------------
  logic [31:0] words_total, words_issued;
  logic [FC+1:0] inflight;        // beats requested, not yet returned
  logic [3:0]  outst;             // bursts in flight
  logic [8:0]  next_len;
  logic        can_issue;

  always_comb begin
    logic [31:0] rem;
    rem       = words_total - words_issued;
    next_len  = (rem > BURST) ? 9'(BURST) : 9'(rem);
    can_issue = fetch_on && (rem != 0) && (32'(outst) < MAX_OUTST) &&
                (32'(f_count) + 32'(inflight) + 32'(next_len) <= FIFO_DEPTH);
  end

  wire ar_fire = ar_valid && ar_ready;
  wire r_fire  = r_valid && r_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ar_valid <= 1'b0; ar_addr <= '0; ar_len <= '0;
      words_issued <= '0; inflight <= '0; outst <= '0;
      credit_stalls <= '0; max_outst_seen <= '0;
    end else begin
      if (ar_fire) ar_valid <= 1'b0;
      // a burst's beats and slot are reserved when it is issued
      if (!ar_valid && can_issue) begin
        ar_valid     <= 1'b1;
        ar_addr      <= r_base + (words_issued << $clog2(AXI_W / 8));
        ar_len       <= 8'(next_len - 1);
        words_issued <= words_issued + 32'(next_len);
      end else if (fetch_on && words_issued != words_total && !ar_valid &&
                   (32'(f_count) + 32'(inflight) + 32'(next_len) > FIFO_DEPTH)) begin
        credit_stalls <= credit_stalls + 1;
      end
      if (fetch_begin) words_issued <= '0;
      inflight <= inflight + ((!ar_valid && can_issue) ? (FC+2)'(next_len) : '0) - (FC+2)'(r_fire);
      outst    <= outst + 4'(!ar_valid && can_issue) - 4'(r_fire && r_last);
      if (outst > max_outst_seen) max_outst_seen <= outst;
    end
  end

  // ---------------- MAC array ----------------
  acc_t        acc [LANES];
  logic [CW:0] wi;           // word within row
  logic [15:0] row;
  logic [63:0] hv_word;

  assign f_pop = (st == N_STREAM) && f_out_valid;

  always_comb begin
    words_total = 32'(r_rows) * 32'(wpr);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= N_IDLE; ci <= '0; r_rows <= '0; r_land <= '0; wpr <= '0; r_base <= '0;
      fetch_on <= 1'b0;
      wi <= '0; row <= '0; hv_word <= '0; done <= 1'b0; starve_cycles <= '0;
      for (int unsigned l = 0; l < LANES; l++) acc[l] <= '0;
    end else begin
      done <= 1'b0;
      if (fetch_begin) begin
        fetch_on <= 1'b1;
        r_rows   <= n_rows; r_land <= n_land; r_base <= base_addr;
        wpr      <= (CW+1)'((32'(n_land) + LANES - 1) / LANES);
      end
      unique case (st)
        N_IDLE: if (start) begin
          ci <= '0; wi <= '0; row <= '0; hv_word <= '0;
          for (int unsigned l = 0; l < LANES; l++) acc[l] <= '0;
          if (n_rows == 0 || n_land == 0) begin done <= 1'b1; fetch_on <= 1'b0; end
          else st <= N_LOADC;
        end
        N_LOADC: begin
          c_mem[32'(ci) % LANES][CW'(32'(ci) / LANES)] <= c_rdata;
          ci <= ci + 1;
          if (ci + 1 == r_land) st <= N_STREAM;
        end
        N_STREAM: begin
          if (!f_out_valid) starve_cycles <= starve_cycles + 1;
          else begin
            automatic acc_t nsum [LANES];
            automatic acc_t y = '0;
            for (int unsigned l = 0; l < LANES; l++) begin
              automatic data_t p = f_out_data[l*DATA_W +: DATA_W];
              automatic logic [31:0] k = 32'(wi) * LANES + l;
              nsum[l] = acc[l] + ((k < 32'(r_land)) ? acc_t'(p) * acc_t'(c_mem[l][CW'(wi)]) : '0);
              y = y + nsum[l];
            end
            if (wi + 1 == wpr || wpr == 0) begin
              // end of row: adder tree + sign, pack into the HV buffer
              automatic logic [63:0] w = hv_word;
              w[row[5:0]] = !y[ACC_W-1];
              hv_word <= w;
              if (row[5:0] == 6'd63 || row + 1 == r_rows) begin
                hv_mem[HA'(row >> 6)] <= w;
                hv_word <= '0;
              end
              for (int unsigned l = 0; l < LANES; l++) acc[l] <= '0;
              wi  <= '0;
              row <= row + 1;
              if (row + 1 == r_rows) begin st <= N_IDLE; done <= 1'b1; fetch_on <= 1'b0; end
            end else begin
              for (int unsigned l = 0; l < LANES; l++) acc[l] <= nsum[l];
              wi <= wi + 1;
            end
          end
        end
        default: st <= N_IDLE;
      endcase
    end
  end

  // AXI rule: an address request stays valid and stable until accepted.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                ar_valid && !ar_ready |=> ar_valid && $stable(ar_addr) && $stable(ar_len));
  // Credit rule: the FIFO never has to refuse returned data.
  a_no_r_backpressure: assert property (@(posedge clk) disable iff (!rst_n) r_valid |-> r_ready);

endmodule
