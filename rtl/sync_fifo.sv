// sync_fifo: single-clock first-in first-out buffer.
//
// Storage is a DEPTH x WIDTH array with separate read and write pointers and
// an occupancy counter. A push is accepted when the FIFO is not full
// (in_ready), a pop happens when out_valid and out_ready are both high; push
// and pop may happen in the same cycle. The head entry is presented
// combinationally (first-word fall-through), so data pushed in cycle T can be
// popped in cycle T+1. `count` gives the occupancy, which the Nystrom encoding
// engine uses to decide whether another DDR burst still fits.
// The design uses such FIFOs for the Pnys stream buffer (512 deep, 512 bits
// wide, as published) and for the code / lookup queue between the LSH unit
// and the hashing engine (depth chosen here).
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  wire do_push = in_valid && in_ready;
  wire do_pop  = out_valid && out_ready;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (32'(wptr) == DEPTH-1) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (32'(rptr) == DEPTH-1) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // Handshake rules: never push into a full FIFO, never pop an empty one.
  a_count_bound: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
  a_full_stall:  assert property (@(posedge clk) disable iff (!rst_n)
                                  (count == (AW+1)'(DEPTH)) && !do_pop |=> count == (AW+1)'(DEPTH));

endmodule
