// bank_resolver: bank conflict resolver for PEs sharing a banked memory.
//
// NREQ processing elements each present at most one request per cycle,
// tagged with the bank it addresses. For every bank the resolver grants the
// first requester found when scanning from a rotating priority pointer; all
// other requesters of that bank see no grant and retry next cycle (a stall).
// Requests to different banks are all granted in the same cycle. The pointer
// advances by one each cycle in which any request was refused, so no PE can
// be starved. Grants are combinational on the requests (same-cycle), which
// suits memories that are read in the cycle of the grant.
// The published design names a bank conflict resolver between the banked CSR
// arrays and the SpMV PEs but does not describe it; round-robin arbitration
// per bank is this implementation's choice.
module bank_resolver #(
  parameter int unsigned NREQ  = 4,
  parameter int unsigned NBANK = 4,
  localparam int unsigned BW   = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned PW   = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NREQ-1:0]         req,
  input  logic [NREQ-1:0][BW-1:0] bank,
  output logic [NREQ-1:0]         gnt,
  output logic                    conflict   // some request was refused this cycle
);

  logic [PW-1:0] ptr;

  always_comb begin
    logic [NBANK-1:0] taken;
    int unsigned r;
    gnt   = '0;
    taken = '0;
    for (int unsigned i = 0; i < NREQ; i++) begin
      r = (i + 32'(ptr)) % NREQ;
      if (req[r] && !taken[bank[r]]) begin
        gnt[r]            = 1'b1;
        taken[bank[r]]    = 1'b1;
      end
    end
    conflict = |(req & ~gnt);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) ptr <= '0;
    else if (conflict) ptr <= PW'((32'(ptr) + 1) % NREQ);
  end

endmodule
