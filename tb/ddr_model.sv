// ddr_model: behavioural model of the off-chip DDR seen through an AXI4 read
// port (address and data channels only). Not synthesizable logic: a testbench
// stand-in for the DRAM and its controller.
//
// Read requests are accepted into a queue of QDEPTH bursts (ar_ready drops
// at random to exercise the master's hold rule). The burst at the head starts
// returning LATENCY cycles after it was accepted, one 512-bit beat per cycle
// with occasional idle cycles; r_last marks its final beat. The data of word
// w (byte address w*64) is tb_util_pkg::pnys_elem(w, lane) in each 32-bit lane.
module ddr_model #(
  parameter int LATENCY = 24,
  parameter int QDEPTH  = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         ar_valid,
  output logic         ar_ready,
  input  logic [31:0]  ar_addr,
  input  logic [7:0]   ar_len,
  output logic         r_valid,
  input  logic         r_ready,
  output logic [511:0] r_data,
  output logic         r_last
);
  import tb_util_pkg::*;

  typedef struct { longint word; int beats; longint t_ready; } burst_t;
  burst_t q[$];
  longint cyc;
  int     beat;
  logic   gate;

  always_ff @(posedge clk) begin
    if (!rst_n) begin cyc <= 0; beat <= 0; end
    else begin
      cyc <= cyc + 1;
      if (ar_valid && ar_ready)
        q.push_back('{word: longint'(ar_addr) / 64, beats: int'(ar_len) + 1, t_ready: cyc + LATENCY});
      if (r_valid && r_ready) begin
        if (beat + 1 == q[0].beats) begin void'(q.pop_front()); beat <= 0; end
        else beat <= beat + 1;
      end
    end
  end

  always_ff @(negedge clk) begin
    ar_ready <= rst_n && (q.size() < QDEPTH) && ($urandom_range(0, 3) != 0);
    gate     <= ($urandom_range(0, 7) != 0);
  end

  always_comb begin
    r_valid = rst_n && (q.size() > 0) && (cyc >= q[0].t_ready) && gate;
    r_last  = r_valid && (beat + 1 == q[0].beats);
    r_data  = '0;
    if (q.size() > 0)
      for (int l = 0; l < 16; l++) r_data[l*32 +: 32] = pnys_elem(q[0].word + beat, l);
  end
endmodule
