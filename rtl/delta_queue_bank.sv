// delta_queue_bank: a hidden layer's delta memory bank, a queue of Q copies of
// the layer in Z memories (same placement as act_queue_bank: neuron i in
// memory i mod Z, address slot*D + i/Z).
//
// Backpropagation through the junction to the right produces the deltas in
// permuted order, as partial sums spread over the FO visits of each neuron:
//   pm_* port  - read-modify-write of one row of one slot in all Z memories
//                (combinational read pm_rdata, write pm_wdata at the clock
//                edge when pm_we), memory order.
// The junction to the left reads finished deltas in natural order:
//   nat ports  - NNR ports, each returning NPR consecutive neurons starting
//                at an NPR-aligned index nat_base of slot nat_slot.
// Not reset: every slot is overwritten at the first visit of each neuron.
// Queue organisation follows the text; ports are this design's choice.
module delta_queue_bank import sen_pkg::*; #(
  parameter int unsigned N   = 64,
  parameter int unsigned Z   = 32,
  parameter int unsigned Q   = 4,
  parameter int unsigned NPR = 4,
  parameter int unsigned NNR = 1,
  localparam int unsigned D  = N / Z,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned QW = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned RW = (D > 1) ? $clog2(D) : 1
)(
  input  logic          clk,
  input  logic [QW-1:0] pm_slot,
  input  logic [RW-1:0] pm_row,
  output fx_t           pm_rdata [Z],
  input  logic          pm_we,
  input  fx_t           pm_wdata [Z],
  input  logic [QW-1:0] nat_slot [NNR],
  input  logic [NW-1:0] nat_base [NNR],
  output fx_t           nat_rdata [NNR][NPR]
);

  if (N % Z != 0) begin : g_check1
    $error("delta_queue_bank: N must be a multiple of Z");
  end

  fx_t mem [Z][Q*D];

  for (genvar m = 0; m < Z; m++) begin : g_mem
    always_ff @(posedge clk) begin
      if (pm_we) mem[m][int'(pm_slot)*D + int'(pm_row)] <= pm_wdata[m];
    end
    assign pm_rdata[m] = mem[m][int'(pm_slot)*D + int'(pm_row)];
  end

  for (genvar p = 0; p < NNR; p++) begin : g_nat
    for (genvar i = 0; i < NPR; i++) begin : g_n
      int unsigned idx;
      assign idx = int'(nat_base[p]) + i;
      assign nat_rdata[p][i] = mem[idx % Z][int'(nat_slot[p])*D + idx / Z];
    end
  end

endmodule
