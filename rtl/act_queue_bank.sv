// act_queue_bank: a layer's activation (or activation-derivative) memory bank,
// organised as a queue of Q copies of the layer.
//
// The bank has Z memories, Z being the degree of parallelism of the junction
// that reads the layer. Neuron i of queue slot q lives in memory i mod Z at
// address q*D + i/Z, D = N/Z. Because the junctions are pipelined, the values
// a layer computed for one training input must survive until the same input
// comes back through backpropagation and update, while newer inputs are being
// written: slot q holds input number (id mod Q).
//   write port  - natural order: NPW consecutive neurons starting at an
//                 NPW-aligned index wr_base, into slot wr_slot (NPW <= Z, so
//                 they fall into NPW different memories).
//   read ports  - NRD permuted-order ports: every memory is read at the same
//                 row of the given slot; the values come out in memory order
//                 and lane_perm in the junction routes them to lanes.
// Writes take effect at the clock edge, reads are combinational. Not reset.
// Queue organisation follows the text; port counts and addressing are this
// design's choice.
module act_queue_bank import sen_pkg::*; #(
  parameter int unsigned N   = 64,
  parameter int unsigned Z   = 32,
  parameter int unsigned Q   = 4,
  parameter int unsigned NPW = 4,
  parameter int unsigned NRD = 2,
  localparam int unsigned D  = N / Z,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned QW = (Q > 1) ? $clog2(Q) : 1,
  localparam int unsigned RW = (D > 1) ? $clog2(D) : 1
)(
  input  logic          clk,
  input  logic          wr_en,
  input  logic [QW-1:0] wr_slot,
  input  logic [NW-1:0] wr_base,
  input  fx_t           wr_data [NPW],
  input  logic [QW-1:0] rd_slot [NRD],
  input  logic [RW-1:0] rd_row  [NRD],
  output fx_t           rd_data [NRD][Z]
);

  if (N % Z != 0) begin : g_check1
    $error("act_queue_bank: N must be a multiple of Z");
  end
  if (Z % NPW != 0) begin : g_check2
    $error("act_queue_bank: NPW must divide Z");
  end

  fx_t mem [Z][Q*D];

  // memory index and row of the first neuron written this cycle
  int unsigned base_mem, base_row;
  assign base_mem = int'(wr_base) % Z;
  assign base_row = int'(wr_base) / Z;

  for (genvar m = 0; m < Z; m++) begin : g_mem
    int unsigned off;
    assign off = (m + Z - base_mem) % Z;
    always_ff @(posedge clk) begin
      if (wr_en && off < NPW)
        mem[m][int'(wr_slot)*D + base_row] <= wr_data[off];
    end
    for (genvar p = 0; p < NRD; p++) begin : g_rd
      assign rd_data[p][m] = mem[m][int'(rd_slot[p])*D + int'(rd_row[p])];
    end
  end

endmodule
