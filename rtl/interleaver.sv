// interleaver: per-cycle address generator for the permuted-order side of a
// junction.
//
// A junction processes its E = NL*FO edges Z at a time, in C = E/Z cycles.
// Edges are numbered in the order of the succeeding (right) layer's neurons,
// so cycle n covers edges n*Z .. n*Z+Z-1 (natural order). The interleaver
// decides which preceding (left) neuron each of those edges comes from. The
// left layer's values sit in Z memories of DL = NL/Z words: neuron i lives in
// memory i mod Z at row i / Z. In cycle n every memory is read at the same
// row n mod DL, and lane j is connected to memory (P*j + ofs_n) mod Z (the
// stride P is wiring inside lane_perm). Each left neuron is therefore visited
// at the C/DL = FO cycles with n = row (mod DL): exactly its fan-out, and no
// memory is read twice in one cycle (clash-free).
//
// The offsets ofs_n form a C-entry table, loaded at reset with
// (n*STEP) mod Z and rewritable through cfg_* at any time (reconfigurable).
// Outputs are combinational in cyc. first_visit / last_visit mark the first
// and the last of the FO visits of the row read this cycle; the junction uses
// them to start and finish the backpropagated sums.
// The text requires a deterministic, reconfigurable, clash-free interleaver
// with pseudo-random spread; the affine rule used here is this design's own.
module interleaver #(
  parameter int unsigned Z    = 512,
  parameter int unsigned C    = 16,
  parameter int unsigned DL   = 2,
  parameter int unsigned STEP = 97,
  localparam int unsigned ZW  = (Z  > 1) ? $clog2(Z)  : 1,
  localparam int unsigned CW  = (C  > 1) ? $clog2(C)  : 1,
  localparam int unsigned RW  = (DL > 1) ? $clog2(DL) : 1
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] cyc,
  input  logic          cfg_we,
  input  logic [CW-1:0] cfg_addr,
  input  logic [ZW-1:0] cfg_ofs,
  output logic [ZW-1:0] ofs,
  output logic [RW-1:0] row,
  output logic          first_visit,
  output logic          last_visit
);

  if (C % DL != 0) begin : g_check1
    $error("interleaver: C must be a multiple of DL");
  end

  logic [ZW-1:0] tbl [C];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < C; n++) tbl[n] <= ZW'((n * STEP) % Z);
    end else if (cfg_we) begin
      tbl[cfg_addr] <= cfg_ofs;
    end
  end

  assign ofs         = tbl[cyc];
  assign row         = RW'(int'(cyc) % DL);
  assign first_visit = int'(cyc) < DL;
  assign last_visit  = int'(cyc) >= C - DL;

endmodule
