// weight_bank: the single weight store of a junction, Z memories of C words.
//
// Weight of edge e = n*Z + j lives in memory j at row n, so one cycle reads a
// whole row in natural order (rd_row -> rd_data, combinational read). The
// feedforward, backpropagation and update operations of a cycle all use the
// same row; the updated row is written back one cycle later through wr_*, so
// at any time only two rows are touched (read row n, write row n-1).
// A configuration port (cfg_*) loads and reads single weights; a pending
// update write has priority over a configuration write. No reset: the weights
// are loaded by the host. One bank shared by all three operations follows the
// text; the write-back lag of one cycle is this design's choice.
module weight_bank import sen_pkg::*; #(
  parameter int unsigned Z  = 512,
  parameter int unsigned C  = 16,
  localparam int unsigned ZW = (Z > 1) ? $clog2(Z) : 1,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1
)(
  input  logic          clk,
  input  logic [CW-1:0] rd_row,
  output fx_t           rd_data [Z],
  input  logic          wr_en,
  input  logic [CW-1:0] wr_row,
  input  fx_t           wr_data [Z],
  input  logic          cfg_we,
  input  logic [CW-1:0] cfg_row,
  input  logic [ZW-1:0] cfg_lane,
  input  fx_t           cfg_wdata,
  output fx_t           cfg_rdata
);

  fx_t mem [Z][C];

  for (genvar j = 0; j < Z; j++) begin : g_mem
    always_ff @(posedge clk) begin
      if (wr_en)
        mem[j][wr_row] <= wr_data[j];
      else if (cfg_we && cfg_lane == ZW'(j))
        mem[j][cfg_row] <= cfg_wdata;
    end
    assign rd_data[j] = mem[j][rd_row];
  end

  assign cfg_rdata = mem[cfg_lane][cfg_row];

endmodule
