// output_delta: the output layer's delta queue.
//
// As the last junction's feedforward produces output activations (NPW
// consecutive neurons per valid cycle), this block forms the output error
// delta_i = a_i - y_i, with y the one-hot code of the input's class label
// (y_i = 1.0 for i == label, else 0), and stores it in slot wr_slot of a Q-deep
// queue. That is the delta of a sigmoid output layer under a cross-entropy
// cost. The last junction reads it back in natural order for backpropagation
// and for the weight update of later inputs, through NNR ports of NPW
// neurons each (combinational read). Write at the clock edge; not reset.
// The text does not say which cost the output layer uses: the cost and its
// delta are this design's choice.
module output_delta import sen_pkg::*; #(
  parameter int unsigned N   = 16,
  parameter int unsigned Q   = 4,
  parameter int unsigned NPW = 1,
  parameter int unsigned NNR = 2,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned QW = (Q > 1) ? $clog2(Q) : 1
)(
  input  logic          clk,
  input  logic          wr_en,
  input  logic [QW-1:0] wr_slot,
  input  logic [NW-1:0] wr_base,
  input  fx_t           wr_act [NPW],
  input  logic [NW-1:0] label,
  input  logic [QW-1:0] rd_slot [NNR],
  input  logic [NW-1:0] rd_base,
  output fx_t           rd_delta [NNR][NPW]
);

  fx_t dq [Q][N];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int i = 0; i < NPW; i++) begin
        dq[wr_slot][int'(wr_base) + i] <= (int'(wr_base) + i == int'(label))
                                          ? fx_t'(wr_act[i] - FX_ONE) : wr_act[i];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NNR; p++)
      for (int i = 0; i < NPW; i++)
        rd_delta[p][i] = dq[rd_slot[p]][int'(rd_base) + i];
  end

endmodule
