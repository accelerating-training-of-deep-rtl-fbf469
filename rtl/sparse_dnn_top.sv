// sparse_dnn_top: online trainer for a three-layer sparse network
// (N0, N1, N2) = (1024, 64, 16) with fan-out 8 in both junctions, built from
// two pipelined edge-processing junctions with Z1 = 512 and Z2 = 32 edges per
// cycle. Both junctions then need C = 8192/512 = 512/32 = 16 cycles per input,
// so the pipeline accepts one training input every 16 cycles.
//
// Data flow, per slot of C cycles (slot t, see pipeline_ctrl):
//   host -> in_* -> input bank (layer 0, queue QI)       loads input t+1
//   junction 1: FF input t    -> layer-1 activation/derivative banks
//               UP input t-4  (layer-0 activations, layer-1 deltas)
//   junction 2: FF input t-1  -> output_delta (a - onehot(label)) and out_*
//               BP input t-2  -> layer-1 delta bank
//               UP input t-3  (layer-1 activations, output deltas)
// Every queue slot is the input number modulo the queue depth; the depths
// (QI = 8 for the input layer, QH = 4 elsewhere) cover the longest lifetime,
// 6 slots for the input layer and at most 4 for the others.
//
// Host interface: during each slot the host streams the next input, N0/C
// pixels per cycle in order (beat n carries pixels n*N0/C ...), with in_valid
// on every beat and its class in in_label; an input with a missing beat
// becomes a bubble. run = 0 freezes the pipeline; train_en = 0 gives
// inference only. out_* streams the output activations of input out_id, one
// group of NPC2 neurons per cycle. Weights and interleaver offsets are loaded
// and read through the wcfg*/ilv* ports while run = 0; after reset the
// interleaver tables hold their default offsets.
// The network size, fan-out, Z values and 10-bit format are the evaluated
// configuration of the text; bank depths, host protocol and control are this
// design's choices.
module sparse_dnn_top import sen_pkg::*; #(
  parameter int unsigned N0    = 1024,
  parameter int unsigned N1    = 64,
  parameter int unsigned N2    = 16,
  parameter int unsigned FO1   = 8,
  parameter int unsigned FO2   = 8,
  parameter int unsigned Z1    = 512,
  parameter int unsigned Z2    = 32,
  parameter int unsigned P1    = 317,
  parameter int unsigned P2    = 19,
  parameter int unsigned STEP1 = 97,
  parameter int unsigned STEP2 = 7,
  parameter int unsigned QI    = 8,
  parameter int unsigned QH    = 4,
  localparam int unsigned C    = N0 * FO1 / Z1,
  localparam int unsigned FI1  = N0 * FO1 / N1,
  localparam int unsigned FI2  = N1 * FO2 / N2,
  localparam int unsigned NPC1 = Z1 / ((FI1 < Z1) ? FI1 : Z1),
  localparam int unsigned NPC2 = Z2 / ((FI2 < Z2) ? FI2 : Z2),
  localparam int unsigned NPI  = N0 / C,
  localparam int unsigned CW   = (C  > 1) ? $clog2(C)  : 1,
  localparam int unsigned Z1W  = $clog2(Z1),
  localparam int unsigned Z2W  = $clog2(Z2),
  localparam int unsigned N2W  = $clog2(N2),
  localparam int unsigned TW   = 8
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           run,
  input  logic           train_en,
  input  logic [3:0]     eta_shift,
  // training data
  input  logic           in_valid,
  input  fx_t            in_data [NPI],
  input  logic [N2W-1:0] in_label,
  // results
  output logic [CW-1:0]  cyc,
  output logic           slot_end,
  output logic           busy,
  output logic           out_valid,
  output logic [TW-1:0]  out_id,
  output logic [N2W-1:0] out_neuron,
  output fx_t            out_act [NPC2],
  // configuration: weights (w1*, w2*) and interleaver offsets (ilv1*, ilv2*)
  input  logic           w1_we,
  input  logic [CW-1:0]  w1_row,
  input  logic [Z1W-1:0] w1_lane,
  input  fx_t            w1_wdata,
  output fx_t            w1_rdata,
  input  logic           w2_we,
  input  logic [CW-1:0]  w2_row,
  input  logic [Z2W-1:0] w2_lane,
  input  fx_t            w2_wdata,
  output fx_t            w2_rdata,
  input  logic           ilv1_we,
  input  logic [CW-1:0]  ilv1_addr,
  input  logic [Z1W-1:0] ilv1_ofs,
  input  logic           ilv2_we,
  input  logic [CW-1:0]  ilv2_addr,
  input  logic [Z2W-1:0] ilv2_ofs
);

  if (N1 * FO2 / Z2 != C) begin : g_check1
    $error("sparse_dnn_top: both junctions must take the same number of cycles");
  end

  localparam int unsigned QIW = $clog2(QI);
  localparam int unsigned QHW = $clog2(QH);
  localparam int unsigned D0  = N0 / Z1;
  localparam int unsigned D1  = N1 / Z2;
  localparam int unsigned R0W = (D0 > 1) ? $clog2(D0) : 1;
  localparam int unsigned R1W = (D1 > 1) ? $clog2(D1) : 1;

  // ---------------- schedule ----------------
  logic [TW-1:0] t;
  logic          ff_en [2], bp_en [2], up_en [2];
  logic          load_ok, load_valid;

  assign load_valid = load_ok && in_valid;

  pipeline_ctrl #(.C(C), .J(2), .TW(TW)) u_ctrl (
    .clk, .rst_n, .run, .train_en, .load_valid,
    .cyc, .slot_end, .t, .ff_en, .bp_en, .up_en, .busy
  );

  // input ids of the operations in this slot
  logic [TW-1:0] id_load, id_ff1, id_up1, id_ff2, id_bp2, id_up2;
  assign id_load = t + 1'b1;
  assign id_ff1  = t;
  assign id_up1  = t - TW'(4);
  assign id_ff2  = t - TW'(1);
  assign id_bp2  = t - TW'(2);
  assign id_up2  = t - TW'(3);

  // ---------------- input loader ----------------
  logic [N2W-1:0] labels [QI];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  load_ok <= 1'b1;
    else if (slot_end)           load_ok <= 1'b1;
    else if (run && !in_valid)   load_ok <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (run && in_valid && cyc == '0) labels[id_load[QIW-1:0]] <= in_label;
  end

  // ---------------- layer 0 (input) ----------------
  logic [R0W-1:0] l0_row;
  fx_t            l0_rd [2][Z1];

  act_queue_bank #(.N(N0), .Z(Z1), .Q(QI), .NPW(NPI), .NRD(2)) u_l0_act (
    .clk,
    .wr_en(run && in_valid), .wr_slot(id_load[QIW-1:0]),
    .wr_base(($clog2(N0))'(int'(cyc) * NPI)), .wr_data(in_data),
    .rd_slot('{id_ff1[QIW-1:0], id_up1[QIW-1:0]}),
    .rd_row('{l0_row, l0_row}), .rd_data(l0_rd)
  );

  // ---------------- junction 1 ----------------
  logic [$clog2(N1)-1:0] j1_rbase;
  logic                  j1_ff_valid;
  fx_t                   j1_act [NPC1], j1_der [NPC1];
  fx_t                   l1_dnat [1][NPC1];
  fx_t                   zero1 [Z1];
  fx_t                   unused_dl [Z1];
  fx_t                   zero_np1 [NPC1];
  logic                  unused_dl_we;

  always_comb begin
    for (int m = 0; m < Z1; m++) zero1[m] = '0;
    for (int i = 0; i < NPC1; i++) zero_np1[i] = '0;
  end

  junction #(.NL(N0), .NR(N1), .FO(FO1), .Z(Z1), .P(P1), .STEP(STEP1), .HAS_BP(1'b0)) u_j1 (
    .clk, .rst_n, .cyc,
    .ff_en(ff_en[0]), .bp_en(bp_en[0]), .up_en(up_en[0]), .eta_shift,
    .l_row(l0_row), .a_ff_mem(l0_rd[0]), .a_up_mem(l0_rd[1]),
    .der_mem(zero1), .dl_old_mem(zero1), .dl_we(unused_dl_we), .dl_new_mem(unused_dl),
    .r_base(j1_rbase), .dr_bp(zero_np1), .dr_up(l1_dnat[0]),
    .ff_valid(j1_ff_valid), .ff_act(j1_act), .ff_der(j1_der),
    .ilv_we(ilv1_we), .ilv_addr(ilv1_addr), .ilv_ofs(ilv1_ofs),
    .wcfg_we(w1_we), .wcfg_row(w1_row), .wcfg_lane(w1_lane),
    .wcfg_wdata(w1_wdata), .wcfg_rdata(w1_rdata)
  );

  // ---------------- layer 1 (hidden) ----------------
  logic [R1W-1:0] l1_row;
  fx_t            l1_act_rd [2][Z2];
  fx_t            l1_der_rd [1][Z2];
  fx_t            l1_dold [Z2], l1_dnew [Z2];
  logic           l1_dwe;

  act_queue_bank #(.N(N1), .Z(Z2), .Q(QH), .NPW(NPC1), .NRD(2)) u_l1_act (
    .clk,
    .wr_en(j1_ff_valid), .wr_slot(id_ff1[QHW-1:0]), .wr_base(j1_rbase), .wr_data(j1_act),
    .rd_slot('{id_ff2[QHW-1:0], id_up2[QHW-1:0]}),
    .rd_row('{l1_row, l1_row}), .rd_data(l1_act_rd)
  );

  act_queue_bank #(.N(N1), .Z(Z2), .Q(QH), .NPW(NPC1), .NRD(1)) u_l1_der (
    .clk,
    .wr_en(j1_ff_valid), .wr_slot(id_ff1[QHW-1:0]), .wr_base(j1_rbase), .wr_data(j1_der),
    .rd_slot('{id_bp2[QHW-1:0]}), .rd_row('{l1_row}), .rd_data(l1_der_rd)
  );

  delta_queue_bank #(.N(N1), .Z(Z2), .Q(QH), .NPR(NPC1), .NNR(1)) u_l1_delta (
    .clk,
    .pm_slot(id_bp2[QHW-1:0]), .pm_row(l1_row), .pm_rdata(l1_dold),
    .pm_we(l1_dwe), .pm_wdata(l1_dnew),
    .nat_slot('{id_up1[QHW-1:0]}), .nat_base('{j1_rbase}), .nat_rdata(l1_dnat)
  );

  // ---------------- junction 2 ----------------
  logic                  j2_ff_valid;
  fx_t                   j2_act [NPC2], j2_der [NPC2];
  fx_t                   l2_d [2][NPC2];

  junction #(.NL(N1), .NR(N2), .FO(FO2), .Z(Z2), .P(P2), .STEP(STEP2), .HAS_BP(1'b1)) u_j2 (
    .clk, .rst_n, .cyc,
    .ff_en(ff_en[1]), .bp_en(bp_en[1]), .up_en(up_en[1]), .eta_shift,
    .l_row(l1_row), .a_ff_mem(l1_act_rd[0]), .a_up_mem(l1_act_rd[1]),
    .der_mem(l1_der_rd[0]), .dl_old_mem(l1_dold), .dl_we(l1_dwe), .dl_new_mem(l1_dnew),
    .r_base(out_neuron), .dr_bp(l2_d[0]), .dr_up(l2_d[1]),
    .ff_valid(j2_ff_valid), .ff_act(j2_act), .ff_der(j2_der),
    .ilv_we(ilv2_we), .ilv_addr(ilv2_addr), .ilv_ofs(ilv2_ofs),
    .wcfg_we(w2_we), .wcfg_row(w2_row), .wcfg_lane(w2_lane),
    .wcfg_wdata(w2_wdata), .wcfg_rdata(w2_rdata)
  );

  // ---------------- layer 2 (output) ----------------
  output_delta #(.N(N2), .Q(QH), .NPW(NPC2), .NNR(2)) u_out (
    .clk,
    .wr_en(j2_ff_valid), .wr_slot(id_ff2[QHW-1:0]), .wr_base(out_neuron), .wr_act(j2_act),
    .label(labels[id_ff2[QIW-1:0]]),
    .rd_slot('{id_bp2[QHW-1:0], id_up2[QHW-1:0]}), .rd_base(out_neuron), .rd_delta(l2_d)
  );

  assign out_valid = j2_ff_valid;
  assign out_id    = id_ff2;
  assign out_act   = j2_act;

endmodule
