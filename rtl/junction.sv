// junction: edge processor between a left layer (NL neurons) and a right layer
// (NR neurons) with pre-defined sparse connectivity, fan-out FO per left
// neuron, and degree of parallelism Z (edges processed per cycle).
//
// The junction has E = NL*FO edges, each right neuron FI = E/NR of them. It
// sweeps its weight bank row by row, one row of Z weights per cycle, C = E/Z
// cycles per training input. Lane j of cycle n holds edge n*Z + j (natural
// order); its right neuron follows from the edge number, its left neuron from
// the interleaver (permuted order). In the same cycle and on the same row of
// weights, three operations run on three different training inputs:
//   FF  products w*a for the row are summed per right neuron (groups of
//       G = min(FI,Z) lanes, NPC = Z/G neurons per cycle; when FI > Z one
//       neuron spans CPN = FI/Z cycles and is accumulated in a register),
//       then the activation and its derivative leave through ff_* for the
//       right layer's banks. Full-precision sum, one rounding at the end.
//   BP  w * delta_right per lane, scattered back to memory order, added into
//       the left layer's delta bank (first visit overwrites, later visits
//       accumulate, saturating at 10 bits); at the last of the FO visits the
//       sum is multiplied by the left activation derivative. Only built if
//       HAS_BP (the first junction has no left layer that needs deltas).
//   UP  w - 2^-eta * a_left * delta_right per lane; the new row is registered
//       and written back in the next cycle.
// Everything from bank read to bank write is combinational within a cycle;
// the only state is the interleaver table, the weight bank, the FF
// accumulator (CPN > 1) and the one-row update register.
// Interface: l_row selects the row read in every left-layer memory; the left
// banks answer combinationally in memory order (a_ff_mem, a_up_mem, der_mem,
// dl_old_mem). r_base is the first right neuron of the cycle; the right
// layer's delta storage answers with dr_bp/dr_up. Edge processing, the single
// weight bank and the three parallel operations follow the text; the lane
// grouping, rounding and write-back register are this design's choices.
module junction import sen_pkg::*; #(
  parameter int unsigned NL   = 1024,
  parameter int unsigned NR   = 64,
  parameter int unsigned FO   = 8,
  parameter int unsigned Z    = 512,
  parameter int unsigned P    = 317,
  parameter int unsigned STEP = 97,
  parameter bit          HAS_BP = 1'b1,
  localparam int unsigned E   = NL * FO,
  localparam int unsigned FI  = E / NR,
  localparam int unsigned C   = E / Z,
  localparam int unsigned DL  = NL / Z,
  localparam int unsigned G   = (FI < Z) ? FI : Z,
  localparam int unsigned NPC = Z / G,
  localparam int unsigned CPN = FI / G,
  localparam int unsigned ZW  = (Z  > 1) ? $clog2(Z)  : 1,
  localparam int unsigned CW  = (C  > 1) ? $clog2(C)  : 1,
  localparam int unsigned RW  = (DL > 1) ? $clog2(DL) : 1,
  localparam int unsigned NW  = (NR > 1) ? $clog2(NR) : 1
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] cyc,
  input  logic          ff_en,
  input  logic          bp_en,
  input  logic          up_en,
  input  logic [3:0]    eta_shift,
  // left layer banks
  output logic [RW-1:0] l_row,
  input  fx_t           a_ff_mem   [Z],
  input  fx_t           a_up_mem   [Z],
  input  fx_t           der_mem    [Z],
  input  fx_t           dl_old_mem [Z],
  output logic          dl_we,
  output fx_t           dl_new_mem [Z],
  // right layer
  output logic [NW-1:0] r_base,
  input  fx_t           dr_bp [NPC],
  input  fx_t           dr_up [NPC],
  output logic          ff_valid,
  output fx_t           ff_act [NPC],
  output fx_t           ff_der [NPC],
  // configuration
  input  logic          ilv_we,
  input  logic [CW-1:0] ilv_addr,
  input  logic [ZW-1:0] ilv_ofs,
  input  logic          wcfg_we,
  input  logic [CW-1:0] wcfg_row,
  input  logic [ZW-1:0] wcfg_lane,
  input  fx_t           wcfg_wdata,
  output fx_t           wcfg_rdata
);

  if (E % Z != 0) begin : g_check1
    $error("junction: Z must divide NL*FO");
  end
  if (E % NR != 0) begin : g_check2
    $error("junction: NR must divide NL*FO");
  end
  if (NL % Z != 0) begin : g_check3
    $error("junction: Z must divide NL");
  end
  if (Z % G != 0) begin : g_check4
    $error("junction: fan-in and Z must be powers of two");
  end

  // ---------------- interleaver and weights ----------------
  logic [ZW-1:0] ofs;
  logic          first_visit, last_visit;

  interleaver #(.Z(Z), .C(C), .DL(DL), .STEP(STEP)) u_ilv (
    .clk, .rst_n, .cyc,
    .cfg_we(ilv_we), .cfg_addr(ilv_addr), .cfg_ofs(ilv_ofs),
    .ofs, .row(l_row), .first_visit, .last_visit
  );

  fx_t           w     [Z];
  logic          up_pend;
  logic [CW-1:0] up_row;
  fx_t           up_data [Z];

  weight_bank #(.Z(Z), .C(C)) u_wb (
    .clk, .rd_row(cyc), .rd_data(w),
    .wr_en(up_pend), .wr_row(up_row), .wr_data(up_data),
    .cfg_we(wcfg_we), .cfg_row(wcfg_row), .cfg_lane(wcfg_lane),
    .cfg_wdata(wcfg_wdata), .cfg_rdata(wcfg_rdata)
  );

  // right neuron of the cycle
  assign r_base = (CPN == 1) ? NW'(int'(cyc) * NPC) : NW'(int'(cyc) / CPN);

  // ---------------- feedforward ----------------
  fx_t  a_ff [Z];
  acc_t gsum [NPC];
  acc_t tot  [NPC];
  acc_t ff_acc;

  lane_perm #(.Z(Z), .P(P), .SCATTER(1'b0)) u_g_ff (.s(ofs), .din(a_ff_mem), .dout(a_ff));

  always_comb begin
    for (int g = 0; g < NPC; g++) begin
      gsum[g] = '0;
      for (int k = 0; k < G; k++) gsum[g] += mul_full(w[g*G + k], a_ff[g*G + k]);
      tot[g] = (CPN > 1 && (int'(cyc) % CPN) != 0) ? ff_acc + gsum[g] : gsum[g];
      ff_act[g] = act_f(tot[g]);
      ff_der[g] = act_df(tot[g]);
    end
  end

  assign ff_valid = ff_en && (CPN == 1 || (int'(cyc) % CPN) == CPN - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     ff_acc <= '0;
    else if (ff_en) ff_acc <= tot[0];
  end

  // ---------------- backpropagation ----------------
  if (HAS_BP) begin : g_bp
    fx_t bp_lane [Z];
    fx_t bp_mem  [Z];
    always_comb begin
      for (int j = 0; j < Z; j++) bp_lane[j] = mul(w[j], dr_bp[j / G]);
    end
    lane_perm #(.Z(Z), .P(P), .SCATTER(1'b1)) u_s_bp (.s(ofs), .din(bp_lane), .dout(bp_mem));
    always_comb begin
      for (int m = 0; m < Z; m++) begin
        fx_t part;
        part = first_visit ? bp_mem[m] : add(dl_old_mem[m], bp_mem[m]);
        dl_new_mem[m] = last_visit ? mul(der_mem[m], part) : part;
      end
    end
    assign dl_we = bp_en;
  end else begin : g_no_bp
    always_comb for (int m = 0; m < Z; m++) dl_new_mem[m] = '0;
    assign dl_we = 1'b0;
  end

  // ---------------- weight update ----------------
  fx_t a_up [Z];
  lane_perm #(.Z(Z), .P(P), .SCATTER(1'b0)) u_g_up (.s(ofs), .din(a_up_mem), .dout(a_up));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_pend <= 1'b0;
      up_row  <= '0;
    end else begin
      up_pend <= up_en;
      up_row  <= cyc;
    end
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < Z; j++) up_data[j] <= upd(w[j], a_up[j], dr_up[j / G], eta_shift);
  end

endmodule
