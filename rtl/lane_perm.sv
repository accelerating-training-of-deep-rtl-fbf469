// lane_perm: the permutation network between the z memories of a layer bank
// and the z edge lanes of a junction.
//
// Lane j of a cycle is wired to memory m(j) = (P*j + s) mod Z, where P is a
// fixed odd stride (pure wiring) and s the per-cycle offset produced by the
// interleaver. Because Z is a power of two and P is odd, j -> m(j) is a
// bijection for every s, so the z lanes always touch z different memories:
// the access is clash-free. The variable part is a logarithmic barrel
// rotation (log2(Z) stages of 2:1 multiplexers).
//   SCATTER = 0 (gather):  dout[j] = din[(P*j + s) mod Z]   memory -> lane
//   SCATTER = 1 (scatter): dout[(P*j + s) mod Z] = din[j]   lane -> memory
// Purely combinational. The affine form of the map is this design's choice;
// the interleaver algorithm itself is not spelled out in the text.
module lane_perm import sen_pkg::*; #(
  parameter int unsigned Z       = 32,
  parameter int unsigned P       = 1,
  parameter bit          SCATTER = 1'b0,
  localparam int unsigned ZW     = (Z > 1) ? $clog2(Z) : 1
)(
  input  logic [ZW-1:0] s,
  input  fx_t           din  [Z],
  output fx_t           dout [Z]
);

  if ((Z & (Z-1)) != 0) begin : g_check1
    $error("lane_perm: Z must be a power of two");
  end
  if ((P % 2) == 0) begin : g_check2
    $error("lane_perm: P must be odd");
  end

  // rotation amount: gather rotates left by s, scatter right by s
  logic [ZW-1:0] rot;
  assign rot = SCATTER ? ZW'(Z - int'(s)) : s;

  fx_t pre [Z];   // before the barrel rotation
  fx_t post [Z];  // after it

  // fixed stride wiring on the input side (scatter) or output side (gather)
  always_comb begin
    for (int j = 0; j < Z; j++) begin
      if (SCATTER) pre[(P*j) % Z] = din[j];
      else         pre[j]         = din[j];
    end
  end

  always_comb begin
    fx_t stage [Z];
    fx_t tmp [Z];
    stage = pre;
    for (int b = 0; b < ZW; b++) begin
      tmp = stage;
      for (int u = 0; u < Z; u++) stage[u] = rot[b] ? tmp[(u + (1 << b)) % Z] : tmp[u];
    end
    post = stage;
  end

  always_comb begin
    for (int j = 0; j < Z; j++) begin
      if (SCATTER) dout[j] = post[j];
      else         dout[j] = post[(P*j) % Z];
    end
  end

endmodule
