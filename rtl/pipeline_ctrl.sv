// pipeline_ctrl: cycle counter and junction-pipelining schedule.
//
// Every junction takes the same C cycles to pass all its edges once (a slot).
// Slot counter t numbers the training inputs: during slot t the input loaded
// in slot t-1 enters junction 1. With J junctions (j = 0..J-1 here), junction j
// performs in slot t, all at once:
//   feedforward      on input t - j
//   backpropagation  on input t - (2J-1-j)
//   weight update    on input t - (2J-j)
// For J = 2: the second junction does FF on n+1, BP on n and UP with the
// results of n-1 while the first does FF on n+2, BP on n-1 and UP with n-2.
// A shift register vh keeps one valid bit per input in flight (vh[k]: input
// t-k is real), so the pipeline fills and drains with bubbles when the host
// supplies no input. run = 0 freezes everything (global stall). train_en is
// sampled with the input at the end of the slot that loads it and travels in
// a second shift register th: an input loaded with train_en = 0 is only
// inferred (feedforward), never backpropagated or learned from. The schedule is
// the one the text describes; the valid history, run and train_en are this
// design's choices.
module pipeline_ctrl #(
  parameter int unsigned C  = 16,
  parameter int unsigned J  = 2,
  parameter int unsigned TW = 8,
  localparam int unsigned CW = (C > 1) ? $clog2(C) : 1,
  localparam int unsigned HL = 2*J + 1
)(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          train_en,
  input  logic          load_valid,   // input loaded this slot is complete; sampled at slot end
                                      // together with train_en
  output logic [CW-1:0] cyc,
  output logic          slot_end,
  output logic [TW-1:0] t,
  output logic          ff_en [J],
  output logic          bp_en [J],
  output logic          up_en [J],
  output logic          busy          // some input is still in flight
);

  logic [HL-1:0] vh;   // vh[k]: input t-k is real
  logic [HL-1:0] th;   // th[k]: input t-k is to be trained on

  assign slot_end = run && (int'(cyc) == C - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= '0;
      t   <= '0;
      vh  <= '0;
      th  <= '0;
    end else if (run) begin
      if (int'(cyc) == C - 1) begin
        cyc <= '0;
        t   <= t + 1'b1;
        vh  <= {vh[HL-2:0], load_valid};
        th  <= {th[HL-2:0], load_valid && train_en};
      end else begin
        cyc <= cyc + 1'b1;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < J; j++) begin
      ff_en[j] = run && vh[j];
      bp_en[j] = run && th[2*J-1-j];
      up_en[j] = run && th[2*J-j];
    end
  end

  assign busy = |vh;

endmodule
