// training_workload_tb: online training of the default (1024, 64, 16)
// trainer on a synthetic 16-class task standing in for digit images.
//
// Each class has a random binary prototype image (pixels 0 or 1.0); every
// training input is its class prototype with a few percent of pixels flipped.
// The testbench streams NTRAIN inputs back to back (one per 16-cycle slot),
// classifies each from the arg-max of its streamed output activations, and
// compares the accuracy over the first and the last WIN inputs: training has
// to raise it above chance and above where it started. It also checks the
// sustained rate of one input per 16 cycles.
module training_workload_tb;
  import sen_pkg::*;

  localparam int N0 = 1024, N2 = 16, C = 16, NPI = N0 / C;
  localparam int Z1 = 512, Z2 = 32;
  localparam int NTRAIN = 800, WIN = 100, FLIP_PCT = 4;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, train_en = 1'b1;
  logic [3:0] eta_shift = 4'd3;
  logic in_valid = 1'b0;
  fx_t  in_data [NPI];
  logic [3:0] in_label = '0;
  logic [3:0] cyc;
  logic slot_end, busy, out_valid;
  logic [7:0] out_id;
  logic [3:0] out_neuron;
  fx_t  out_act [1];
  logic w1_we = 0, w2_we = 0, ilv1_we = 0, ilv2_we = 0;
  logic [3:0] w1_row = 0, w2_row = 0, ilv1_addr = 0, ilv2_addr = 0;
  logic [8:0] w1_lane = 0, ilv1_ofs = 0;
  logic [4:0] w2_lane = 0, ilv2_ofs = 0;
  fx_t w1_wdata = 0, w2_wdata = 0, w1_rdata, w2_rdata;

  sparse_dnn_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit proto [N2][N0];
  int lab [NTRAIN + 8];
  int correct_first = 0, correct_last = 0, n_classified = 0;
  int slots = 0, run_cycles = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // arg-max over the streamed output neurons of each input (input id k+1
  // is the k-th training input; ids wrap at 256)
  int   best_n, cur_in;
  fx_t  best_v;
  always @(posedge clk) begin
    if (rst_n && run) run_cycles++;
    if (rst_n && slot_end) slots++;
    if (rst_n && out_valid) begin
      if (out_neuron == 0 || out_act[0] > best_v) begin
        best_v = out_act[0];
        best_n = int'(out_neuron);
      end
      if (out_neuron == 4'(N2 - 1)) begin
        cur_in = n_classified;
        if (cur_in < WIN && best_n == lab[cur_in]) correct_first++;
        if (cur_in >= NTRAIN - WIN && best_n == lab[cur_in]) correct_last++;
        n_classified++;
      end
    end
  end

  initial begin
    for (int i = 0; i < NPI; i++) in_data[i] = '0;
    for (int c = 0; c < N2; c++)
      for (int i = 0; i < N0; i++) proto[c][i] = bit'($urandom_range(0, 1));
    for (int k = 0; k < NTRAIN + 8; k++) lab[k] = $urandom_range(0, N2-1);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < C*Z1; e++) begin
      @(negedge clk); w1_we = 1; w1_row = 4'(e / Z1); w1_lane = 9'(e % Z1);
      w1_wdata = fx_t'($urandom_range(0, 32) - 16);
    end
    for (int e = 0; e < C*Z2; e++) begin
      @(negedge clk); w1_we = 0; w2_we = 1; w2_row = 4'(e / Z2); w2_lane = 5'(e % Z2);
      w2_wdata = fx_t'($urandom_range(0, 64) - 32);
    end
    @(negedge clk); w2_we = 0;
    // slot t loads training input t; the extra slots drain the pipeline
    for (int t = 0; t < NTRAIN + 6; t++) begin
      for (int n = 0; n < C; n++) begin
        @(negedge clk);
        run = 1'b1;
        in_valid = (t < NTRAIN);
        in_label = 4'(lab[t]);
        for (int i = 0; i < NPI; i++) begin
          bit px;
          px = proto[lab[t]][n*NPI + i];
          if ($urandom_range(0, 99) < FLIP_PCT) px = !px;
          in_data[i] = px ? FX_ONE : fx_t'(0);
        end
      end
    end
    @(negedge clk);
    run = 1'b0;
    $display("accuracy first %0d inputs: %0d%%, last %0d inputs: %0d%%",
             WIN, correct_first * 100 / WIN, WIN, correct_last * 100 / WIN);
    checks++; if (n_classified != NTRAIN) begin failures++; $display("FAIL: classified %0d", n_classified); end
    checks++; if (busy) begin failures++; $display("FAIL: not drained"); end
    checks++; if (run_cycles != slots * C) begin failures++; $display("FAIL: rate"); end
    checks++; if (correct_last * 100 / WIN < 50) begin failures++; $display("FAIL: final accuracy too low"); end
    checks++; if (correct_last <= correct_first) begin failures++; $display("FAIL: no learning"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
