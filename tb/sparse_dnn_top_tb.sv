// sparse_dnn_top_tb: end-to-end test of the (1024,64,16) trainer at its
// default size.
//
// Loads random weights through the configuration ports, rewrites part of the
// second junction's interleaver table, then streams 10 training inputs with
// random pixels and labels and lets the pipeline drain. A neuron-oriented
// reference model, written from the connection rule (left neuron of edge
// n*Z+j = (n mod DL)*Z + (P*j + ofs[n]) mod Z) rather than from the lane
// hardware, replays the same junction-pipelined schedule slot by slot: every
// streamed output activation is compared, and at the end every weight of both
// junctions is read back and compared. It also checks the throughput (one
// slot of C = 16 cycles per input, counted from the DUT's slot_end) and makes
// each control mechanism happen: a bubble (input with a missing beat), a
// stall (run low), inference-only slots (train_en low) and an interleaver
// reconfiguration; a mechanism that never occurs counts as a failure.
module sparse_dnn_top_tb;
  import sen_pkg::*;

  localparam int N0 = 1024, N1 = 64, N2 = 16, FO = 8;
  localparam int Z1 = 512, Z2 = 32, P1 = 317, P2 = 19, STEP1 = 97, STEP2 = 7;
  localparam int C = 16, NPI = N0 / C, FI1 = N0*FO/N1, FI2 = N1*FO/N2;
  localparam int D0 = N0 / Z1, D1 = N1 / Z2;
  localparam int NSLOT = 16, NFEED = 10;
  localparam logic [3:0] ETA = 4'd2;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, train_en = 1'b1;
  logic in_valid = 1'b0;
  logic [3:0] eta_shift = ETA;
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
  int n_bubble = 0, n_stall = 0, n_infer = 0, n_reconf = 0, n_out = 0, n_slots = 0;

  // ---------------- reference state ----------------
  fx_t gw1 [C*Z1];            // weight of edge e
  fx_t gw2 [C*Z2];
  int  ofs1 [C], ofs2 [C];
  fx_t x   [NSLOT+2][N0];     // inputs by id
  int  lab [NSLOT+2];
  bit  vld [NSLOT+2];         // id is a real input
  fx_t h   [NSLOT+2][N1], hd [NSLOT+2][N1];
  fx_t o   [NSLOT+2][N2], d3 [NSLOT+2][N2], d2 [NSLOT+2][N1];
  bit  feed_ok [NSLOT];
  fx_t w1_init [C*Z1];
  int  n_changed = 0;
  bit  train_slot [NSLOT];   // train_en while loading the input of slot t+1
  bit  train_in [-4:NSLOT+2]; // input id is trained on

  function automatic int left1(int e);
    int n = e / Z1, j = e % Z1;
    return (n % D0) * Z1 + (P1*j + ofs1[n]) % Z1;
  endfunction
  function automatic int left2(int e);
    int n = e / Z2, j = e % Z2;
    return (n % D1) * Z2 + (P2*j + ofs2[n]) % Z2;
  endfunction

  function automatic bit ok(int id);
    return id >= 1 && id < NSLOT + 2 && vld[id];
  endfunction

  // One slot of the pipelined schedule, reference version.
  task automatic model_slot(int t);
    acc_t s;
    fx_t part [N1];
    if (ok(t)) for (int k = 0; k < N1; k++) begin
      s = 0;
      for (int e = k*FI1; e < (k+1)*FI1; e++) s += mul_full(gw1[e], x[t][left1(e)]);
      h[t][k] = act_f(s); hd[t][k] = act_df(s);
    end
    if (ok(t-1)) for (int k = 0; k < N2; k++) begin
      s = 0;
      for (int e = k*FI2; e < (k+1)*FI2; e++) s += mul_full(gw2[e], h[t-1][left2(e)]);
      o[t-1][k]  = act_f(s);
      d3[t-1][k] = (k == lab[t-1]) ? fx_t'(o[t-1][k] - FX_ONE) : o[t-1][k];
    end
    if (train_in[t-2] && ok(t-2)) begin
      for (int n = 0; n < C; n++)
        for (int j = 0; j < Z2; j++) begin
          int e = n*Z2 + j, i = left2(e);
          fx_t v = mul(gw2[e], d3[t-2][e / FI2]);
          part[i] = (n < D1) ? v : add(part[i], v);
          if (n >= C - D1) part[i] = mul(hd[t-2][i], part[i]);
        end
      for (int i = 0; i < N1; i++) d2[t-2][i] = part[i];
    end
    if (train_in[t-3] && ok(t-3))
      for (int e = 0; e < C*Z2; e++) gw2[e] = upd(gw2[e], h[t-3][left2(e)], d3[t-3][e / FI2], ETA);
    if (train_in[t-4] && ok(t-4))
      for (int e = 0; e < C*Z1; e++) gw1[e] = upd(gw1[e], x[t-4][left1(e)], d2[t-4][e / FI1], ETA);
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- output monitor ----------------
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int id;
      id = int'(out_id);
      n_out++;
      check(ok(id), $sformatf("output for unexpected input %0d", id));
      if (ok(id))
        check(out_act[0] === o[id][out_neuron],
              $sformatf("out id %0d neuron %0d: got %0d want %0d", id, out_neuron, out_act[0], o[id][out_neuron]));
    end
  end

  int first_slot_end = -1, last_slot_end = -1, run_cycles = 0;
  always @(posedge clk) begin
    if (rst_n && run) run_cycles++;
    if (rst_n && slot_end) begin
      if (first_slot_end < 0) first_slot_end = run_cycles;
      last_slot_end = run_cycles;
      n_slots++;
    end
  end

  initial begin
    for (int i = 0; i < NPI; i++) in_data[i] = '0;
    // data
    for (int id = 0; id < NSLOT + 2; id++) begin
      vld[id] = 1'b0;
      lab[id] = $urandom_range(0, N2-1);
      for (int i = 0; i < N0; i++) x[id][i] = fx_t'($urandom_range(0, 128));
    end
    for (int t = 0; t < NSLOT; t++) begin
      feed_ok[t]    = (t < NFEED) && (t != 3);  // slot 3 carries a broken input
      train_slot[t] = !(t >= 5 && t <= 6);      // two inference-only inputs
    end
    for (int t = 0; t < NSLOT; t++) vld[t+1] = feed_ok[t];
    for (int id = -4; id <= NSLOT + 2; id++) train_in[id] = (id >= 1 && id <= NSLOT) ? train_slot[id-1] : 1'b0;
    for (int n = 0; n < C; n++) begin ofs1[n] = (n*STEP1) % Z1; ofs2[n] = (n*STEP2) % Z2; end
    for (int e = 0; e < C*Z1; e++) gw1[e] = fx_t'($urandom_range(0, 64) - 32);
    for (int e = 0; e < C*Z2; e++) gw2[e] = fx_t'($urandom_range(0, 128) - 64);
    for (int e = 0; e < C*Z1; e++) w1_init[e] = gw1[e];

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // load weights
    for (int e = 0; e < C*Z1; e++) begin
      @(negedge clk); w1_we = 1; w1_row = 4'(e / Z1); w1_lane = 9'(e % Z1); w1_wdata = gw1[e];
    end
    for (int e = 0; e < C*Z2; e++) begin
      @(negedge clk); w1_we = 0; w2_we = 1; w2_row = 4'(e / Z2); w2_lane = 5'(e % Z2); w2_wdata = gw2[e];
    end
    // reconfigure half of junction 2's interleaver table
    for (int n = 0; n < C; n += 2) begin
      @(negedge clk); w2_we = 0; ilv2_we = 1; ilv2_addr = 4'(n);
      ofs2[n] = $urandom_range(0, Z2-1); ilv2_ofs = 5'(ofs2[n]); n_reconf++;
    end
    @(negedge clk); ilv2_we = 0;
    // spot-check the weight read port before training
    for (int k = 0; k < 8; k++) begin
      int e;
      e = $urandom_range(0, C*Z1-1);
      w1_row = 4'(e / Z1); w1_lane = 9'(e % Z1); #1;
      check(w1_rdata === gw1[e], "weight readback before training");
    end

    // run the pipeline
    for (int t = 0; t < NSLOT; t++) begin
      model_slot(t);
      if (!train_slot[t] && feed_ok[t]) n_infer++;
      if (!feed_ok[t] && t < NFEED) n_bubble++;
      for (int n = 0; n < C; n++) begin
        @(negedge clk);
        check(cyc == 4'(n), "cycle counter");
        if (t == 6 && n == 7) begin  // stall the pipeline for three cycles
          run = 1'b0; in_valid = 1'b1;
          repeat (3) @(negedge clk);
          n_stall++;
          check(cyc == 4'(n), "cycle counter held during stall");
        end
        run = 1'b1;
        train_en = train_slot[t];
        in_valid = (t < NFEED) && !(t == 3 && n == 5);
        in_label = 4'(lab[t+1]);
        for (int i = 0; i < NPI; i++) in_data[i] = x[t+1][n*NPI + i];
      end
    end
    @(negedge clk);
    run = 1'b0; in_valid = 1'b0;
    check(!busy, "pipeline drained");
    check(n_slots == NSLOT, $sformatf("slot count %0d", n_slots));
    check(last_slot_end - first_slot_end == (NSLOT-1)*C, "one input per 16 cycles");
    check(n_out == (NFEED-1)*N2, $sformatf("output count %0d", n_out));

    // read back all weights
    for (int e = 0; e < C*Z1; e++) begin
      w1_row = 4'(e / Z1); w1_lane = 9'(e % Z1); #1;
      if (w1_rdata !== w1_init[e]) n_changed++;
      if (w1_rdata !== gw1[e]) begin
        failures++;
        if (failures < 20) $display("FAIL: w1[%0d] got %0d want %0d", e, w1_rdata, gw1[e]);
      end
    end
    checks++;
    for (int e = 0; e < C*Z2; e++) begin
      w2_row = 4'(e / Z2); w2_lane = 5'(e % Z2); #1;
      if (w2_rdata !== gw2[e]) begin
        failures++;
        if (failures < 20) $display("FAIL: w2[%0d] got %0d want %0d", e, w2_rdata, gw2[e]);
      end
    end
    checks++;

    $display("mechanisms: bubble=%0d stall=%0d inference_slots=%0d ilv_reconfig=%0d outputs=%0d",
             n_bubble, n_stall, n_infer, n_reconf, n_out);
    check(n_changed > C*Z1/2, $sformatf("only %0d first-junction weights were trained", n_changed));
    check(n_bubble > 0, "bubble never happened");
    check(n_stall > 0,  "stall never happened");
    check(n_infer > 0,  "inference-only slot never happened");
    check(n_reconf > 0, "interleaver reconfiguration never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
