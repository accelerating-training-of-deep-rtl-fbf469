// junction_tb: one junction with fan-in larger than its parallelism
// (16 -> 2 neurons, fan-out 4, Z = 8: fan-in 32, so one right neuron spans 4
// cycles and 8 cycles make a slot), backpropagation built in. The testbench
// plays the left layer's activation, derivative and delta banks and the
// right layer's delta storage, runs two slots with FF, BP and UP all active
// on different data, and compares the FF outputs, the accumulated left
// deltas and every updated weight with a neuron-oriented reference computed
// from the connection rule. It also checks that one slot takes C = 8 cycles.
module junction_tb;
  import sen_pkg::*;
  localparam int NL = 16, NR = 2, FO = 4, Z = 8, P = 3, STEP = 5;
  localparam int E = NL*FO, FI = E/NR, C = E/Z, DL = NL/Z;
  localparam logic [3:0] ETA = 4'd1;

  logic clk = 0, rst_n = 0;
  logic [2:0] cyc = 0;
  logic ff_en = 0, bp_en = 0, up_en = 0;
  logic [3:0] eta_shift = ETA;
  logic l_row;
  fx_t a_ff_mem [Z], a_up_mem [Z], der_mem [Z], dl_old_mem [Z], dl_new_mem [Z];
  logic dl_we;
  logic r_base;
  fx_t dr_bp [1], dr_up [1];
  logic ff_valid;
  fx_t ff_act [1], ff_der [1];
  logic ilv_we = 0;
  logic [2:0] ilv_addr = 0, ilv_ofs = 0;
  logic wcfg_we = 0;
  logic [2:0] wcfg_row = 0, wcfg_lane = 0;
  fx_t wcfg_wdata = 0, wcfg_rdata;

  junction #(.NL(NL), .NR(NR), .FO(FO), .Z(Z), .P(P), .STEP(STEP), .HAS_BP(1'b1)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // banks played by the testbench
  fx_t aff [NL], aup [NL], der [NL], dl [NL];
  fx_t drb [NR], dru [NR];
  always_comb begin
    for (int m = 0; m < Z; m++) begin
      a_ff_mem[m]   = aff[int'(l_row)*Z + m];
      a_up_mem[m]   = aup[int'(l_row)*Z + m];
      der_mem[m]    = der[int'(l_row)*Z + m];
      dl_old_mem[m] = dl[int'(l_row)*Z + m];
    end
    dr_bp[0] = drb[r_base];
    dr_up[0] = dru[r_base];
  end
  always @(posedge clk)
    if (dl_we) for (int m = 0; m < Z; m++) dl[int'(l_row)*Z + m] <= dl_new_mem[m];

  fx_t got_act [NR], got_der [NR];
  int  n_valid = 0;
  always @(posedge clk)
    if (ff_valid) begin
      got_act[r_base] <= ff_act[0];
      got_der[r_base] <= ff_der[0];
      n_valid <= n_valid + 1;
    end

  // reference
  fx_t gw [E];
  function automatic int left(int e);
    int n = e / Z, j = e % Z;
    return (n % DL) * Z + (P*j + (n*STEP) % Z) % Z;
  endfunction

  task automatic run_slot();
    fx_t want_act [NR], want_der [NR], part [NL];
    acc_t s;
    for (int i = 0; i < NL; i++) begin
      aff[i] = fx_t'($urandom_range(0, 128));
      aup[i] = fx_t'($urandom_range(0, 128));
      der[i] = ($urandom_range(0, 3) == 0) ? fx_t'(0) : FX_QTR;
      dl[i]  = fx_t'($urandom_range(0, 1023));   // stale contents
    end
    for (int k = 0; k < NR; k++) begin
      drb[k] = fx_t'($urandom_range(0, 256) - 128);
      dru[k] = fx_t'($urandom_range(0, 256) - 128);
    end
    for (int k = 0; k < NR; k++) begin
      s = 0;
      for (int e = k*FI; e < (k+1)*FI; e++) s += mul_full(gw[e], aff[left(e)]);
      want_act[k] = act_f(s); want_der[k] = act_df(s);
    end
    for (int n = 0; n < C; n++)
      for (int j = 0; j < Z; j++) begin
        int e, i;
        fx_t v;
        e = n*Z + j; i = left(e);
        v = mul(gw[e], drb[e / FI]);
        part[i] = (n < DL) ? v : add(part[i], v);
        if (n >= C - DL) part[i] = mul(der[i], part[i]);
      end
    n_valid = 0;
    for (int n = 0; n < C; n++) begin
      @(negedge clk);
      cyc = 3'(n); ff_en = 1; bp_en = 1; up_en = 1;
    end
    @(negedge clk);
    ff_en = 0; bp_en = 0; up_en = 0;
    for (int e = 0; e < E; e++) gw[e] = upd(gw[e], aup[left(e)], dru[e / FI], ETA);
    @(negedge clk);
    check(n_valid == NR, $sformatf("%0d right neurons finished in %0d cycles, want %0d", n_valid, C, NR));
    for (int k = 0; k < NR; k++) begin
      check(got_act[k] === want_act[k], $sformatf("act[%0d] got %0d want %0d", k, got_act[k], want_act[k]));
      check(got_der[k] === want_der[k], $sformatf("der[%0d]", k));
    end
    for (int i = 0; i < NL; i++)
      check(dl[i] === part[i], $sformatf("left delta %0d got %0d want %0d", i, dl[i], part[i]));
    for (int e = 0; e < E; e++) begin
      wcfg_row = 3'(e / Z); wcfg_lane = 3'(e % Z); #1;
      check(wcfg_rdata === gw[e], $sformatf("weight %0d got %0d want %0d", e, wcfg_rdata, gw[e]));
    end
  endtask

  initial begin
    for (int e = 0; e < E; e++) gw[e] = fx_t'($urandom_range(0, 128) - 64);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < E; e++) begin
      @(negedge clk);
      wcfg_we = 1; wcfg_row = 3'(e / Z); wcfg_lane = 3'(e % Z); wcfg_wdata = gw[e];
    end
    @(negedge clk); wcfg_we = 0;
    run_slot();
    run_slot();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
