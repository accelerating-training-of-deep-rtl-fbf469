// pipeline_ctrl_tb: runs the schedule with C = 4 cycles per slot and J = 2
// junctions over a pattern of real, missing and inference-only inputs with a
// stall, and checks in every cycle the cycle counter, slot end, slot counter
// and each junction's FF/BP/UP enables against the schedule
// FF(t-j), BP(t-(2J-1-j)), UP(t-(2J-j)) kept here as a list of inputs.
module pipeline_ctrl_tb;
  localparam int C = 4, J = 2, TW = 8, NS = 20;

  logic clk = 0, rst_n = 0, run = 0, train_en = 0, load_valid = 0;
  logic [1:0] cyc;
  logic slot_end, busy;
  logic [TW-1:0] t;
  logic ff_en [J], bp_en [J], up_en [J];

  pipeline_ctrl #(.C(C), .J(J), .TW(TW)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit real_in [-8:NS+1], train_in [-8:NS+1];
  int n_stall = 0;
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

  initial begin
    for (int i = -8; i <= NS + 1; i++) begin real_in[i] = 0; train_in[i] = 0; end
    for (int i = 1; i <= 12; i++) begin
      real_in[i]  = (i != 4);
      train_in[i] = real_in[i] && (i != 7) && (i != 8);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      for (int n = 0; n < C; n++) begin
        @(negedge clk);
        if (s == 5 && n == 2) begin
          run = 0; #1;
          for (int j = 0; j < J; j++) check(!ff_en[j] && !bp_en[j] && !up_en[j], "enables low in stall");
          check(!slot_end, "no slot end in stall");
          @(negedge clk); @(negedge clk);
          n_stall++;
        end
        run = 1;
        load_valid = (n == C - 1) ? real_in[s+1] : 1'b0;
        train_en = train_in[s+1];
        #1;
        check(int'(cyc) == n, "cycle counter");
        check(int'(t) == s, "slot counter");
        check(slot_end == (n == C - 1), "slot_end");
        for (int j = 0; j < J; j++) begin
          check(ff_en[j] == real_in[s-j], $sformatf("ff_en[%0d] slot %0d", j, s));
          check(bp_en[j] == train_in[s-(2*J-1-j)], $sformatf("bp_en[%0d] slot %0d", j, s));
          check(up_en[j] == train_in[s-(2*J-j)], $sformatf("up_en[%0d] slot %0d", j, s));
        end
      end
    end
    check(!busy, "drained");
    check(n_stall == 1, "stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
