// delta_queue_bank_tb: writes whole rows of a (64 neurons, 32 memories, 4
// slots) delta bank through the permuted-order read-modify-write port,
// checks the same port's read data, then reads every neuron of every slot
// through the natural-order port, 4 neurons at a time, and checks that
// neuron i is memory i mod 32 at row i / 32 of its slot.
module delta_queue_bank_tb;
  import sen_pkg::*;
  localparam int N = 64, Z = 32, Q = 4, NPR = 4, NNR = 1, D = N / Z;

  logic clk = 0, pm_we = 0;
  logic [1:0] pm_slot = 0;
  logic       pm_row = 0;
  fx_t pm_rdata [Z], pm_wdata [Z];
  logic [1:0] nat_slot [NNR];
  logic [5:0] nat_base [NNR];
  fx_t nat_rdata [NNR][NPR];
  fx_t ref_v [Q][N];

  delta_queue_bank #(.N(N), .Z(Z), .Q(Q), .NPR(NPR), .NNR(NNR)) dut (.*);

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

  initial begin
    nat_slot[0] = '0; nat_base[0] = '0;
    for (int m = 0; m < Z; m++) pm_wdata[m] = '0;
    for (int q = 0; q < Q; q++)
      for (int r = 0; r < D; r++) begin
        @(negedge clk);
        pm_we = 1; pm_slot = 2'(q); pm_row = 1'(r);
        for (int m = 0; m < Z; m++) begin
          pm_wdata[m] = fx_t'($urandom_range(0, 1023));
          ref_v[q][r*Z + m] = pm_wdata[m];
        end
      end
    @(negedge clk); pm_we = 0;
    for (int q = 0; q < Q; q++)
      for (int r = 0; r < D; r++) begin
        pm_slot = 2'(q); pm_row = 1'(r); #1;
        for (int m = 0; m < Z; m++) check(pm_rdata[m] === ref_v[q][r*Z + m], "permuted read");
      end
    for (int q = 0; q < Q; q++)
      for (int b = 0; b < N; b += NPR) begin
        nat_slot[0] = 2'(q); nat_base[0] = 6'(b); #1;
        for (int i = 0; i < NPR; i++)
          check(nat_rdata[0][i] === ref_v[q][b+i], $sformatf("natural read slot %0d neuron %0d", q, b+i));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
