// output_delta_tb: writes output activations (2 neurons per cycle) for four
// inputs with different labels and checks the stored deltas a - onehot(label)
// on both read ports, computed here from the activations and labels.
module output_delta_tb;
  import sen_pkg::*;
  localparam int N = 16, Q = 4, NPW = 2, NNR = 2;

  logic clk = 0, wr_en = 0;
  logic [1:0] wr_slot = 0;
  logic [3:0] wr_base = 0, label = 0, rd_base = 0;
  fx_t wr_act [NPW];
  logic [1:0] rd_slot [NNR];
  fx_t rd_delta [NNR][NPW];
  fx_t act_v [Q][N];
  int  lab [Q];

  output_delta #(.N(N), .Q(Q), .NPW(NPW), .NNR(NNR)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NPW; i++) wr_act[i] = '0;
    rd_slot[0] = 0; rd_slot[1] = 0;
    for (int q = 0; q < Q; q++) begin
      lab[q] = (q * 5 + 3) % N;
      for (int b = 0; b < N; b += NPW) begin
        @(negedge clk);
        wr_en = 1; wr_slot = 2'(q); wr_base = 4'(b); label = 4'(lab[q]);
        for (int i = 0; i < NPW; i++) begin
          act_v[q][b+i] = fx_t'($urandom_range(0, 128));
          wr_act[i] = act_v[q][b+i];
        end
      end
    end
    @(negedge clk); wr_en = 0;
    for (int q = 0; q < Q; q++)
      for (int b = 0; b < N; b += NPW) begin
        rd_slot[0] = 2'(q); rd_slot[1] = 2'((q + 2) % Q); rd_base = 4'(b); #1;
        for (int i = 0; i < NPW; i++) begin
          int q2, want0, want1;
          q2    = (q + 2) % Q;
          want0 = int'(act_v[q][b+i]) - ((b+i == lab[q]) ? 128 : 0);
          want1 = int'(act_v[q2][b+i]) - ((b+i == lab[q2]) ? 128 : 0);
          check(int'(rd_delta[0][i]) == want0, $sformatf("slot %0d neuron %0d got %0d want %0d", q, b+i, rd_delta[0][i], want0));
          check(int'(rd_delta[1][i]) == want1, "second port");
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
