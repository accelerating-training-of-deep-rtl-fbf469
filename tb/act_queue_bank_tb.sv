// act_queue_bank_tb: fills every queue slot of a (64 neurons, 32 memories,
// 4 slots) bank through the natural-order write port, 4 neurons per cycle,
// then reads every row of every slot through both permuted-order ports (with
// different slots on the two ports) and checks that memory m of row r holds
// neuron r*32 + m of that slot. A second pass overwrites one slot and checks
// that the others are untouched.
module act_queue_bank_tb;
  import sen_pkg::*;
  localparam int N = 64, Z = 32, Q = 4, NPW = 4, NRD = 2, D = N / Z;

  logic clk = 0, wr_en = 0;
  logic [1:0] wr_slot = 0;
  logic [5:0] wr_base = 0;
  fx_t wr_data [NPW];
  logic [1:0] rd_slot [NRD];
  logic       rd_row  [NRD];
  fx_t rd_data [NRD][Z];
  fx_t ref_v [Q][N];

  act_queue_bank #(.N(N), .Z(Z), .Q(Q), .NPW(NPW), .NRD(NRD)) dut (.*);

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

  task automatic fill(int q);
    for (int b = 0; b < N; b += NPW) begin
      @(negedge clk);
      wr_en = 1; wr_slot = 2'(q); wr_base = 6'(b);
      for (int i = 0; i < NPW; i++) begin
        wr_data[i] = fx_t'($urandom_range(0, 1023));
        ref_v[q][b+i] = wr_data[i];
      end
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic read_all();
    for (int q = 0; q < Q; q++)
      for (int r = 0; r < D; r++) begin
        rd_slot[0] = 2'(q); rd_row[0] = 1'(r);
        rd_slot[1] = 2'((q + 1) % Q); rd_row[1] = 1'(r);
        #1;
        for (int m = 0; m < Z; m++) begin
          check(rd_data[0][m] === ref_v[q][r*Z + m], $sformatf("port0 slot %0d row %0d mem %0d", q, r, m));
          check(rd_data[1][m] === ref_v[(q+1)%Q][r*Z + m], "port1");
        end
      end
  endtask

  initial begin
    for (int i = 0; i < NPW; i++) wr_data[i] = '0;
    for (int p = 0; p < NRD; p++) begin rd_slot[p] = '0; rd_row[p] = '0; end
    for (int q = 0; q < Q; q++) fill(q);
    read_all();
    fill(2);
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
