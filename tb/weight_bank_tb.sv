// weight_bank_tb: loads a small weight bank through the configuration port,
// reads it back row by row and word by word, then performs row write-backs
// (also while a configuration write is requested, which must lose) and checks
// the contents against a reference array.
module weight_bank_tb;
  import sen_pkg::*;
  localparam int Z = 8, C = 4;

  logic clk = 0;
  logic [1:0] rd_row = 0, wr_row = 0, cfg_row = 0;
  logic [2:0] cfg_lane = 0;
  logic wr_en = 0, cfg_we = 0;
  fx_t rd_data [Z], wr_data [Z], cfg_wdata = 0, cfg_rdata;
  fx_t ref_w [C][Z];

  weight_bank #(.Z(Z), .C(C)) dut (.*);

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

  task automatic compare_all();
    for (int r = 0; r < C; r++) begin
      rd_row = 2'(r);
      for (int j = 0; j < Z; j++) begin
        cfg_row = 2'(r); cfg_lane = 3'(j); #1;
        check(rd_data[j] === ref_w[r][j], $sformatf("row %0d lane %0d", r, j));
        check(cfg_rdata === ref_w[r][j], "cfg read");
      end
    end
  endtask

  initial begin
    for (int j = 0; j < Z; j++) wr_data[j] = '0;
    for (int r = 0; r < C; r++)
      for (int j = 0; j < Z; j++) begin
        @(negedge clk);
        ref_w[r][j] = fx_t'($urandom_range(0, 1023));
        cfg_we = 1; cfg_row = 2'(r); cfg_lane = 3'(j); cfg_wdata = ref_w[r][j];
      end
    @(negedge clk); cfg_we = 0;
    compare_all();
    // row writes; a simultaneous configuration write must be ignored
    for (int k = 0; k < 6; k++) begin
      int r;
      @(negedge clk);
      r = $urandom_range(0, C-1);
      wr_en = 1; wr_row = 2'(r);
      for (int j = 0; j < Z; j++) begin
        wr_data[j] = fx_t'($urandom_range(0, 1023));
        ref_w[r][j] = wr_data[j];
      end
      cfg_we = 1; cfg_row = 2'((r + 1) % C); cfg_lane = 3'(k); cfg_wdata = 10'h155;
    end
    @(negedge clk); wr_en = 0; cfg_we = 0;
    compare_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
