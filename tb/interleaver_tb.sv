// interleaver_tb: checks the interleaver's offset table (reset contents and
// reconfiguration), its row and first/last-visit outputs, and, through the
// lane_perm gather and scatter networks driven by its offsets, that every
// cycle's lane-to-memory map is (P*j + ofs) mod Z and a bijection
// (clash-free), with scatter the exact inverse of gather.
module interleaver_tb;
  import sen_pkg::*;
  localparam int Z = 32, C = 16, DL = 2, STEP = 7, P = 19;

  logic clk = 0, rst_n = 0;
  logic [3:0] cyc = 0, cfg_addr = 0;
  logic cfg_we = 0;
  logic [4:0] cfg_ofs = 0, ofs;
  logic row;
  logic first_visit, last_visit;
  fx_t  mem_vals [Z], lane_vals [Z], back [Z];

  interleaver #(.Z(Z), .C(C), .DL(DL), .STEP(STEP)) dut (.*);
  lane_perm #(.Z(Z), .P(P), .SCATTER(1'b0)) u_g (.s(ofs), .din(mem_vals), .dout(lane_vals));
  lane_perm #(.Z(Z), .P(P), .SCATTER(1'b1)) u_s (.s(ofs), .din(lane_vals), .dout(back));

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int exp_ofs [C];

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

  task automatic sweep();
    for (int n = 0; n < C; n++) begin
      bit seen [Z];
      cyc = 4'(n); #1;
      check(int'(ofs) == exp_ofs[n], $sformatf("ofs[%0d]=%0d want %0d", n, ofs, exp_ofs[n]));
      check(int'(row) == n % DL, "row");
      check(first_visit == (n < DL), "first_visit");
      check(last_visit == (n >= C - DL), "last_visit");
      for (int m = 0; m < Z; m++) seen[m] = 0;
      for (int j = 0; j < Z; j++) begin
        int m;
        m = (P*j + exp_ofs[n]) % Z;
        check(int'(lane_vals[j]) == m + 1, $sformatf("cycle %0d lane %0d reads memory %0d want %0d", n, j, int'(lane_vals[j]) - 1, m));
        check(!seen[int'(lane_vals[j]) - 1], "clash: memory read twice in one cycle");
        seen[int'(lane_vals[j]) - 1] = 1;
        check(back[j] == mem_vals[j], "scatter is not the inverse of gather");
      end
    end
  endtask

  initial begin
    for (int m = 0; m < Z; m++) mem_vals[m] = fx_t'(m + 1);
    for (int n = 0; n < C; n++) exp_ofs[n] = (n*STEP) % Z;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    sweep();
    // reconfigure every entry
    for (int n = 0; n < C; n++) begin
      @(negedge clk);
      exp_ofs[n] = $urandom_range(0, Z-1);
      cfg_we = 1; cfg_addr = 4'(n); cfg_ofs = 5'(exp_ofs[n]);
    end
    @(negedge clk); cfg_we = 0;
    sweep();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
