// tb_dense_dist: for random R and W, the lanes must visit every window
// position exactly once, zeros included, with correct value, row and
// column tags, in R*ceil(W/EPC) cycles with `last` on the final cycle.
module tb_dense_dist;
  import sqdm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, step = 0, busy, last;
  logic [1:0] r = 2'd3;
  logic [WW-1:0] w = WW'(W_MAX);
  logic [R_MAX-1:0][W_MAX-1:0][7:0] win_val;
  logic [EPC-1:0] lane_valid;
  logic [EPC-1:0][7:0] lane_val;
  logic [EPC-1:0][1:0] lane_row;
  logic [EPC-1:0][WW-1:0] lane_col;
  int checks = 0, failures = 0;

  dense_dist dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      int seen [R_MAX][W_MAX];
      int cyc, exp_cyc;
      r = 2'($urandom_range(1, 3));
      w = WW'($urandom_range(1, W_MAX));
      for (int i = 0; i < R_MAX; i++) for (int c = 0; c < W_MAX; c++) begin
        win_val[i][c] = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom());
        seen[i][c] = 0;
      end
      exp_cyc = int'(r) * ((int'(w) + EPC - 1) / EPC);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; step = 1;
      cyc = 0;
      while (busy && cyc < 100) begin
        for (int j = 0; j < EPC; j++) if (lane_valid[j]) begin
          seen[lane_row[j]][lane_col[j]]++;
          checks++; if (lane_val[j] != win_val[lane_row[j]][lane_col[j]]) failures++;
        end
        cyc++;
        checks++; if (last != (cyc == exp_cyc)) failures++;
        @(negedge clk);
      end
      step = 0;
      checks++; if (cyc != exp_cyc) failures++;
      for (int i = 0; i < R_MAX; i++) for (int c = 0; c < W_MAX; c++) begin
        checks++;
        if (seen[i][c] != ((i < int'(r) && c < int'(w)) ? 1 : 0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
