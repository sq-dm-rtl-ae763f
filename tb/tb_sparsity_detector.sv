// tb_sparsity_detector: feeds random channels row by row at densities around
// the threshold and checks the zero count and the dense/sparse decision
// (zeros*100 > 30*P*Q), including the exact boundary.
module tb_sparsity_detector;
  import sqdm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr = 0, row_valid = 0, is_sparse;
  logic [W_MAX-1:0][7:0] row_val = '0;
  logic [WW-1:0] q = '0;
  logic [HW-1:0] p = '0;
  logic [31:0] zero_count;
  int checks = 0, failures = 0;

  sparsity_detector dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_channel(int pp, int qq, int zero_pct, int force_zeros);
    int zeros;
    zeros = 0;
    p = HW'(pp); q = WW'(qq);
    @(negedge clk); clr = 1;
    @(negedge clk); clr = 0;
    for (int r = 0; r < pp; r++) begin
      for (int c = 0; c < W_MAX; c++) begin
        if (force_zeros >= 0) row_val[c] = (r * qq + c < force_zeros && c < qq) ? 8'd0 : 8'd1;
        else row_val[c] = (int'($urandom_range(1, 100)) <= zero_pct) ? 8'd0 : 8'($urandom_range(1, 255));
        if (c < qq && row_val[c] == 0) zeros++;
      end
      row_valid = 1;
      @(negedge clk);
      row_valid = 0;
    end
    checks += 2;
    if (zero_count != 32'(zeros)) failures++;
    if (is_sparse != (zeros * 100 > 30 * pp * qq)) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++)
      run_channel(int'($urandom_range(1, 16)), int'($urandom_range(1, W_MAX)), int'($urandom_range(10, 50)), -1);
    // boundary: 10x10 channel, 30 zeros is dense, 31 is sparse
    run_channel(10, 10, 0, 30);
    checks++; if (is_sparse) failures++;
    run_channel(10, 10, 0, 31);
    checks++; if (!is_sparse) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
