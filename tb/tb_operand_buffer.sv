// tb_operand_buffer: loads kernels and rows (dense and compressed), checking
// the kernel register, the sliding of the R-row window for R = 1, 2, 3 and
// the expansion of compressed rows against a reference window.
module tb_operand_buffer;
  import sqdm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wt_load = 0, row_load = 0, row_sparse = 0;
  logic [WT_WORD_W-1:0] wt_word = '0;
  act_word_t row_word = '0;
  logic [1:0] r = 2'd3;
  logic [R_MAX-1:0][S_MAX-1:0][7:0] kernel;
  logic [R_MAX-1:0][W_MAX-1:0][7:0] win_val;
  logic [R_MAX-1:0][W_MAX-1:0]      win_nz;
  int checks = 0, failures = 0;

  operand_buffer dut (.*);

  logic [W_MAX-1:0][7:0] ref_rows [R_MAX];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 10; n++) begin
      @(negedge clk); wt_load = 1; wt_word = {$urandom(), $urandom(), $urandom()};
      @(negedge clk); wt_load = 0;
      checks++; if (kernel != wt_word) failures++;
    end
    for (int rr = 1; rr <= 3; rr++) begin
      r = 2'(rr);
      for (int n = 0; n < 30; n++) begin
        logic [W_MAX-1:0][7:0] vals;
        int m;
        for (int i = 0; i < W_MAX; i++) vals[i] = ($urandom_range(0, 2) == 0) ? 8'($urandom_range(1, 255)) : 8'd0;
        row_sparse = 1'($urandom());
        row_word = '0; m = 0;
        for (int i = 0; i < W_MAX; i++) begin
          row_word.bitmap[i] = (vals[i] != 0);
          if (!row_sparse) row_word.data[i] = vals[i];
          else if (vals[i] != 0) begin row_word.data[m] = vals[i]; m++; end
        end
        for (int i = 0; i < rr - 1; i++) ref_rows[i] = ref_rows[i+1];
        ref_rows[rr-1] = vals;
        @(negedge clk); row_load = 1;
        @(negedge clk); row_load = 0;
        if (n >= rr) begin
          for (int i = 0; i < rr; i++) begin
            checks += 2;
            if (win_val[i] != ref_rows[i]) failures++;
            for (int c = 0; c < W_MAX; c++) if (win_nz[i][c] != (ref_rows[i][c] != 0)) begin failures++; break; end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
