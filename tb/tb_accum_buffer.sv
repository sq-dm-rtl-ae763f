// tb_accum_buffer: random clears and adds to random rows, including a clear
// and an add to the same row in one cycle, checked against a reference
// array through the combinational read port.
module tb_accum_buffer;
  import sqdm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic clr = 0, add = 0;
  logic [HW-1:0] clr_row = '0, add_row = '0, rd_row = '0;
  logic signed [W_MAX-1:0][ACC_W-1:0] add_val = '0, rd_val;
  int checks = 0, failures = 0;
  logic signed [W_MAX-1:0][ACC_W-1:0] ref_m [H_MAX];

  accum_buffer dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < H_MAX; i++) begin
      @(negedge clk); clr = 1; clr_row = HW'(i); ref_m[i] = '0;
    end
    @(negedge clk); clr = 0;
    for (int n = 0; n < 2000; n++) begin
      clr = 1'($urandom_range(0, 4) == 0);
      add = 1'($urandom_range(0, 2) != 0);
      clr_row = HW'($urandom_range(0, 7));
      add_row = HW'($urandom_range(0, 7));
      for (int i = 0; i < W_MAX; i++) add_val[i] = ACC_W'(int'($urandom_range(0, 2000)) - 1000);
      @(posedge clk);
      if (clr) ref_m[clr_row] = '0;
      if (add) for (int i = 0; i < W_MAX; i++) ref_m[add_row][i] = ref_m[add_row][i] + add_val[i];
      @(negedge clk);
      clr = 0; add = 0;
      rd_row = HW'($urandom_range(0, 7));
      #1;
      checks++; if (rd_val != ref_m[rd_row]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
