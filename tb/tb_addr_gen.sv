// tb_addr_gen: random channel-type vectors and PE rank/count settings; the
// channels handed out must be exactly the reference list (type match,
// channel < C, round-robin share) in increasing order, and every channel-
// last address must match base + c*H + h and base + c*K + k.
module tb_addr_gen;
  import sqdm_pkg::*;
  localparam int NC = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load = 0, my_sparse = 0, next_ch = 0, ch_valid;
  logic [NC-1:0] types = '0;
  logic [3:0] pe_rank = '0, pe_cnt = 4'd1;
  logic [CW-1:0] c_in = '0, k_out = '0, k = '0, ch;
  logic [HW-1:0] h_in = '0, h = '0;
  logic [AAW-1:0] act_base = '0, act_addr;
  logic [WAW-1:0] wt_base = '0, wt_addr;
  int checks = 0, failures = 0;

  addr_gen #(.N_CH(NC)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      int exp_list[$];
      int ord;
      types = {$urandom(), $urandom()};
      my_sparse = 1'($urandom());
      pe_cnt = 4'($urandom_range(1, 3));
      pe_rank = 4'($urandom_range(0, int'(pe_cnt) - 1));
      c_in = CW'($urandom_range(1, NC));
      k_out = CW'($urandom_range(1, 200));
      k = CW'($urandom_range(0, int'(k_out) - 1));
      h_in = HW'($urandom_range(3, 64));
      act_base = AAW'($urandom_range(0, 1000));
      wt_base = WAW'($urandom_range(0, 1000));
      ord = 0;
      exp_list.delete();
      for (int c = 0; c < int'(c_in); c++)
        if (types[c] == my_sparse) begin
          if (ord % int'(pe_cnt) == int'(pe_rank)) exp_list.push_back(c);
          ord++;
        end
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      foreach (exp_list[i]) begin
        h = HW'($urandom_range(0, int'(h_in) - 1));
        #1;
        checks += 4;
        if (!ch_valid) failures++;
        if (ch != CW'(exp_list[i])) begin failures++; if (failures < 5) $display("ch %0d exp %0d valid %0d cnt %0d rank %0d", ch, exp_list[i], ch_valid, pe_cnt, pe_rank); end
        if (act_addr != AAW'(int'(act_base) + exp_list[i] * int'(h_in) + int'(h))) failures++;
        if (wt_addr != WAW'(int'(wt_base) + exp_list[i] * int'(k_out) + int'(k))) failures++;
        @(negedge clk); next_ch = 1;
        @(negedge clk); next_ch = 0;
      end
      #1;
      checks++; if (ch_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
