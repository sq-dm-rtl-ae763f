// tb_vector_mac: random lanes, kernels, precisions, S and Q; every output
// column must equal the reference sum over lanes and kernel columns of
// act * w[row][s] with col - s + pad == q (UINT4 x INT4 or INT8 x INT8).
module tb_vector_mac;
  import sqdm_pkg::*;
  prec_e prec = PREC_4;
  logic [1:0] s = 2'd3;
  logic [WW-1:0] q = WW'(62);
  logic [1:0] pad = 2'd0;
  logic [R_MAX-1:0][S_MAX-1:0][7:0] kernel;
  logic [EPC-1:0] lane_valid;
  logic [EPC-1:0][7:0] lane_val;
  logic [EPC-1:0][1:0] lane_row;
  logic [EPC-1:0][WW-1:0] lane_col;
  logic signed [W_MAX-1:0][ACC_W-1:0] col_sum;
  int checks = 0, failures = 0;

  vector_mac dut (.*);

  function automatic int a_ref(prec_e p, logic [7:0] v);
    return (p == PREC_4) ? int'(v[3:0]) : int'($signed(v));
  endfunction
  function automatic int w_ref(prec_e p, logic [7:0] v);
    return (p == PREC_4) ? int'($signed(v[3:0])) : int'($signed(v));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 300; trial++) begin
      int exp_sum [W_MAX];
      prec = PREC_4;
      if ($urandom_range(0, 1) == 1) prec = PREC_8;
      s = 2'($urandom_range(1, 3));
      q = WW'($urandom_range(1, W_MAX));
      pad = 2'($urandom_range(0, 1));
      for (int rr = 0; rr < R_MAX; rr++) for (int t = 0; t < S_MAX; t++) kernel[rr][t] = 8'($urandom());
      for (int j = 0; j < EPC; j++) begin
        lane_valid[j] = 1'($urandom_range(0, 3) != 0);
        lane_val[j]   = 8'($urandom());
        lane_row[j]   = 2'($urandom_range(0, 2));
        lane_col[j]   = WW'($urandom_range(0, W_MAX - 1));
      end
      for (int i = 0; i < W_MAX; i++) exp_sum[i] = 0;
      for (int j = 0; j < EPC; j++)
        for (int t = 0; t < int'(s); t++) begin
          int oc;
          oc = int'(lane_col[j]) - t + int'(pad);
          if (lane_valid[j] && oc >= 0 && oc < int'(q))
            exp_sum[oc] += a_ref(prec, lane_val[j]) * w_ref(prec, kernel[lane_row[j]][t]);
        end
      #1;
      for (int i = 0; i < W_MAX; i++) begin
        checks++;
        if (int'($signed(col_sum[i])) != exp_sum[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
