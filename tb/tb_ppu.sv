// tb_ppu: random partial-sum rows through detect and write passes with
// random scales, precisions and ReLU setting. Checks each written word
// (address, dense or packed format, bitmap) against a reference that
// scales in real arithmetic with round-half-up and saturates, the
// one-cycle latency, and the detector result of the channel.
module tb_ppu;
  import sqdm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  prec_e prec = PREC_4;
  logic relu_en = 1, detect_pass = 0, fmt_sparse = 0, det_clr = 0, in_valid = 0;
  logic [7:0] scale_fp8 = 8'h38;
  logic [WW-1:0] q = '0;
  logic [HW-1:0] p = '0, in_row = '0;
  logic [AAW-1:0] out_base = '0, gb_waddr;
  logic [CW-1:0] k = '0;
  logic signed [W_MAX-1:0][ACC_W-1:0] in_psum = '0;
  logic gb_we, det_sparse;
  act_word_t gb_wdata;
  logic [31:0] det_zeros;
  int checks = 0, failures = 0;

  ppu dut (.*);

  function automatic int post_ref(int acc, logic relu, logic [7:0] sc, prec_e pr);
    real f, y;
    longint v;
    int e, m;
    if (relu && acc < 0) acc = 0;
    e = sc[6:3]; m = sc[2:0];
    f = (e == 0) ? real'(m) / 512.0 : real'(8 + m) * (2.0 ** (e - 10));
    if (sc[7]) f = -f;
    y = real'(acc) * f;
    v = longint'($floor(y + 0.5));
    if (sc[7]) v = -longint'($floor(-y + 0.5));
    if (pr == PREC_4) return (v < 0) ? 0 : (v > 15) ? 15 : int'(v);
    return (v < -128) ? -128 : (v > 127) ? 127 : int'(v);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 40; ch++) begin
      logic signed [W_MAX-1:0][ACC_W-1:0] rows [16];
      int vals [16][W_MAX];
      int zeros, pp, qq;
      pp = int'($urandom_range(1, 16)); qq = int'($urandom_range(1, W_MAX));
      p = HW'(pp); q = WW'(qq);
      prec = ($urandom_range(0, 1) == 1) ? PREC_8 : PREC_4;
      relu_en = 1'($urandom_range(0, 3) != 0);
      scale_fp8 = {1'b0, 4'($urandom_range(0, 12)), 3'($urandom())};
      out_base = AAW'($urandom_range(0, 5000));
      k = CW'($urandom_range(0, 100));
      zeros = 0;
      for (int r = 0; r < pp; r++)
        for (int c = 0; c < W_MAX; c++) begin
          rows[r][c] = ACC_W'(int'($urandom_range(0, 4000)) - 1500);
          vals[r][c] = (c < qq) ? post_ref(int'(rows[r][c]), relu_en, scale_fp8, prec) : 0;
          if (c < qq && vals[r][c] == 0) zeros++;
        end
      // detect pass
      @(negedge clk); det_clr = 1;
      @(negedge clk); det_clr = 0; detect_pass = 1;
      for (int r = 0; r < pp; r++) begin
        in_valid = 1; in_row = HW'(r); in_psum = rows[r];
        @(negedge clk);
        checks++; if (gb_we) failures++;
      end
      in_valid = 0;
      @(negedge clk);
      checks += 2;
      if (det_zeros != 32'(zeros)) failures++;
      if (det_sparse != (zeros * 100 > 30 * pp * qq)) failures++;
      // write pass in the detected format
      fmt_sparse = det_sparse;
      detect_pass = 0;
      for (int r = 0; r < pp; r++) begin
        act_word_t e;
        int n;
        in_valid = 1; in_row = HW'(r); in_psum = rows[r];
        @(posedge clk); #1;       // registered: write is valid now
        e = '0; n = 0;
        for (int c = 0; c < W_MAX; c++) begin
          e.bitmap[c] = (vals[r][c] != 0);
          if (!fmt_sparse) e.data[c] = 8'(vals[r][c]);
          else if (vals[r][c] != 0) begin e.data[n] = 8'(vals[r][c]); n++; end
        end
        checks += 3;
        if (!gb_we) failures++;
        if (gb_waddr != AAW'(int'(out_base) + int'(k) * pp + r)) failures++;
        if (gb_wdata != e) failures++;
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      checks++; if (gb_we) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
