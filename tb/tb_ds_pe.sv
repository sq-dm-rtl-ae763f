// tb_ds_pe: one D/S PE with a global buffer. A random layer (mixed dense and
// compressed input channels, 4-bit and 8-bit, with and without zero
// padding) is run for several output
// channels, once with the PE configured dense and once sparse. After each run
// the accumulator rows are streamed out through the router (chain head) and
// compared with reference partial sums over the channels of the PE's type.
// The MAC-cycle counter must equal R*ceil(W/42) per window for the dense
// datapath and ceil(nnz/42) for the sparse one (zero windows skipped), and
// the run latency must match the PE's documented schedule.
module tb_ds_pe;
  import sqdm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_sparse = 0, start = 0, done;
  layer_desc_t desc = '0;
  logic [C_MAX-1:0] types = '0;
  logic [CW-1:0] k = '0;
  logic a_re, w_re;
  logic [AAW-1:0] a_raddr;
  logic [WAW-1:0] w_raddr;
  act_word_t a_rdata;
  logic [WT_WORD_W-1:0] w_rdata;
  logic pp_valid = 0;
  logic [HW-1:0] pp_row = '0;
  logic rt_out_valid, gb_we, det_sparse;
  logic [HW-1:0] rt_out_row;
  logic signed [W_MAX-1:0][ACC_W-1:0] rt_out_psum;
  logic [AAW-1:0] gb_waddr;
  act_word_t gb_wdata;
  logic [31:0] det_zeros, st_ch, st_mac, st_skip;
  // host write ports into the buffer
  logic h_a_we = 0, h_w_we = 0;
  logic [AAW-1:0] h_a_waddr = '0;
  act_word_t h_a_wdata = '0;
  logic [WAW-1:0] h_w_waddr = '0;
  logic [WT_WORD_W-1:0] h_w_wdata = '0;

  global_buffer #(.N_RD(1), .A_DEPTH(4096), .W_DEPTH(4096)) u_gb (
    .clk,
    .a_re(a_re), .a_raddr(a_raddr), .a_rdata(a_rdata),
    .a_we(h_a_we), .a_waddr(h_a_waddr), .a_wdata(h_a_wdata),
    .w_re(w_re), .w_raddr(w_raddr), .w_rdata(w_rdata),
    .w_we(h_w_we), .w_waddr(h_w_waddr), .w_wdata(h_w_wdata)
  );

  ds_pe dut (
    .clk, .rst_n, .cfg_sparse, .cfg_rank(4'd0), .cfg_cnt(4'd1), .cfg_head(1'b1),
    .desc, .types, .k, .start, .done,
    .a_re, .a_raddr, .a_rdata, .w_re, .w_raddr, .w_rdata,
    .pp_valid, .pp_row,
    .rt_in_valid(1'b0), .rt_in_row('0), .rt_in_psum('0),
    .rt_out_valid, .rt_out_row, .rt_out_psum,
    .ppu_detect(1'b1), .ppu_fmt_sparse(1'b0), .ppu_det_clr(1'b0),
    .gb_we, .gb_waddr, .gb_wdata, .det_sparse, .det_zeros,
    .stat_channels(st_ch), .stat_mac_cycles(st_mac), .stat_skipped_windows(st_skip)
  );

  int checks = 0, failures = 0;
  int x [8][16][W_MAX];
  int HC, WC;
  function automatic int xv(int c, int h, int i);
    return (h < 0 || h >= HC || i < 0 || i >= WC) ? 0 : x[c][h][i];
  endfunction
  int w [4][8][3][3];

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic setup(int C, int K, int H, int WD, int R, int S, bit p8, bit pd);
    desc = '0;
    HC = H; WC = WD;
    desc.c_in = CW'(C); desc.k_out = CW'(K); desc.h_in = HW'(H); desc.w_in = WW'(WD);
    desc.r = 2'(R); desc.s = 2'(S); desc.act_in_base = AAW'(16); desc.wt_base = WAW'(8);
    desc.prec = p8 ? PREC_8 : PREC_4; desc.out_prec = PREC_4; desc.scale_fp8 = 8'h38; desc.pad = pd;
    for (int c = 0; c < C; c++) begin
      types[c] = 1'($urandom());
      for (int h = 0; h < H; h++) begin
        act_word_t wd;
        int n;
        wd = '0; n = 0;
        for (int i = 0; i < W_MAX; i++) begin
          logic [7:0] v;
          v = (i < WD && $urandom_range(0, 99) < (c % 2 ? 25 : 80)) ? 8'($urandom_range(1, p8 ? 255 : 15)) : 8'd0;
          if (c == 1 && h < 3) v = 0;
          x[c][h][i] = p8 ? int'($signed(v)) : int'(v);
          wd.bitmap[i] = (v != 0);
          if (!types[c]) wd.data[i] = v;
          else if (v != 0) begin wd.data[n] = v; n++; end
        end
        @(negedge clk); h_a_we = 1; h_a_waddr = AAW'(16 + c*H + h); h_a_wdata = wd;
      end
      for (int kk = 0; kk < K; kk++) begin
        logic [WT_WORD_W-1:0] wd;
        wd = '0;
        for (int r = 0; r < 3; r++) for (int s = 0; s < 3; s++) begin
          w[kk][c][r][s] = p8 ? int'($urandom_range(0, 255)) - 128 : int'($urandom_range(0, 15)) - 8;
          wd[(r*S_MAX+s)*8 +: 8] = 8'(w[kk][c][r][s]);
        end
        @(negedge clk); h_a_we = 0; h_w_we = 1; h_w_waddr = WAW'(8 + c*K + kk); h_w_wdata = wd;
      end
      @(negedge clk); h_a_we = 0; h_w_we = 0;
    end
  endtask

  task automatic run_k(int kk, bit sp);
    int C, H, WD, R, S, P, Q, cyc, exp_cyc, exp_mac, exp_skip, nch, pr, pc;
    logic [31:0] m0, s0;
    C = desc.c_in; H = desc.h_in; WD = desc.w_in; R = desc.r; S = desc.s;
    pr = desc.pad ? (R - 1) / 2 : 0; pc = desc.pad ? (S - 1) / 2 : 0;
    P = H - R + 1 + 2 * pr; Q = WD - S + 1 + 2 * pc;
    cfg_sparse = sp; k = CW'(kk);
    exp_mac = 0; exp_skip = 0; nch = 0;
    exp_cyc = P + 2;   // start cycle, P clears, final channel search
    for (int c = 0; c < C; c++) if (types[c] == sp) begin
      nch++;
      exp_cyc += 2 + (R + 2);
      for (int p = 0; p < P; p++) begin
        int n;
        if (p > 0) exp_cyc += 3;
        exp_cyc += 1;
        if (!sp) n = R * ((WD + EPC - 1) / EPC);
        else begin
          int nnz;
          nnz = 0;
          for (int r = 0; r < R; r++) for (int i = 0; i < WD; i++) if (xv(c, p + r - pr, i) != 0) nnz++;
          n = (nnz + EPC - 1) / EPC;
        end
        if (n == 0) begin exp_skip++; exp_cyc += 1; end
        else begin exp_mac += n; exp_cyc += n; end
      end
    end
    m0 = st_mac; s0 = st_skip;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 3;
    if (cyc != exp_cyc) begin failures++; $display("latency %0d exp %0d", cyc, exp_cyc); end
    if (st_mac - m0 != 32'(exp_mac)) failures++;
    if (st_skip - s0 != 32'(exp_skip)) failures++;
    // stream the accumulator
    for (int p = 0; p < P; p++) begin
      pp_valid = 1; pp_row = HW'(p);
      @(posedge clk); #1;
      checks += 2;
      if (!rt_out_valid || rt_out_row != HW'(p)) failures++;
      for (int q = 0; q < Q; q++) begin
        int acc;
        acc = 0;
        for (int c = 0; c < C; c++) if (types[c] == sp)
          for (int r = 0; r < R; r++) for (int s = 0; s < S; s++)
            acc += xv(c, p + r - pr, q + s - pc) * w[kk][c][r][s];
        if (int'(rt_out_psum[q]) != acc) begin
          failures++;
          if (failures < 5) $display("k %0d p %0d q %0d got %0d exp %0d", kk, p, q, int'(rt_out_psum[q]), acc);
          break;
        end
      end
      @(negedge clk);
    end
    pp_valid = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    setup(6, 3, 10, 50, 3, 3, 1'b1, 1'b0);
    for (int kk = 0; kk < 3; kk++) begin run_k(kk, 1'b0); run_k(kk, 1'b1); end
    setup(8, 2, 7, 12, 2, 1, 1'b0, 1'b0);
    for (int kk = 0; kk < 2; kk++) begin run_k(kk, 1'b0); run_k(kk, 1'b1); end
    setup(5, 2, 9, 20, 3, 3, 1'b0, 1'b1);
    for (int kk = 0; kk < 2; kk++) begin run_k(kk, 1'b0); run_k(kk, 1'b1); end
    setup(5, 2, 6, 64, 1, 3, 1'b0, 1'b1);
    for (int kk = 0; kk < 2; kk++) begin run_k(kk, 1'b0); run_k(kk, 1'b1); end
    checks++; if (st_ch == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
