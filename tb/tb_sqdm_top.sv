// tb_sqdm_top: end-to-end test of the accelerator at its default sizes.
//
// Runs a two-layer network (an 8-bit 3x3 layer feeding a zero-padded 4-bit
// 3x3 layer)
// over several time steps and compares every stored output row, its format
// and the PEs' cycle counts with a behavioural reference computed here:
// integer convolution, ReLU, FP8 scaling done in real arithmetic with
// round-half-up, saturation, zero counting against the 30 % threshold, and
// ceil(nnz/42) sparse cycles per window. Three runs:
//   A  2 time steps, update period 2: detection at t=0, reuse at t=1;
//   B  weights of layer 0 flipped in sign, 1 time step: channels change type
//      in both directions;
//   C  as B with update period 1 over 2 steps.
// It also counts each mechanism (dense and sparse channels, zero-window
// skips, type changes both ways, reused classifications, saturation, 4-bit
// and 8-bit layers, compressed rows written) and fails if one never occurs.
module tb_sqdm_top;
  import sqdm_pkg::*;

  localparam int NPE = 2;
  localparam int EPC_REF = 128 / 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic desc_we = 0, start = 0, busy, done;
  logic [LW-1:0] desc_idx = '0, num_layers = '0;
  layer_desc_t desc_wdata = '0;
  logic [15:0] num_steps = '0, update_period = '0, timestep;
  logic [NPE-1:0] pe_sparse = 2'b10;
  logic h_ct_we = 0, h_ct_type = 0;
  logic [LW-1:0] h_ct_layer = '0;
  logic [CW-1:0] h_ct_ch = '0;
  logic h_a_we = 0, h_a_re = 0, h_w_we = 0;
  logic [AAW-1:0] h_a_waddr = '0, h_a_raddr = '0;
  act_word_t h_a_wdata = '0, h_a_rdata;
  logic [WAW-1:0] h_w_waddr = '0;
  logic [WT_WORD_W-1:0] h_w_wdata = '0;
  logic [NPE-1:0][31:0] st_ch, st_mac, st_skip;
  logic [31:0] st_upd, st_tos, st_tod, st_reuse;

  sqdm_top dut (
    .clk, .rst_n, .desc_we, .desc_idx, .desc_wdata, .num_layers, .num_steps,
    .update_period, .pe_sparse, .start, .busy, .done, .timestep,
    .h_ct_we, .h_ct_layer, .h_ct_ch, .h_ct_type,
    .h_a_we, .h_a_waddr, .h_a_wdata, .h_a_re, .h_a_raddr, .h_a_rdata,
    .h_w_we, .h_w_waddr, .h_w_wdata,
    .stat_channels(st_ch), .stat_mac_cycles(st_mac), .stat_skipped_windows(st_skip),
    .stat_updates(st_upd), .stat_to_sparse(st_tos), .stat_to_dense(st_tod),
    .stat_reused(st_reuse)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- network ----------------
  localparam int NL = 2;
  int C [NL] = '{4, 6};
  int K [NL] = '{6, 4};
  int H [NL] = '{10, 8};
  int W [NL] = '{10, 8};
  int RK = 3, SK = 3;
  int INB [NL] = '{0, 100};
  int OUTB[NL] = '{100, 200};
  int WTB [NL] = '{0, 100};
  bit P8  [NL] = '{1, 0};      // input precision
  bit OP8 [NL] = '{0, 0};      // output precision
  bit PAD [NL] = '{0, 1};      // layer 1 keeps its 8x8 size
  logic [7:0] SC[NL] = '{8'h12, 8'h11};  // E4M3: 10*2^-8 ; 9*2^-8

  // x[l][c][h][w] as signed ints, w[l][k][c][r][s]
  int x   [NL+1][8][16][16];
  int wt  [NL][8][8][3][3];
  bit typ [NL+1][8];           // channel type tables of the reference

  // mechanism counters
  int n_sat = 0, n_sparse_rows = 0, n_dense_rows = 0;

  function automatic int xv(int l, int c, int h, int i);
    return (h < 0 || h >= H[l] || i < 0 || i >= W[l]) ? 0 : x[l][c][h][i];
  endfunction

  function automatic int act_of(bit p8, int v);
    return p8 ? v : (v & 15);
  endfunction

  function automatic int post_ref(longint acc, logic [7:0] sc, bit op8, ref int sat);
    real y, f;
    int e, m;
    longint v;
    if (acc < 0) acc = 0;
    e = sc[6:3]; m = sc[2:0];
    f = (e == 0) ? real'(m) / 512.0 : real'(8 + m) * (2.0 ** (e - 10));
    y = real'(acc) * f;
    v = longint'($floor(y + 0.5));
    if (!op8) begin
      if (v > 15) begin v = 15; sat++; end
    end else begin
      if (v > 127) begin v = 127; sat++; end
    end
    return int'(v);
  endfunction

  longint exp_mac [NPE], exp_skip [NPE], exp_ch [NPE];
  int exp_upd, exp_tos, exp_tod, exp_reuse;

  // one run of the reference: nsteps steps, given update period
  task automatic ref_run(int nsteps, int period);
    int upd;
    upd = 0;
    for (int t = 0; t < nsteps; t++) begin
      for (int l = 0; l < NL; l++) begin
        int P, Q, pd;
        pd = PAD[l] ? 1 : 0;
        P = H[l] - RK + 1 + 2 * pd; Q = W[l] - SK + 1 + 2 * pd;
        for (int k = 0; k < K[l]; k++) begin
          int zeros;
          bit newt;
          zeros = 0;
          // cycle model
          for (int c = 0; c < C[l]; c++) begin
            int pe;
            pe = typ[l][c] ? 1 : 0;
            exp_ch[pe]++;
            for (int p = 0; p < P; p++) begin
              if (!typ[l][c]) exp_mac[pe] += RK * ((W[l] + EPC_REF - 1) / EPC_REF);
              else begin
                int nnz;
                nnz = 0;
                for (int r = 0; r < RK; r++)
                  for (int q = 0; q < W[l]; q++)
                    if (act_of(P8[l], xv(l, c, p + r - pd, q)) != 0) nnz++;
                if (nnz == 0) exp_skip[pe]++;
                else exp_mac[pe] += (nnz + EPC_REF - 1) / EPC_REF;
              end
            end
          end
          for (int p = 0; p < P; p++)
            for (int q = 0; q < Q; q++) begin
              longint acc;
              acc = 0;
              for (int c = 0; c < C[l]; c++)
                for (int r = 0; r < RK; r++)
                  for (int s = 0; s < SK; s++)
                    acc += longint'(act_of(P8[l], xv(l, c, p + r - pd, q + s - pd))) * wt[l][k][c][r][s];
              x[l+1][k][p][q] = post_ref(acc, SC[l], OP8[l], n_sat);
              if (x[l+1][k][p][q] == 0) zeros++;
            end
          if (l == NL - 1) typ[l+1][k] = 0;
          else if (upd == 0) begin
            newt = (zeros * 100 > 30 * P * Q);
            exp_upd++;
            if (newt && !typ[l+1][k]) exp_tos++;
            if (!newt && typ[l+1][k]) exp_tod++;
            typ[l+1][k] = newt;
          end else exp_reuse++;
        end
      end
      upd = (upd + 1 >= period) ? 0 : upd + 1;
    end
  endtask

  // ---------------- host access ----------------
  task automatic wr_act(int addr, act_word_t wd);
    @(negedge clk); h_a_we = 1; h_a_waddr = AAW'(addr); h_a_wdata = wd;
    @(negedge clk); h_a_we = 0;
  endtask

  function automatic act_word_t pack_row(int l, int c, int h, bit sparse_fmt, bit p8);
    act_word_t wd;
    int n;
    wd = '0; n = 0;
    for (int i = 0; i < W[l]; i++) begin
      logic [7:0] v;
      v = p8 ? 8'(x[l][c][h][i]) : {4'd0, 4'(x[l][c][h][i])};
      wd.bitmap[i] = (v != 0);
      if (!sparse_fmt) wd.data[i] = v;
      else if (v != 0) begin wd.data[n] = v; n++; end
    end
    return wd;
  endfunction

  task automatic load_weights(int l);
    for (int c = 0; c < C[l]; c++)
      for (int k = 0; k < K[l]; k++) begin
        logic [WT_WORD_W-1:0] wd;
        wd = '0;
        for (int r = 0; r < RK; r++)
          for (int s = 0; s < SK; s++)
            wd[(r*S_MAX+s)*8 +: 8] = P8[l] ? 8'(wt[l][k][c][r][s]) : {4'd0, 4'(wt[l][k][c][r][s])};
        @(negedge clk); h_w_we = 1; h_w_waddr = WAW'(WTB[l] + c*K[l] + k); h_w_wdata = wd;
        @(negedge clk); h_w_we = 0;
      end
  endtask

  task automatic check_layer_out(int l);
    int P;
    P = H[l] - RK + 1 + (PAD[l] ? 2 : 0);
    for (int k = 0; k < K[l]; k++)
      for (int p = 0; p < P; p++) begin
        act_word_t e;
        e = pack_row(l + 1, k, p, typ[l+1][k], OP8[l]);
        @(negedge clk); h_a_re = 1; h_a_raddr = AAW'(OUTB[l] + k*P + p);
        @(negedge clk); h_a_re = 0;
        check(h_a_rdata == e, $sformatf("layer %0d ch %0d row %0d (sparse fmt %0d) got %h exp %h", l, k, p, typ[l+1][k], h_a_rdata.data[9:0], e.data[9:0]));
        if (typ[l+1][k]) n_sparse_rows++; else n_dense_rows++;
      end
  endtask

  task automatic run(int nsteps, int period);
    longint m0[NPE], s0[NPE], c0[NPE];
    int u0, ts0, td0, r0, cyc;
    for (int i = 0; i < NPE; i++) begin
      m0[i] = st_mac[i]; s0[i] = st_skip[i]; c0[i] = st_ch[i];
      exp_mac[i] = 0; exp_skip[i] = 0; exp_ch[i] = 0;
    end
    u0 = st_upd; ts0 = st_tos; td0 = st_tod; r0 = st_reuse;
    exp_upd = 0; exp_tos = 0; exp_tod = 0; exp_reuse = 0;
    ref_run(nsteps, period);
    @(negedge clk); num_steps = 16'(nsteps); update_period = 16'(period); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("run: %0d steps, period %0d, %0d cycles", nsteps, period, cyc);
    for (int l = 0; l < NL; l++) check_layer_out(l);
    for (int i = 0; i < NPE; i++) begin
      check(st_mac[i] - m0[i] == exp_mac[i], $sformatf("PE%0d MAC cycles %0d exp %0d", i, st_mac[i]-m0[i], exp_mac[i]));
      check(st_skip[i] - s0[i] == exp_skip[i], $sformatf("PE%0d skipped %0d exp %0d", i, st_skip[i]-s0[i], exp_skip[i]));
      check(st_ch[i] - c0[i] == exp_ch[i], $sformatf("PE%0d channels %0d exp %0d", i, st_ch[i]-c0[i], exp_ch[i]));
    end
    check(st_upd - u0 == exp_upd, $sformatf("updates %0d exp %0d", st_upd - u0, exp_upd));
    check(st_tos - ts0 == exp_tos, $sformatf("to_sparse %0d exp %0d", st_tos - ts0, exp_tos));
    check(st_tod - td0 == exp_tod, $sformatf("to_dense %0d exp %0d", st_tod - td0, exp_tod));
    check(st_reuse - r0 == exp_reuse, $sformatf("reused %0d exp %0d", st_reuse - r0, exp_reuse));
  endtask

  initial begin
    // watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // data: layer-0 input 8-bit, channels 1 and 3 mostly zero (stored sparse)
    for (int c = 0; c < C[0]; c++)
      for (int h = 0; h < H[0]; h++)
        for (int w = 0; w < W[0]; w++) begin
          int v;
          v = int'($urandom_range(0, 20)) - 4;
          if (v < 0) v = 0;
          if (c % 2 == 1 && $urandom_range(0, 9) < 8) v = 0;
          if (c == 3 && h < 3) v = 0;      // all-zero windows
          x[0][c][h][w] = v;
        end
    // layer-0 weights INT8: even output channels positive-leaning, odd negative
    for (int k = 0; k < K[0]; k++)
      for (int c = 0; c < C[0]; c++)
        for (int r = 0; r < 3; r++)
          for (int s = 0; s < 3; s++)
            wt[0][k][c][r][s] = (k % 2 == 0) ? int'($urandom_range(0, 12)) - 3
                                             : int'($urandom_range(0, 12)) - 10;
    // layer-1 weights INT4
    for (int k = 0; k < K[1]; k++)
      for (int c = 0; c < C[1]; c++)
        for (int r = 0; r < 3; r++)
          for (int s = 0; s < 3; s++)
            wt[1][k][c][r][s] = int'($urandom_range(0, 15)) - 8;
    for (int l = 0; l <= NL; l++) for (int c = 0; c < 8; c++) typ[l][c] = 0;
    typ[0][1] = 1; typ[0][3] = 1;

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      layer_desc_t d;
      d = '0;
      d.c_in = CW'(C[l]); d.k_out = CW'(K[l]); d.h_in = HW'(H[l]); d.w_in = WW'(W[l]);
      d.r = 2'(RK); d.s = 2'(SK);
      d.act_in_base = AAW'(INB[l]); d.act_out_base = AAW'(OUTB[l]); d.wt_base = WAW'(WTB[l]);
      d.prec = P8[l] ? PREC_8 : PREC_4; d.out_prec = OP8[l] ? PREC_8 : PREC_4;
      d.relu_en = 1; d.scale_fp8 = SC[l]; d.out_dense = (l == NL - 1); d.pad = PAD[l];
      @(negedge clk); desc_we = 1; desc_idx = LW'(l); desc_wdata = d;
      @(negedge clk); desc_we = 0;
    end
    num_layers = LW'(NL);
    for (int c = 0; c < C[0]; c++) begin
      @(negedge clk); h_ct_we = 1; h_ct_layer = '0; h_ct_ch = CW'(c); h_ct_type = typ[0][c];
      @(negedge clk); h_ct_we = 0;
      for (int h = 0; h < H[0]; h++) wr_act(INB[0] + c*H[0] + h, pack_row(0, c, h, typ[0][c], 1'b1));
    end
    load_weights(0);
    load_weights(1);

    run(2, 2);                    // A
    for (int k = 0; k < K[0]; k++)
      for (int c = 0; c < C[0]; c++)
        for (int r = 0; r < 3; r++)
          for (int s = 0; s < 3; s++)
            wt[0][k][c][r][s] = -wt[0][k][c][r][s];
    load_weights(0);
    run(1, 1);                    // B
    run(2, 1);                    // C

    // every mechanism must have happened
    check(st_ch[0] > 0, "dense channels processed");
    check(st_ch[1] > 0, "sparse channels processed");
    check(st_skip[1] > 0, "all-zero windows skipped");
    check(st_tos > 0, "channel turned sparse");
    check(st_tod > 0, "channel turned dense");
    check(st_reuse > 0, "classification reused");
    check(n_sat > 0, "saturation");
    check(n_sparse_rows > 0, "compressed rows written");
    check(n_dense_rows > 0, "dense rows written");
    $display("mechanisms: dense ch %0d, sparse ch %0d, skipped %0d, to_sparse %0d, to_dense %0d, reused %0d, sat %0d, sparse rows %0d",
             st_ch[0], st_ch[1], st_skip[1], st_tos, st_tod, st_reuse, n_sat, n_sparse_rows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
