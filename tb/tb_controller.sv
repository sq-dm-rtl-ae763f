// tb_controller: drives the controller with model PEs that finish after a
// random delay, a detector whose answer is a function of (step, layer,
// channel) and a channel table model. Checks the exact order of events:
// one PE start per (time step, layer, output channel); a detect pass of P
// rows only on update steps and not for out_dense layers; table writes to
// layer+1 with the detector's answer; write passes of P rows in the
// detected or stored format; the update/reuse/type-change counters; the
// time-step output; and the done flag.
module tb_controller;
  import sqdm_pkg::*;
  localparam int NPE = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic desc_we = 0, start = 0, busy, done;
  logic [LW-1:0] desc_idx = '0, num_layers = '0, layer;
  layer_desc_t desc_wdata = '0, desc;
  logic [15:0] num_steps = '0, update_period = '0, timestep;
  logic [CW-1:0] k;
  logic pe_start, pp_valid, ppu_detect, ppu_fmt_sparse, ppu_det_clr;
  logic [NPE-1:0] pe_done = '1;
  logic [HW-1:0] pp_row;
  logic det_sparse, ct_we, ct_type, ct_next_type;
  logic [LW-1:0] ct_layer;
  logic [CW-1:0] ct_ch;
  logic [31:0] stat_updates, stat_to_sparse, stat_to_dense, stat_reused;
  int checks = 0, failures = 0;

  controller #(.NUM_PE(NPE)) dut (.*);

  bit tbl [8][8];
  assign ct_next_type = tbl[ct_layer][k];
  function automatic bit det_fn(int t, int l, int kk);
    return ((t + l * 3 + kk * 5) % 3) == 0;
  endfunction
  assign det_sparse = det_fn(timestep, layer, k);

  // model PEs: busy for a random time after each start
  always @(posedge clk) begin
    if (pe_start) begin
      pe_done <= '0;
      fork begin
        repeat ($urandom_range(1, 6)) @(posedge clk);
        pe_done[0] <= 1'b1;
        repeat ($urandom_range(0, 4)) @(posedge clk);
        pe_done[1] <= 1'b1;
      end join_none
    end
  end

  typedef struct {int kind; int t; int l; int k; int a; int b;} ev_t;
  ev_t got [$];
  int pass_rows;
  always @(posedge clk) if (rst_n) begin
    if (pe_start) got.push_back('{0, timestep, layer, k, 0, 0});
    if (ct_we)    got.push_back('{1, timestep, ct_layer, ct_ch, ct_type, 0});
    if (pp_valid) begin
      if (pp_row == 0) pass_rows = 0;
      pass_rows++;
    end
    if (!pp_valid && $past(pp_valid))
      got.push_back('{2, timestep, layer, k, ppu_detect, ppu_detect ? 0 : ppu_fmt_sparse});
    if (!pp_valid && $past(pp_valid)) begin
      checks++; if (pass_rows != int'(desc.h_in) - int'(desc.r) + 1) failures++;
    end
    if (ct_we) tbl[ct_layer][ct_ch] <= ct_type;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int NLY = 3;
  int KS [3] = '{3, 2, 2};
  int HS [3] = '{6, 5, 4};

  task automatic run_ref(int T, int period, ref ev_t e [$], ref int upd, ref int ts, ref int td, ref int ru, ref bit rt [8][8]);
    int u;
    u = 0;
    for (int t = 0; t < T; t++) begin
      for (int l = 0; l < NLY; l++)
        for (int kk = 0; kk < KS[l]; kk++) begin
          bit od;
          od = (l == NLY - 1);
          e.push_back('{0, t, l, kk, 0, 0});
          if (u == 0 && !od) begin
            bit d;
            d = det_fn(t, l, kk);
            e.push_back('{2, t, l, kk, 1, 0});
            e.push_back('{1, t, l + 1, kk, d, 0});
            upd++;
            if (d && !rt[l+1][kk]) ts++;
            if (!d && rt[l+1][kk]) td++;
            rt[l+1][kk] = d;
            e.push_back('{2, t, l, kk, 0, d});
          end else begin
            if (!od) ru++;
            e.push_back('{2, t, l, kk, 0, od ? 0 : rt[l+1][kk]});
          end
        end
      u = (u + 1 >= period) ? 0 : u + 1;
    end
  endtask

  bit rtbl [8][8];

  initial begin
    for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++) begin tbl[a][b] = 0; rtbl[a][b] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NLY; l++) begin
      layer_desc_t d;
      d = '0;
      d.k_out = CW'(KS[l]); d.h_in = HW'(HS[l]); d.r = 2'd2; d.out_dense = (l == NLY - 1);
      @(negedge clk); desc_we = 1; desc_idx = LW'(l); desc_wdata = d;
    end
    @(negedge clk); desc_we = 0; num_layers = LW'(NLY);
    for (int run = 0; run < 3; run++) begin
      ev_t e [$];
      int T, per, upd, ts, td, ru;
      logic [31:0] u0, ts0, td0, r0;
      T = (run == 0) ? 3 : (run == 1) ? 4 : 2;
      per = (run == 0) ? 1 : (run == 1) ? 3 : 2;
      upd = 0; ts = 0; td = 0; ru = 0;
      e.delete();
      u0 = stat_updates; ts0 = stat_to_sparse; td0 = stat_to_dense; r0 = stat_reused;
      run_ref(T, per, e, upd, ts, td, ru, rtbl);
      got.delete();
      @(negedge clk); num_steps = 16'(T); update_period = 16'(per); start = 1;
      @(negedge clk); start = 0;
      checks++; if (!busy) failures++;
      while (!done) @(negedge clk);
      checks++; if (timestep != 16'(T - 1)) failures++;
      checks++; if (got.size() != e.size()) begin failures++; $display("events %0d exp %0d", got.size(), e.size()); end
      for (int i = 0; i < e.size() && i < got.size(); i++) begin
        checks++;
        if (got[i] != e[i]) begin
          failures++;
          if (failures < 6) $display("ev %0d got %0d/%0d/%0d/%0d/%0d exp %0d/%0d/%0d/%0d/%0d", i,
            got[i].kind, got[i].t, got[i].l, got[i].k, got[i].a, e[i].kind, e[i].t, e[i].l, e[i].k, e[i].a);
        end
      end
      checks += 4;
      if (stat_updates - u0 != 32'(upd)) failures++;
      if (stat_to_sparse - ts0 != 32'(ts)) failures++;
      if (stat_to_dense - td0 != 32'(td)) failures++;
      if (stat_reused - r0 != 32'(ru)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
