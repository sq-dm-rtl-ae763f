// ds_pe: dense/sparse processing element.
//
// One PE computes, for output channel k, the partial sums over the input
// channels it owns:  acc[p][q] = sum_c sum_r sum_s w[k][c][r][s] * x[c][p+r][q+s]
// with x zero outside the H x W input. Without padding P = H-R+1, Q = W-S+1;
// with `pad` set, (R-1)/2 zero rows and (S-1)/2 zero columns surround the
// input and P = H, Q = W for odd kernels. Padding rows are not read: a zero
// row is loaded into the window instead. It is configured
// (`cfg_sparse`) to use either the dense or the sparse datapath; the address
// generator then hands it only channels of that type. Its parts:
//   addr_gen       channel list and channel-last addresses
//   operand_buffer kernel register and sliding window of R rows
//   dense_dist / sparse_dist  distribution network (one is active)
//   vector_mac     multipliers and reduction network
//   accum_buffer   P x Q partial sums
//   psum_router    adds this PE's rows into the partial-sum chain
//   ppu            ReLU, scaling, requantisation, sparsity detector
// Sequence per output channel (after `start`): clear P accumulator rows;
// for each owned channel: read the kernel (2 cycles), read rows -pad..R-1-pad, then
// for every output row p compute the window (dense: R*ceil(W/EPC) cycles;
// sparse: ceil(nnz/EPC) cycles, none for an all-zero window), add into
// acc row p and read one more row. `done` is high while idle after a run.
// Global-buffer reads have one cycle of latency and are pipelined (one row
// per cycle). Row fetch and compute do not overlap.
// The post-processing pass is driven from outside: pp_valid/pp_row read one
// accumulator row per cycle into the head of the router chain; every other
// PE reads the row whose index arrives from the previous router, so the
// rows stay aligned. The PPU of the last PE of the chain handles the sum.
// The block list and the dense/sparse split follow the paper; the schedule,
// sizes and handshakes are this design's choices.
module ds_pe
  import sqdm_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  // configuration
  input  logic                               cfg_sparse,
  input  logic [3:0]                         cfg_rank,
  input  logic [3:0]                         cfg_cnt,
  input  logic                               cfg_head,
  input  layer_desc_t                        desc,
  input  logic [C_MAX-1:0]                   types,
  input  logic [CW-1:0]                      k,
  // run control
  input  logic                               start,
  output logic                               done,
  // global-buffer read ports
  output logic                               a_re,
  output logic [AAW-1:0]                     a_raddr,
  input  act_word_t                          a_rdata,
  output logic                               w_re,
  output logic [WAW-1:0]                     w_raddr,
  input  logic [WT_WORD_W-1:0]               w_rdata,
  // post-processing pass
  input  logic                               pp_valid,
  input  logic [HW-1:0]                      pp_row,
  input  logic                               rt_in_valid,
  input  logic [HW-1:0]                      rt_in_row,
  input  logic signed [W_MAX-1:0][ACC_W-1:0] rt_in_psum,
  output logic                               rt_out_valid,
  output logic [HW-1:0]                      rt_out_row,
  output logic signed [W_MAX-1:0][ACC_W-1:0] rt_out_psum,
  input  logic                               ppu_detect,
  input  logic                               ppu_fmt_sparse,
  input  logic                               ppu_det_clr,
  output logic                               gb_we,
  output logic [AAW-1:0]                     gb_waddr,
  output act_word_t                          gb_wdata,
  output logic                               det_sparse,
  output logic [31:0]                        det_zeros,
  // activity counters
  output logic [31:0]                        stat_channels,
  output logic [31:0]                        stat_mac_cycles,
  output logic [31:0]                        stat_skipped_windows
);

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_NEXTC, S_WT, S_FETCH, S_START, S_COMP} st_e;
  st_e st;

  logic [HW-1:0] p_out;
  logic [WW-1:0] q_out;
  logic [HW-1:0] p_cnt, clr_cnt;
  logic signed [HW:0] h_next;      // next input row, negative inside the top padding
  logic [1:0]    need, issued;
  logic          pend, pend_zero, h_in_range;

  assign p_out = out_rows(desc);
  assign q_out = out_cols(desc);
  assign h_in_range = (h_next >= 0) && (h_next < $signed({1'b0, desc.h_in}));

  // ---------------- address generator ----------------
  logic          ag_load, ag_next, ag_valid;
  logic [CW-1:0] ag_ch;
  logic [AAW-1:0] ag_aaddr;
  logic [WAW-1:0] ag_waddr;

  addr_gen u_ag (
    .clk, .rst_n,
    .load(ag_load), .types, .my_sparse(cfg_sparse), .pe_rank(cfg_rank), .pe_cnt(cfg_cnt),
    .c_in(desc.c_in), .k_out(desc.k_out), .h_in(desc.h_in),
    .act_base(desc.act_in_base), .wt_base(desc.wt_base), .k,
    .next_ch(ag_next), .h(h_next[HW-1:0]),
    .ch_valid(ag_valid), .ch(ag_ch), .act_addr(ag_aaddr), .wt_addr(ag_waddr)
  );

  // ---------------- operand buffers ----------------
  logic wt_load, row_load;
  logic [R_MAX-1:0][S_MAX-1:0][7:0] kernel;
  logic [R_MAX-1:0][W_MAX-1:0][7:0] win_val;
  logic [R_MAX-1:0][W_MAX-1:0]      win_nz;

  operand_buffer u_ob (
    .clk, .rst_n,
    .wt_load, .wt_word(w_rdata),
    .row_load, .row_sparse(cfg_sparse), .row_word(pend_zero ? act_word_t'('0) : a_rdata), .r(desc.r),
    .kernel, .win_val, .win_nz
  );

  // ---------------- distribution networks ----------------
  logic dist_start, dist_step;
  logic d_busy, d_last, s_busy, s_last;
  logic [EPC-1:0]          d_lv, s_lv;
  logic [EPC-1:0][7:0]     d_val, s_val;
  logic [EPC-1:0][1:0]     d_row, s_row;
  logic [EPC-1:0][WW-1:0]  d_col, s_col;

  dense_dist u_dd (
    .clk, .rst_n, .start(dist_start && !cfg_sparse), .step(dist_step),
    .r(desc.r), .w(desc.w_in), .win_val,
    .busy(d_busy), .last(d_last),
    .lane_valid(d_lv), .lane_val(d_val), .lane_row(d_row), .lane_col(d_col)
  );

  sparse_dist u_sd (
    .clk, .rst_n, .start(dist_start && cfg_sparse), .step(dist_step),
    .r(desc.r), .w(desc.w_in), .win_val, .win_nz,
    .busy(s_busy), .last(s_last),
    .lane_valid(s_lv), .lane_val(s_val), .lane_row(s_row), .lane_col(s_col)
  );

  logic dist_busy, dist_last;
  assign dist_busy = cfg_sparse ? s_busy : d_busy;
  assign dist_last = cfg_sparse ? s_last : d_last;

  // ---------------- MAC ----------------
  logic signed [W_MAX-1:0][ACC_W-1:0] col_sum;

  vector_mac u_mac (
    .prec(desc.prec), .s(desc.s), .q(q_out), .pad(pad_cols(desc)), .kernel,
    .lane_valid(cfg_sparse ? s_lv : d_lv),
    .lane_val  (cfg_sparse ? s_val : d_val),
    .lane_row  (cfg_sparse ? s_row : d_row),
    .lane_col  (cfg_sparse ? s_col : d_col),
    .col_sum
  );

  // ---------------- accumulation buffer ----------------
  logic signed [W_MAX-1:0][ACC_W-1:0] acc_rd;
  logic acc_clr, acc_add;

  accum_buffer u_acc (
    .clk,
    .clr(acc_clr), .clr_row(clr_cnt),
    .add(acc_add), .add_row(p_cnt), .add_val(col_sum),
    .rd_row(cfg_head ? pp_row : rt_in_row), .rd_val(acc_rd)
  );

  // ---------------- control ----------------
  always_comb begin
    ag_load    = (st == S_IDLE) && start;
    ag_next    = 1'b0;
    wt_load    = (st == S_WT);
    row_load   = (st == S_FETCH) && pend;
    dist_start = (st == S_START);
    dist_step  = (st == S_COMP) && dist_busy;
    acc_clr    = (st == S_CLR);
    acc_add    = (st == S_COMP) && dist_busy;
    w_re       = (st == S_NEXTC) && ag_valid;
    w_raddr    = ag_waddr;
    a_re       = (st == S_FETCH) && (issued < need) && h_in_range;
    a_raddr    = ag_aaddr;
    if ((st == S_COMP) && (!dist_busy || dist_last) && (p_cnt + 1'b1 >= p_out))
      ag_next = 1'b1;
  end

  assign done = (st == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      p_cnt   <= '0;
      h_next  <= '0;
      clr_cnt <= '0;
      need    <= '0;
      issued  <= '0;
      pend    <= 1'b0;
      pend_zero <= 1'b0;
      stat_channels        <= '0;
      stat_mac_cycles      <= '0;
      stat_skipped_windows <= '0;
    end else begin
      case (st)
        S_IDLE: if (start) begin
          st      <= S_CLR;
          clr_cnt <= '0;
        end
        S_CLR: begin
          clr_cnt <= clr_cnt + 1'b1;
          if (clr_cnt + 1'b1 >= p_out) st <= S_NEXTC;
        end
        S_NEXTC: begin
          if (!ag_valid) st <= S_IDLE;
          else begin
            st     <= S_WT;
            stat_channels <= stat_channels + 1;
          end
        end
        S_WT: begin
          st     <= S_FETCH;
          p_cnt  <= '0;
          h_next <= -$signed({1'b0, pad_rows(desc)});
          need   <= desc.r;
          issued <= '0;
          pend   <= 1'b0;
        end
        S_FETCH: begin
          if (issued < need) begin
            issued <= issued + 1'b1;
            h_next <= h_next + 1'b1;
            pend   <= 1'b1;
            pend_zero <= !h_in_range;
          end else begin
            pend   <= 1'b0;
            if (!pend) st <= S_START;
          end
        end
        S_START: st <= S_COMP;
        S_COMP: begin
          if (!dist_busy) stat_skipped_windows <= stat_skipped_windows + 1;
          else            stat_mac_cycles <= stat_mac_cycles + 1;
          if (!dist_busy || dist_last) begin
            if (p_cnt + 1'b1 >= p_out) st <= S_NEXTC;
            else begin
              p_cnt  <= p_cnt + 1'b1;
              need   <= 2'd1;
              issued <= '0;
              pend   <= 1'b0;
              st     <= S_FETCH;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- router and PPU ----------------
  psum_router u_rt (
    .clk, .rst_n, .head(cfg_head),
    .in_valid(rt_in_valid), .in_row(rt_in_row), .in_psum(rt_in_psum),
    .loc_valid(pp_valid), .loc_row(pp_row), .loc_psum(acc_rd),
    .out_valid(rt_out_valid), .out_row(rt_out_row), .out_psum(rt_out_psum)
  );

  ppu u_ppu (
    .clk, .rst_n,
    .prec(desc.out_prec), .relu_en(desc.relu_en), .scale_fp8(desc.scale_fp8),
    .q(q_out), .p(p_out), .out_base(desc.act_out_base), .k,
    .detect_pass(ppu_detect), .fmt_sparse(ppu_fmt_sparse), .det_clr(ppu_det_clr),
    .in_valid(rt_out_valid), .in_row(rt_out_row), .in_psum(rt_out_psum),
    .gb_we, .gb_waddr, .gb_wdata,
    .det_sparse, .det_zeros
  );

  // a kernel row count of zero is not a layer
  assert property (@(posedge clk) disable iff (!rst_n) start |-> desc.r != 2'd0);

endmodule
