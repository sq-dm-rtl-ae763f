// sqdm_top: dense/sparse diffusion-model accelerator.
//
// A controller, an array of NUM_PE dense/sparse processing elements joined
// by partial-sum routers, a global buffer and the per-layer channel
// information table. Every input channel of a layer is tagged dense or
// sparse; PEs configured as dense (pe_sparse[i]=0) compute the dense
// channels, PEs configured as sparse compute the sparse ones, zero
// activations skipped. For each output channel the PEs' partial sums are
// added along the router chain (PE 0 is the head, PE NUM_PE-1 the tail) and
// post-processed by the tail PE's PPU, whose temporal sparsity detector
// re-tags the channel for the next layer at every sparsity-update time step.
// Host interface (use only while busy is low): layer descriptors, run
// parameters, PE datapath types, channel-table writes for the first layer's
// input, and global-buffer write/read ports (read data one cycle after the
// address). `start` runs num_steps time steps of num_layers layers.
// The default configuration, one dense PE and one sparse PE of 128
// multipliers each, is the one the paper evaluates.
module sqdm_top
  import sqdm_pkg::*;
#(
  parameter int unsigned NUM_PE = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // run configuration
  input  logic                  desc_we,
  input  logic [LW-1:0]         desc_idx,
  input  layer_desc_t           desc_wdata,
  input  logic [LW-1:0]         num_layers,
  input  logic [15:0]           num_steps,
  input  logic [15:0]           update_period,
  input  logic [NUM_PE-1:0]     pe_sparse,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [15:0]           timestep,
  // channel information, host side
  input  logic                  h_ct_we,
  input  logic [LW-1:0]         h_ct_layer,
  input  logic [CW-1:0]         h_ct_ch,
  input  logic                  h_ct_type,
  // global buffer, host side
  input  logic                  h_a_we,
  input  logic [AAW-1:0]        h_a_waddr,
  input  act_word_t             h_a_wdata,
  input  logic                  h_a_re,
  input  logic [AAW-1:0]        h_a_raddr,
  output act_word_t             h_a_rdata,
  input  logic                  h_w_we,
  input  logic [WAW-1:0]        h_w_waddr,
  input  logic [WT_WORD_W-1:0]  h_w_wdata,
  // activity counters
  output logic [NUM_PE-1:0][31:0] stat_channels,
  output logic [NUM_PE-1:0][31:0] stat_mac_cycles,
  output logic [NUM_PE-1:0][31:0] stat_skipped_windows,
  output logic [31:0]           stat_updates,
  output logic [31:0]           stat_to_sparse,
  output logic [31:0]           stat_to_dense,
  output logic [31:0]           stat_reused
);

  localparam int unsigned NRD = NUM_PE + 1;

  // ---------------- controller ----------------
  layer_desc_t   desc;
  logic [LW-1:0] layer;
  logic [CW-1:0] k;
  logic          pe_start, pp_valid, ppu_detect, ppu_fmt, ppu_clr, det_sparse;
  logic [HW-1:0] pp_row;
  logic [NUM_PE-1:0] pe_done;
  logic          c_ct_we, c_ct_type, ct_next_type;
  logic [LW-1:0] c_ct_layer;
  logic [CW-1:0] c_ct_ch;

  controller #(.NUM_PE(NUM_PE)) u_ctrl (
    .clk, .rst_n,
    .desc_we, .desc_idx, .desc_wdata, .num_layers, .num_steps, .update_period,
    .start, .busy, .done, .timestep, .layer, .k, .desc,
    .pe_start, .pe_done, .pp_valid, .pp_row,
    .ppu_detect, .ppu_fmt_sparse(ppu_fmt), .ppu_det_clr(ppu_clr), .det_sparse,
    .ct_we(c_ct_we), .ct_layer(c_ct_layer), .ct_ch(c_ct_ch), .ct_type(c_ct_type),
    .ct_next_type,
    .stat_updates, .stat_to_sparse, .stat_to_dense, .stat_reused
  );

  // ---------------- channel information ----------------
  logic [C_MAX-1:0] types;

  channel_info_table #(.N_LAYERS(L_MAX + 1), .N_CH(C_MAX)) u_ct (
    .clk, .rst_n,
    .we    (busy ? c_ct_we : h_ct_we),
    .wlayer(busy ? c_ct_layer[$clog2(L_MAX+1)-1:0] : h_ct_layer[$clog2(L_MAX+1)-1:0]),
    .wch   (busy ? c_ct_ch[$clog2(C_MAX)-1:0] : h_ct_ch[$clog2(C_MAX)-1:0]),
    .wtype (busy ? c_ct_type : h_ct_type),
    .rlayer(layer[$clog2(L_MAX+1)-1:0]), .rtypes(types),
    .blayer(c_ct_layer[$clog2(L_MAX+1)-1:0]), .bch(k[$clog2(C_MAX)-1:0]), .btype(ct_next_type)
  );

  // ---------------- global buffer ----------------
  logic [NRD-1:0]            a_re, w_re;
  logic [NRD-1:0][AAW-1:0]   a_raddr;
  logic [NRD-1:0][WAW-1:0]   w_raddr;
  act_word_t [NRD-1:0]       a_rdata;
  logic [NRD-1:0][WT_WORD_W-1:0] w_rdata;
  logic                      pe_we;
  logic [AAW-1:0]            pe_waddr;
  act_word_t                 pe_wdata;

  global_buffer #(.N_RD(NRD)) u_gb (
    .clk,
    .a_re, .a_raddr, .a_rdata,
    .a_we   (busy ? pe_we : h_a_we),
    .a_waddr(busy ? pe_waddr : h_a_waddr),
    .a_wdata(busy ? pe_wdata : h_a_wdata),
    .w_re, .w_raddr, .w_rdata,
    .w_we   (!busy && h_w_we),
    .w_waddr(h_w_waddr),
    .w_wdata(h_w_wdata)
  );

  assign a_re[NUM_PE]    = h_a_re;
  assign a_raddr[NUM_PE] = h_a_raddr;
  assign h_a_rdata       = a_rdata[NUM_PE];
  assign w_re[NUM_PE]    = 1'b0;
  assign w_raddr[NUM_PE] = '0;

  // ---------------- PE array ----------------
  logic [NUM_PE:0]                              rt_valid;
  logic [NUM_PE:0][HW-1:0]                      rt_row;
  logic signed [NUM_PE:0][W_MAX-1:0][ACC_W-1:0] rt_psum;
  logic [NUM_PE-1:0]                            pe_gb_we, pe_det;
  logic [NUM_PE-1:0][AAW-1:0]                   pe_gb_waddr;
  act_word_t [NUM_PE-1:0]                       pe_gb_wdata;

  assign rt_valid[0] = 1'b0;
  assign rt_row[0]   = '0;
  assign rt_psum[0]  = '0;

  for (genvar i = 0; i < NUM_PE; i++) begin : g_pe
    logic [3:0] rank, cnt;
    always_comb begin
      rank = '0;
      cnt  = '0;
      for (int j = 0; j < NUM_PE; j++) begin
        if (pe_sparse[j] == pe_sparse[i]) begin
          cnt = cnt + 1'b1;
          if (j < i) rank = rank + 1'b1;
        end
      end
    end

    logic [31:0] unused_zeros;

    ds_pe u_pe (
      .clk, .rst_n,
      .cfg_sparse(pe_sparse[i]), .cfg_rank(rank), .cfg_cnt(cnt), .cfg_head(i == 0),
      .desc, .types, .k,
      .start(pe_start), .done(pe_done[i]),
      .a_re(a_re[i]), .a_raddr(a_raddr[i]), .a_rdata(a_rdata[i]),
      .w_re(w_re[i]), .w_raddr(w_raddr[i]), .w_rdata(w_rdata[i]),
      .pp_valid, .pp_row,
      .rt_in_valid(rt_valid[i]), .rt_in_row(rt_row[i]), .rt_in_psum(rt_psum[i]),
      .rt_out_valid(rt_valid[i+1]), .rt_out_row(rt_row[i+1]), .rt_out_psum(rt_psum[i+1]),
      .ppu_detect, .ppu_fmt_sparse(ppu_fmt), .ppu_det_clr(ppu_clr),
      .gb_we(pe_gb_we[i]), .gb_waddr(pe_gb_waddr[i]), .gb_wdata(pe_gb_wdata[i]),
      .det_sparse(pe_det[i]), .det_zeros(unused_zeros),
      .stat_channels(stat_channels[i]), .stat_mac_cycles(stat_mac_cycles[i]),
      .stat_skipped_windows(stat_skipped_windows[i])
    );
  end

  // the tail PE's PPU holds the complete sums
  assign pe_we      = pe_gb_we[NUM_PE-1];
  assign pe_waddr   = pe_gb_waddr[NUM_PE-1];
  assign pe_wdata   = pe_gb_wdata[NUM_PE-1];
  assign det_sparse = pe_det[NUM_PE-1];

endmodule
