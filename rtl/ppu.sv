// ppu: post-processing unit of a D/S PE.
//
// Receives one complete output row of 32-bit partial sums per cycle (the sum
// over dense and sparse channels, from the router chain) and, in the order
// the paper draws them, applies ReLU (when enabled), scaling, and
// requantisation, then either feeds the temporal sparsity detector or
// writes the row to the global buffer.
//   scaling: the layer scale is an FP8 E4M3 number (1+m/8)*2^(e-7), i.e.
//            (8+m)*2^(e-10) (subnormal e=0: m*2^-9); the product is rounded
//            half up to an integer.
//   requantisation: saturate to UINT4 [0,15] in 4-bit layers, INT8
//            [-128,127] in 8-bit layers.
//   output format: dense rows store all Q values plus their nonzero bitmap;
//            sparse rows store only the nonzeros packed in column order plus
//            the bitmap (value number popcount(bitmap[i-1:0]) belongs to
//            column i).
// A channel is processed in one or two passes driven by the controller:
// a detect pass (only on sparsity-update time steps) that counts zeros, then
// a write pass in the format chosen from the detector or from the stored
// channel type. Output address: out_base + k*P + p. Latency: one cycle from
// in_valid to the write.
// ReLU, scaling and the sparsity detector inside the PPU, UINT4 after ReLU,
// INT4/FP8-scale and MXINT8 formats follow the paper; one scale per layer
// (instead of per-block scale factors) is this design's simplification.
module ppu
  import sqdm_pkg::*;
#(
  parameter int unsigned THRESHOLD_PCT = SPARSITY_THRESHOLD_PCT
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // configuration of the current layer / channel
  input  prec_e                              prec,        // output precision
  input  logic                               relu_en,
  input  logic [7:0]                         scale_fp8,
  input  logic [WW-1:0]                      q,
  input  logic [HW-1:0]                      p,
  input  logic [AAW-1:0]                     out_base,
  input  logic [CW-1:0]                      k,
  input  logic                               detect_pass, // 1: count zeros, 0: write
  input  logic                               fmt_sparse,  // write format
  input  logic                               det_clr,
  // partial-sum row
  input  logic                               in_valid,
  input  logic [HW-1:0]                      in_row,
  input  logic signed [W_MAX-1:0][ACC_W-1:0] in_psum,
  // global-buffer write
  output logic                               gb_we,
  output logic [AAW-1:0]                     gb_waddr,
  output act_word_t                          gb_wdata,
  // detector
  output logic                               det_sparse,
  output logic [31:0]                        det_zeros
);

  function automatic logic [7:0] post(logic signed [ACC_W-1:0] x, logic relu,
                                      logic [7:0] sc, prec_e pr);
    logic signed [47:0] y, m;
    int sh;
    y  = (relu && x < 0) ? 48'sd0 : 48'(x);
    if (sc[6:3] == 4'd0) begin
      m  = y * $signed({45'd0, sc[2:0]});
      sh = -9;
    end else begin
      m  = y * $signed({44'd0, 1'b1, sc[2:0]});
      sh = int'(sc[6:3]) - 10;
    end
    if (sh >= 0) m = m <<< sh;
    else         m = (m + (48'sd1 <<< (-sh - 1))) >>> (-sh);
    if (sc[7]) m = -m;
    if (pr == PREC_4) begin
      if (m < 0)        return 8'd0;
      else if (m > 15)  return 8'd15;
      else              return {4'd0, m[3:0]};
    end else begin
      if (m < -128)     return 8'h80;
      else if (m > 127) return 8'h7f;
      else              return m[7:0];
    end
  endfunction

  logic [W_MAX-1:0][7:0] qv_d, qv_q;
  logic [W_MAX-1:0]      nz_d;
  logic                  v_q, det_q, fmt_q;
  logic [HW-1:0]         row_q;
  act_word_t             word_d;

  always_comb begin
    for (int i = 0; i < W_MAX; i++)
      qv_d[i] = (i < int'(q)) ? post(in_psum[i], relu_en, scale_fp8, prec) : 8'd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= 1'b0;
      det_q <= 1'b0;
      fmt_q <= 1'b0;
      row_q <= '0;
      qv_q  <= '0;
    end else begin
      v_q   <= in_valid;
      det_q <= detect_pass;
      fmt_q <= fmt_sparse;
      row_q <= in_row;
      qv_q  <= qv_d;
    end
  end

  // output packing
  always_comb begin
    int unsigned n;
    n = 0;
    for (int i = 0; i < W_MAX; i++) nz_d[i] = (qv_q[i] != 8'd0);
    word_d.bitmap = nz_d;
    word_d.data   = '0;
    for (int i = 0; i < W_MAX; i++) begin
      if (!fmt_q) word_d.data[i] = qv_q[i];
      else if (nz_d[i]) begin
        word_d.data[n] = qv_q[i];
        n++;
      end
    end
  end

  assign gb_we    = v_q && !det_q;
  assign gb_waddr = AAW'(out_base + AAW'(k) * AAW'(p) + AAW'(row_q));
  assign gb_wdata = word_d;

  sparsity_detector #(.THRESHOLD_PCT(THRESHOLD_PCT)) u_det (
    .clk, .rst_n,
    .clr       (det_clr),
    .row_valid (v_q && det_q),
    .row_val   (qv_q),
    .q, .p,
    .zero_count(det_zeros),
    .is_sparse (det_sparse)
  );

endmodule
