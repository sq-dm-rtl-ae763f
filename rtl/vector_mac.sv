// vector_mac: mixed-precision multiplier array and reduction network.
//
// EPC activation lanes each meet S_MAX multipliers, one per kernel column,
// giving EPC*S_MAX of the PE's MULTS multipliers (126 of 128 at the default
// sizes; two stay idle). A lane carrying activation x at (kernel row rr,
// input column col) multiplies it with w[rr][s] for every kernel column
// s < S, and the product belongs to output column q = col - s + pad, valid
// when 0 <= q < Q (pad is the left zero padding; padded positions are zero
// and contribute nothing, so they are never fed). The reduction network adds all
// products of the cycle that belong to the same output column, so the
// result is one partial-sum increment per output column. It is purely
// combinational: results are valid in the cycle the lanes are.
// Precision: in 4-bit layers activations are UINT4 and weights INT4 (low
// nibble of the container); in 8-bit layers both are INT8. The paper gives
// the multiplier count, the distribution/reduction structure and the
// formats; per-vector scale factors are not applied here (see ppu).
module vector_mac
  import sqdm_pkg::*;
(
  input  prec_e                             prec,
  input  logic [1:0]                        s,      // kernel columns in use
  input  logic [WW-1:0]                     q,      // output columns in use
  input  logic [1:0]                        pad,    // left zero-padding columns
  input  logic [R_MAX-1:0][S_MAX-1:0][7:0]  kernel,
  input  logic [EPC-1:0]                    lane_valid,
  input  logic [EPC-1:0][7:0]               lane_val,
  input  logic [EPC-1:0][1:0]               lane_row,
  input  logic [EPC-1:0][WW-1:0]            lane_col,
  output logic signed [W_MAX-1:0][ACC_W-1:0] col_sum
);

  function automatic logic signed [8:0] act_op(prec_e p, logic [7:0] v);
    return (p == PREC_4) ? $signed({5'b0, v[3:0]}) : $signed({v[7], v});
  endfunction

  function automatic logic signed [8:0] wt_op(prec_e p, logic [7:0] v);
    return (p == PREC_4) ? $signed({{5{v[3]}}, v[3:0]}) : $signed({v[7], v});
  endfunction

  always_comb begin
    col_sum = '0;
    for (int j = 0; j < EPC; j++) begin
      for (int t = 0; t < S_MAX; t++) begin
        logic signed [17:0] prod;
        int oc;
        prod = act_op(prec, lane_val[j]) * wt_op(prec, kernel[lane_row[j]][t]);
        oc   = int'(lane_col[j]) - t + int'(pad);
        if (lane_valid[j] && (t < int'(s)) && (oc >= 0) && (oc < int'(q)) && (oc < W_MAX))
          col_sum[oc] = col_sum[oc] + ACC_W'(prod);
      end
    end
  end

endmodule
