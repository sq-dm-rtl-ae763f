// sparsity_detector: temporal sparsity detector of the post-processing unit.
//
// For one output channel it compares every post-processed output value with
// zero ("=0?"), counts the zeros over all rows of the channel ("Counter") and
// compares the count with the sparsity threshold (">theta?"): the channel is
// sparse when zeros * 100 > THRESHOLD_PCT * (P * Q). `clr` starts a new
// channel; each `row_valid` adds the zeros among the first Q values of a
// row. The count is registered; `is_sparse` is combinational from it and
// valid the cycle after the last row. The classification is written to the
// channel information of the next layer.
// The structure (zero test, counter, threshold compare) and the 30 %
// threshold follow the paper; the percent form of the compare is this
// design's choice.
module sparsity_detector
  import sqdm_pkg::*;
#(
  parameter int unsigned THRESHOLD_PCT = SPARSITY_THRESHOLD_PCT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  row_valid,
  input  logic [W_MAX-1:0][7:0] row_val,
  input  logic [WW-1:0]         q,        // valid values per row
  input  logic [HW-1:0]         p,        // rows per channel
  output logic [31:0]           zero_count,
  output logic                  is_sparse
);

  logic [WW-1:0] row_zeros;

  always_comb begin
    row_zeros = '0;
    for (int i = 0; i < W_MAX; i++)
      if ((i < int'(q)) && (row_val[i] == 8'd0)) row_zeros = row_zeros + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         zero_count <= '0;
    else if (clr)       zero_count <= '0;
    else if (row_valid) zero_count <= zero_count + 32'(row_zeros);
  end

  assign is_sparse = (64'(zero_count) * 64'd100) >
                     (64'(THRESHOLD_PCT) * 64'(p) * 64'(q));

endmodule
