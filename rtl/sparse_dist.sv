// sparse_dist: distribution network of the sparse datapath.
//
// Takes the R x W activation window together with its bitmap and hands only
// the nonzero activations to the multiplier array, EPC per cycle, packed
// densely regardless of which row or column they come from, each lane tagged
// with its kernel row and input column so the reduction network can route
// its products. Zero activations cost no cycle: a window with n nonzeros takes
// ceil(n/EPC) cycles, and none when it is all zero (`busy` stays low after
// `start`). `step` consumes the current group; `last` marks the final one.
// Selection: the remaining nonzeros are ranked in row-major order and lane j
// takes the one of rank j, a prefix-count crossbar in the spirit of SIGMA's
// flexible distribution network. The paper names a SIGMA-like sparse
// datapath and the value+bitmap format; the ranking crossbar is this
// design's implementation.
module sparse_dist
  import sqdm_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         step,
  input  logic [1:0]                   r,
  input  logic [WW-1:0]                w,
  input  logic [R_MAX-1:0][W_MAX-1:0][7:0] win_val,
  input  logic [R_MAX-1:0][W_MAX-1:0]      win_nz,
  output logic                         busy,
  output logic                         last,
  output logic [EPC-1:0]               lane_valid,
  output logic [EPC-1:0][7:0]          lane_val,
  output logic [EPC-1:0][1:0]          lane_row,
  output logic [EPC-1:0][WW-1:0]       lane_col
);

  localparam int unsigned NPOS = R_MAX * W_MAX;

  logic [NPOS-1:0] rem_q, init_mask, take;
  int unsigned     n_rem;

  always_comb begin
    for (int rr = 0; rr < R_MAX; rr++)
      for (int c = 0; c < W_MAX; c++)
        init_mask[rr*W_MAX + c] = win_nz[rr][c] && (rr < int'(r)) && (c < int'(w));
  end

  always_comb begin
    int unsigned rank;
    rank       = 0;
    take       = '0;
    lane_valid = '0;
    lane_val   = '0;
    lane_row   = '0;
    lane_col   = '0;
    for (int i = 0; i < NPOS; i++) begin
      if (rem_q[i]) begin
        if (rank < EPC) begin
          take[i]          = 1'b1;
          lane_valid[rank] = 1'b1;
          lane_val[rank]   = win_val[i / W_MAX][i % W_MAX];
          lane_row[rank]   = 2'(i / W_MAX);
          lane_col[rank]   = WW'(i % W_MAX);
        end
        rank++;
      end
    end
    n_rem = rank;
  end

  assign busy = |rem_q;
  assign last = busy && (n_rem <= EPC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            rem_q <= '0;
    else if (start)        rem_q <= init_mask;
    else if (step && busy) rem_q <= rem_q & ~take;
  end

endmodule
