// dense_dist: distribution network of the dense datapath.
//
// Walks the R x W activation window row by row in segments of EPC columns
// and hands one segment per cycle to the multiplier array, zeros included,
// each lane tagged with its kernel row and input column. The mapping of
// lanes to window positions is fixed (lane j carries column seg*EPC + j), as
// in a dense (MAERI-like) array. `start` arms it, `step` consumes the current
// segment; `last` marks the final segment of the window. One window takes
// R * ceil(W/EPC) cycles.
// The paper names a MAERI-like dense datapath; the fixed segment walk is this
// design's simplest form of it.
module dense_dist
  import sqdm_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         step,
  input  logic [1:0]                   r,      // kernel rows in use
  input  logic [WW-1:0]                w,      // row width in use
  input  logic [R_MAX-1:0][W_MAX-1:0][7:0] win_val,
  output logic                         busy,
  output logic                         last,
  output logic [EPC-1:0]               lane_valid,
  output logic [EPC-1:0][7:0]          lane_val,
  output logic [EPC-1:0][1:0]          lane_row,
  output logic [EPC-1:0][WW-1:0]       lane_col
);

  logic [1:0]    row_q;
  logic [WW-1:0] col_q;   // first column of the current segment

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      row_q <= '0;
      col_q <= '0;
    end else if (start) begin
      busy  <= 1'b1;
      row_q <= '0;
      col_q <= '0;
    end else if (step && busy) begin
      if (last) busy <= 1'b0;
      if (int'(col_q) + EPC >= int'(w)) begin
        col_q <= '0;
        row_q <= row_q + 2'd1;
      end else begin
        col_q <= WW'(int'(col_q) + EPC);
      end
    end
  end

  assign last = busy && (int'(col_q) + EPC >= int'(w)) && (row_q == r - 2'd1);

  always_comb begin
    for (int j = 0; j < EPC; j++) begin
      int c;
      c = int'(col_q) + j;
      lane_valid[j] = busy && (c < int'(w));
      lane_val[j]   = (c < W_MAX) ? win_val[row_q][c[$clog2(W_MAX)-1:0]] : 8'd0;
      lane_row[j]   = row_q;
      lane_col[j]   = WW'(c);
    end
  end

endmodule
