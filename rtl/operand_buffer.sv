// operand_buffer: weight buffer and input/index buffer of one D/S PE.
//
// Weight buffer: one register holding the kernel of the current
// (input channel, output channel) pair, loaded from a global-buffer weight
// word with `wt_load`.
// Input/index buffer: a sliding window of R activation rows. `row_load`
// shifts the window up by one row and writes the new row in slot R-1, so after
// loading rows h..h+R-1 slot r holds row h+r. A row arriving in compressed
// (sparse) format is expanded on the way in: column i receives packed value
// number popcount(bitmap[i-1:0]) when bitmap[i] is set, zero otherwise. The
// bitmap (the index information) is kept next to the values. A dense row is
// stored as it comes. Loads take effect at the next clock edge; outputs are
// the registered window.
// The paper names these buffers and the value+bitmap format; the window
// organisation and the expand-on-load are this design's choices.
module operand_buffer
  import sqdm_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wt_load,
  input  logic [WT_WORD_W-1:0]  wt_word,
  input  logic                  row_load,
  input  logic                  row_sparse,   // row is in compressed format
  input  act_word_t             row_word,
  input  logic [1:0]            r,            // kernel rows in use (1..R_MAX)
  output logic [R_MAX-1:0][S_MAX-1:0][7:0] kernel,
  output logic [R_MAX-1:0][W_MAX-1:0][7:0] win_val,
  output logic [R_MAX-1:0][W_MAX-1:0]      win_nz
);

  logic [W_MAX-1:0][7:0] exp_val;

  always_comb begin
    logic [WW-1:0] rank;
    rank = '0;
    for (int i = 0; i < W_MAX; i++) begin
      if (!row_sparse)           exp_val[i] = row_word.data[i];
      else if (row_word.bitmap[i]) exp_val[i] = row_word.data[rank[$clog2(W_MAX)-1:0]];
      else                       exp_val[i] = '0;
      rank = rank + WW'(row_word.bitmap[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kernel  <= '0;
      win_val <= '0;
      win_nz  <= '0;
    end else begin
      if (wt_load) kernel <= wt_word;
      if (row_load) begin
        for (int s = 0; s < R_MAX - 1; s++) begin
          if (s < int'(r) - 1) begin
            win_val[s] <= win_val[s+1];
            win_nz[s]  <= win_nz[s+1];
          end
        end
        win_val[r-2'd1] <= exp_val;
        win_nz[r-2'd1]  <= row_word.bitmap;
      end
    end
  end

endmodule
