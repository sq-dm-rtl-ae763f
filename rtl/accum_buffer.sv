// accum_buffer: partial-sum storage of one D/S PE.
//
// Holds the P x Q partial sums of the output channel being computed, one
// row of Q_MAX values per word. `clr` zeroes a row, `add` adds a vector of
// column increments into a row (read-modify-write in one cycle), and the
// read port returns a row combinationally for the post-processing pass.
// A clear and an add to the same row in one cycle leave the increment.
// The paper names the accumulation buffer; its organisation is this
// design's choice.
module accum_buffer
  import sqdm_pkg::*;
#(
  parameter int unsigned ROWS = H_MAX
) (
  input  logic                               clk,
  input  logic                               clr,
  input  logic [HW-1:0]                      clr_row,
  input  logic                               add,
  input  logic [HW-1:0]                      add_row,
  input  logic signed [W_MAX-1:0][ACC_W-1:0] add_val,
  input  logic [HW-1:0]                      rd_row,
  output logic signed [W_MAX-1:0][ACC_W-1:0] rd_val
);

  logic signed [W_MAX-1:0][ACC_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (clr && int'(clr_row) < ROWS) mem[clr_row] <= '0;
    if (add && int'(add_row) < ROWS) begin
      for (int i = 0; i < W_MAX; i++)
        mem[add_row][i] <= ((clr && clr_row == add_row) ? ACC_W'(0) : mem[add_row][i]) + add_val[i];
    end
  end

  assign rd_val = (int'(rd_row) < ROWS) ? mem[rd_row] : '0;

endmodule
