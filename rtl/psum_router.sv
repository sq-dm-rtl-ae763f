// psum_router: the router (R) attached to each D/S PE.
//
// PEs form a chain for partial sums. During the post-processing pass the
// controller reads row p of every PE's accumulation buffer; each router adds
// its PE's row to the row arriving from the previous router and registers
// the sum, so after N routers the last PE holds the full output row: the
// dense-channel and sparse-channel partial sums added together, as in the
// paper's computation scheme. A router configured as chain head ignores its
// input and takes valid and row index from its own PE; the others take
// them from the incoming row, and their PE must present the local row of
// that index (loc_row/loc_valid are then unused). Latency one cycle per
// router.
// The paper says PEs are joined by configurable routers and that partial
// sums of the dense and sparse groups are added; the chain organisation is
// this design's choice.
module psum_router
  import sqdm_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               head,     // first router of the chain
  input  logic                               in_valid,
  input  logic [HW-1:0]                      in_row,
  input  logic signed [W_MAX-1:0][ACC_W-1:0] in_psum,
  input  logic                               loc_valid,
  input  logic [HW-1:0]                      loc_row,
  input  logic signed [W_MAX-1:0][ACC_W-1:0] loc_psum,
  output logic                               out_valid,
  output logic [HW-1:0]                      out_row,
  output logic signed [W_MAX-1:0][ACC_W-1:0] out_psum
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
      out_psum  <= '0;
    end else begin
      out_valid <= head ? loc_valid : in_valid;
      out_row   <= head ? loc_row : in_row;
      for (int i = 0; i < W_MAX; i++)
        out_psum[i] <= (head ? ACC_W'(0) : in_psum[i]) + loc_psum[i];
    end
  end

endmodule
