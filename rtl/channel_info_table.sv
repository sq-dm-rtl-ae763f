// channel_info_table: per-layer sparsity type of every input channel.
//
// Entry L, bit c is the type (0 = dense, 1 = sparse) of input channel c of
// layer L, which is output channel c of layer L-1. The temporal sparsity
// detector writes one bit per output channel as it classifies it; the host
// may write bits too (for the first layer's input). The whole vector of a
// layer is read combinationally by the address generators at layer start;
// a second port reads a single bit for the controller.
// Reset marks every channel dense. The paper describes this information as
// the "sparsity type / channel #" table of the sparsity-aware address
// generator; keeping one vector per layer so that a classification can be
// reused over several time steps is this design's reading of the paper's
// update-scheduling analysis.
module channel_info_table
  import sqdm_pkg::*;
#(
  parameter int unsigned N_LAYERS = L_MAX + 1,
  parameter int unsigned N_CH     = C_MAX
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         we,
  input  logic [$clog2(N_LAYERS)-1:0]  wlayer,
  input  logic [$clog2(N_CH)-1:0]      wch,
  input  logic                         wtype,   // 1 = sparse
  input  logic [$clog2(N_LAYERS)-1:0]  rlayer,
  output logic [N_CH-1:0]              rtypes,
  input  logic [$clog2(N_LAYERS)-1:0]  blayer,
  input  logic [$clog2(N_CH)-1:0]      bch,
  output logic                         btype
);

  logic [N_CH-1:0] tbl [N_LAYERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LAYERS; l++) tbl[l] <= '0;
    end else if (we && (int'(wlayer) < N_LAYERS)) begin
      tbl[wlayer][wch] <= wtype;
    end
  end

  assign rtypes = (int'(rlayer) < N_LAYERS) ? tbl[rlayer] : '0;
  assign btype  = (int'(blayer) < N_LAYERS) ? tbl[blayer][bch] : 1'b0;

endmodule
