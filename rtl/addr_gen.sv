// addr_gen: sparsity-aware address generator of one D/S PE.
//
// At `load` (start of an output channel k) it reads the layer's channel-type
// vector and keeps the list of input channels this PE owns: channels whose
// type equals the PE's datapath type (dense or sparse) and, when several PEs
// share a type, every pe_cnt-th such channel starting at pe_rank. The current
// channel is the lowest one still in the list; `next_ch` removes it. For the
// current channel c it forms the channel-last addresses
//   activation row h : act_base + c*H + h
//   kernel (c,k)     : wt_base  + c*K + k
// which follow the paper's mapping (activations: W, then H, then C last;
// weights: S, R, then K, then C last). Addresses are combinational from the
// registered list and the requested row; `load` takes one cycle.
// The paper gives the table contents (type, channel numbers, other layer
// parameters) and the mapping; the round-robin split between PEs of one type
// is this design's choice.
module addr_gen
  import sqdm_pkg::*;
#(
  parameter int unsigned N_CH = C_MAX
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [N_CH-1:0]   types,     // 1 = sparse, per input channel
  input  logic              my_sparse, // this PE runs the sparse datapath
  input  logic [3:0]        pe_rank,   // rank among PEs of the same type
  input  logic [3:0]        pe_cnt,    // number of PEs of the same type (>=1)
  input  logic [CW-1:0]     c_in,
  input  logic [CW-1:0]     k_out,
  input  logic [HW-1:0]     h_in,
  input  logic [AAW-1:0]    act_base,
  input  logic [WAW-1:0]    wt_base,
  input  logic [CW-1:0]     k,
  input  logic              next_ch,
  input  logic [HW-1:0]     h,         // activation row to address
  output logic              ch_valid,
  output logic [CW-1:0]     ch,
  output logic [AAW-1:0]    act_addr,
  output logic [WAW-1:0]    wt_addr
);

  logic [N_CH-1:0] mine_q, mine_d;

  // ownership of each channel, computed at load
  always_comb begin
    logic [3:0] ord;
    ord    = '0;
    mine_d = '0;
    for (int c = 0; c < N_CH; c++) begin
      if ((c < int'(c_in)) && (types[c] == my_sparse)) begin
        mine_d[c] = (ord == pe_rank);
        ord = (ord + 4'd1 >= pe_cnt) ? 4'd0 : ord + 4'd1;
      end
    end
  end

  // lowest remaining channel
  always_comb begin
    ch = '0;
    for (int c = N_CH - 1; c >= 0; c--)
      if (mine_q[c]) ch = CW'(c);
  end
  assign ch_valid = |mine_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       mine_q <= '0;
    else if (load)    mine_q <= mine_d;
    else if (next_ch && ch_valid) mine_q[ch] <= 1'b0;
  end

  assign act_addr = AAW'(act_base + AAW'(ch) * AAW'(h_in) + AAW'(h));
  assign wt_addr  = WAW'(wt_base + WAW'(ch) * WAW'(k_out) + WAW'(k));

endmodule
