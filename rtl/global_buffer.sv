// global_buffer: on-chip activation and weight memory shared by the PE array.
//
// Two word-addressed arrays. The activation array holds one feature-map row
// per word in channel-last order (word = base + channel*H + row, see
// sqdm_pkg for the word format). The weight array holds one kernel per word
// (word = base + in_channel*K + out_channel), i.e. input channel outermost,
// then output channel, with the kernel rows and columns inside the word.
// Each array has N_RD synchronous read ports (data one cycle after the
// address) and one write port; a read and a write to the same word in the
// same cycle return the old contents.
// The paper names the global buffer and the interconnect to the PEs but gives
// neither size nor port structure; giving every PE a private read port (no
// bank conflicts) and the sizes in sqdm_pkg are this design's choices.
module global_buffer
  import sqdm_pkg::*;
#(
  parameter int unsigned N_RD   = 3,
  parameter int unsigned A_DEPTH = ACT_DEPTH,
  parameter int unsigned W_DEPTH = WT_DEPTH
) (
  input  logic                      clk,
  // activation read ports
  input  logic [N_RD-1:0]           a_re,
  input  logic [N_RD-1:0][AAW-1:0]  a_raddr,
  output act_word_t [N_RD-1:0]      a_rdata,
  // activation write port
  input  logic                      a_we,
  input  logic [AAW-1:0]            a_waddr,
  input  act_word_t                 a_wdata,
  // weight read ports
  input  logic [N_RD-1:0]           w_re,
  input  logic [N_RD-1:0][WAW-1:0]  w_raddr,
  output logic [N_RD-1:0][WT_WORD_W-1:0] w_rdata,
  // weight write port
  input  logic                      w_we,
  input  logic [WAW-1:0]            w_waddr,
  input  logic [WT_WORD_W-1:0]      w_wdata
);

  act_word_t              act_mem [A_DEPTH];
  logic [WT_WORD_W-1:0]   wt_mem  [W_DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) act_mem[a_waddr[$clog2(A_DEPTH)-1:0]] <= a_wdata;
    if (w_we) wt_mem[w_waddr[$clog2(W_DEPTH)-1:0]]  <= w_wdata;
  end

  for (genvar i = 0; i < N_RD; i++) begin : g_rd
    always_ff @(posedge clk) begin
      if (a_re[i]) a_rdata[i] <= act_mem[a_raddr[i][$clog2(A_DEPTH)-1:0]];
      if (w_re[i]) w_rdata[i] <= wt_mem[w_raddr[i][$clog2(W_DEPTH)-1:0]];
    end
  end

endmodule
