// controller: time-step, layer and channel sequencing of the accelerator.
//
// Holds the host-written layer descriptors and the current time-step
// information, and runs every layer of the model once per time step for
// `num_steps` time steps. For each layer and each output channel k it
//   1. starts all PEs on channel k and waits until all are done;
//   2. on a sparsity-update time step (t mod update_period == 0, the paper's
//      choice being an update every time step), runs a detect pass: the
//      accumulator rows 0..P-1 are streamed through the router chain into the
//      last PE's PPU, whose detector classifies the channel; the result is
//      written to the channel information of layer L+1 and selects the
//      storage format of the channel;
//   3. runs a write pass that streams the rows again and stores them in the
//      global buffer, in the format given by step 2 or, on other time steps,
//      by the stored type (dense for a layer marked out_dense).
// The table write data ct_type is the tail PPU's detector output wired
// straight through; ct_we, raised at the end of a detect pass, qualifies it.
// A pass issues one row per cycle and then waits `DRAIN` cycles for the
// router chain and PPU pipeline. Between time steps nothing else happens:
// the sampler arithmetic that turns the network output into the next input
// is left to the host.
// The paper states that the controller keeps current time-step information
// and orchestrates the PEs, and that channel types are refreshed from the
// detector; the pass structure and handshakes are this design's choices.
module controller
  import sqdm_pkg::*;
#(
  parameter int unsigned NUM_PE = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host configuration
  input  logic                  desc_we,
  input  logic [LW-1:0]         desc_idx,
  input  layer_desc_t           desc_wdata,
  input  logic [LW-1:0]         num_layers,
  input  logic [15:0]           num_steps,
  input  logic [15:0]           update_period,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  // current time-step information
  output logic [15:0]           timestep,
  output logic [LW-1:0]         layer,
  output logic [CW-1:0]         k,
  output layer_desc_t           desc,
  // PE array
  output logic                  pe_start,
  input  logic [NUM_PE-1:0]     pe_done,
  output logic                  pp_valid,
  output logic [HW-1:0]         pp_row,
  output logic                  ppu_detect,
  output logic                  ppu_fmt_sparse,
  output logic                  ppu_det_clr,
  input  logic                  det_sparse,
  // channel information table
  output logic                  ct_we,
  output logic [LW-1:0]         ct_layer,
  output logic [CW-1:0]         ct_ch,
  output logic                  ct_type,
  input  logic                  ct_next_type,   // stored type of (layer+1, k)
  // activity counters
  output logic [31:0]           stat_updates,
  output logic [31:0]           stat_to_sparse,
  output logic [31:0]           stat_to_dense,
  output logic [31:0]           stat_reused
);

  localparam int unsigned DRAIN = NUM_PE + 3;

  typedef enum logic [2:0] {C_IDLE, C_LAYER, C_RUN, C_WAIT, C_PASS, C_DRAIN, C_DONE} cst_e;
  cst_e st;

  layer_desc_t   desc_mem [L_MAX];
  logic          update_now, detect_q, fmt_q;
  logic [HW-1:0] row_cnt, p_out;
  logic [3:0]    drain_cnt;
  logic [15:0]   upd_cnt;

  assign p_out = out_rows(desc);

  always_ff @(posedge clk) begin
    if (desc_we && int'(desc_idx) < L_MAX) desc_mem[desc_idx] <= desc_wdata;
  end

  assign busy           = (st != C_IDLE) && (st != C_DONE);
  assign done           = (st == C_DONE);
  assign pe_start       = (st == C_RUN);
  assign pp_valid       = (st == C_PASS);
  assign pp_row         = row_cnt;
  assign ppu_detect     = detect_q;
  assign ppu_fmt_sparse = fmt_q;
  assign ppu_det_clr    = (st == C_RUN);
  assign ct_layer       = LW'(layer + 1'b1);
  assign ct_ch          = k;
  assign ct_type        = det_sparse;
  assign ct_we          = (st == C_DRAIN) && (drain_cnt == 4'(DRAIN - 1)) && detect_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_IDLE;
      timestep   <= '0;
      layer      <= '0;
      k          <= '0;
      desc       <= '0;
      update_now <= 1'b0;
      detect_q   <= 1'b0;
      fmt_q      <= 1'b0;
      row_cnt    <= '0;
      drain_cnt  <= '0;
      upd_cnt    <= '0;
      stat_updates   <= '0;
      stat_to_sparse <= '0;
      stat_to_dense  <= '0;
      stat_reused    <= '0;
    end else begin
      case (st)
        C_IDLE, C_DONE: if (start) begin
          st       <= C_LAYER;
          timestep <= '0;
          layer    <= '0;
          upd_cnt  <= '0;
        end
        C_LAYER: begin
          desc       <= desc_mem[layer];
          update_now <= (upd_cnt == 16'd0);
          k          <= '0;
          st         <= C_RUN;
        end
        C_RUN: st <= C_WAIT;
        C_WAIT: if (&pe_done) begin
          row_cnt <= '0;
          st      <= C_PASS;
          if (update_now && !desc.out_dense) begin
            detect_q <= 1'b1;
          end else begin
            detect_q <= 1'b0;
            fmt_q    <= desc.out_dense ? 1'b0 : ct_next_type;
            if (!desc.out_dense) stat_reused <= stat_reused + 1;
          end
        end
        C_PASS: begin
          row_cnt <= row_cnt + 1'b1;
          if (row_cnt + 1'b1 >= p_out) begin
            st        <= C_DRAIN;
            drain_cnt <= '0;
          end
        end
        C_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 4'(DRAIN - 1)) begin
            if (detect_q) begin
              // classification done: write pass in the detected format
              stat_updates <= stat_updates + 1;
              if (det_sparse && !ct_next_type) stat_to_sparse <= stat_to_sparse + 1;
              if (!det_sparse && ct_next_type) stat_to_dense  <= stat_to_dense + 1;
              detect_q <= 1'b0;
              fmt_q    <= det_sparse;
              row_cnt  <= '0;
              st       <= C_PASS;
            end else if (k + 1'b1 < desc.k_out) begin
              k  <= k + 1'b1;
              st <= C_RUN;
            end else if (layer + 1'b1 < num_layers) begin
              layer <= layer + 1'b1;
              st    <= C_LAYER;
            end else if (timestep + 1'b1 < num_steps) begin
              timestep <= timestep + 1'b1;
              layer    <= '0;
              upd_cnt  <= (upd_cnt + 1'b1 >= update_period) ? 16'd0 : upd_cnt + 1'b1;
              st       <= C_LAYER;
            end else begin
              st <= C_DONE;
            end
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

endmodule
