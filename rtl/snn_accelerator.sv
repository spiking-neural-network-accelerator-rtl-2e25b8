// snn_accelerator: feed-forward SNN accelerator for delta-time spike trains.
//
// The input synapses deliver encoded spike trains in differential time:
// each spike is the number of time units since that synapse's previous
// spike. One spike sorter, shared by the whole network, merges them into a
// single stream ordered by time. The stream runs through a chain of fully
// connected LIF layers, N_L0-N_L1-N_L2-N_L3 neurons (800-512-256-10 as in the
// paper's evaluated network, fed by 400 inputs from 9x9-patch encoding of
// 28x28 images). Each layer's output is again a time-ordered delta-time
// stream, so layers connect directly. The last layer's spikes leave on the
// out_* stream; an end token (out_last) closes each inference.
// Weights are loaded before inference through a 32-bit port: wr_layer picks
// the layer, wr_row the input synapse, wr_group a block of 8 neurons.
// Network sizes follow the paper; the load port, the end token and the
// fixed-point formats (see snn_pkg) are this design's own.
// Event outputs (one bit per layer) pulse on a LOPD stall, a threshold step,
// a threshold step that produced spikes, and a saturated delta time.
module snn_accelerator
  import snn_pkg::*;
#(
  parameter int unsigned N_IN = 400,
  parameter int unsigned N_L0 = 800,
  parameter int unsigned N_L1 = 512,
  parameter int unsigned N_L2 = 256,
  parameter int unsigned N_L3 = 10,
  localparam int unsigned OUT_IW = (N_L3 > 1) ? $clog2(N_L3) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_IN-1:0]              in_valid,
  output logic [N_IN-1:0]              in_ready,
  input  logic [N_IN-1:0][DT_W-1:0]    in_delta,
  input  logic [N_IN-1:0]              in_last,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [DT_W-1:0]              out_delta,
  output logic [OUT_IW-1:0]            out_idx,
  output logic                         out_last,
  input  logic                         wr_en,
  input  logic [1:0]                   wr_layer,
  input  logic [9:0]                   wr_row,
  input  logic [6:0]                   wr_group,
  input  logic [WR_LANES-1:0][W_W-1:0] wr_data,
  output logic [3:0]                   ev_stall,
  output logic [3:0]                   ev_fire,
  output logic [3:0]                   ev_fire_spiked,
  output logic [3:0]                   ev_sat
);

  localparam int unsigned NL [5] = '{N_IN, N_L0, N_L1, N_L2, N_L3};
  localparam int unsigned MAXN   = 1024;

  // Stream between stage s-1 and s (stage 0 = sorter output).
  logic [4:0]                      st_valid, st_ready, st_last;
  logic [4:0][DT_W-1:0]            st_delta;
  logic [4:0][$clog2(MAXN)-1:0]    st_idx;

  localparam int unsigned IW0 = (N_IN > 1) ? $clog2(N_IN) : 1;
  logic [IW0-1:0] sorter_idx;

  spike_sorter #(.N_IN(N_IN), .DTW(DT_W)) u_sorter (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_delta, .in_last,
    .out_valid(st_valid[0]), .out_ready(st_ready[0]),
    .out_delta(st_delta[0]), .out_idx(sorter_idx), .out_last(st_last[0])
  );
  assign st_idx[0] = $clog2(MAXN)'(sorter_idx);

  for (genvar l = 0; l < 4; l++) begin : g_layer
    localparam int unsigned NS     = NL[l];
    localparam int unsigned NN     = NL[l+1];
    localparam int unsigned IWI    = (NS > 1) ? $clog2(NS) : 1;
    localparam int unsigned IWO    = (NN > 1) ? $clog2(NN) : 1;
    localparam int unsigned GRPS   = (NN + WR_LANES - 1) / WR_LANES;
    localparam int unsigned GWL    = (GRPS > 1) ? $clog2(GRPS) : 1;
    logic [IWO-1:0] idx_out;

    neuron_layer #(.N_SYN(NS), .N_NEURONS(NN), .DTW(DT_W)) u_layer (
      .clk, .rst_n,
      .in_valid(st_valid[l]), .in_ready(st_ready[l]), .in_delta(st_delta[l]),
      .in_idx(st_idx[l][IWI-1:0]), .in_last(st_last[l]),
      .out_valid(st_valid[l+1]), .out_ready(st_ready[l+1]), .out_delta(st_delta[l+1]),
      .out_idx(idx_out), .out_last(st_last[l+1]),
      .wr_en(wr_en && (wr_layer == 2'(l))),
      .wr_row(wr_row[IWI-1:0]), .wr_group(wr_group[GWL-1:0]), .wr_data,
      .ev_stall(ev_stall[l]), .ev_fire(ev_fire[l]),
      .ev_fire_spiked(ev_fire_spiked[l]), .ev_sat(ev_sat[l])
    );
    assign st_idx[l+1] = $clog2(MAXN)'(idx_out);
  end

  assign out_valid   = st_valid[4];
  assign st_ready[4] = out_ready;
  assign out_delta   = st_delta[4];
  assign out_idx     = st_idx[4][OUT_IW-1:0];
  assign out_last    = st_last[4];

endmodule
