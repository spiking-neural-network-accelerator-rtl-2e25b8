// neuron_layer: one fully connected layer of LIF neurons.
//
// An input spike (delta, synapse index) addresses the weights memory; the
// row read holds one weight per neuron and goes straight to the neuron
// cores. The layer controller decays all cores for 'delta' cycles, adds the
// weights, and thresholds once all spikes of one timestep are in. The spike
// vector of the cores is captured by the LOPD, which serializes it into the
// next layer's input stream; the delay block supplies the delta time of that
// timestep, so the output stream has the same form as the input stream.
// The wiring follows the paper's layer diagram; the end-of-inference token
// and the weight load port are this design's own.
// Interface: valid/ready spike streams in and out; weight load port of
// WR_LANES weights per cycle; event strobes for observation.
module neuron_layer
  import snn_pkg::*;
#(
  parameter int unsigned N_SYN     = 400,
  parameter int unsigned N_NEURONS = 800,
  parameter int unsigned DTW       = DT_W,
  localparam int unsigned IW_IN  = (N_SYN > 1) ? $clog2(N_SYN) : 1,
  localparam int unsigned IW_OUT = (N_NEURONS > 1) ? $clog2(N_NEURONS) : 1,
  localparam int unsigned GROUPS = (N_NEURONS + WR_LANES - 1) / WR_LANES,
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [DTW-1:0]               in_delta,
  input  logic [IW_IN-1:0]             in_idx,
  input  logic                         in_last,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [DTW-1:0]               out_delta,
  output logic [IW_OUT-1:0]            out_idx,
  output logic                         out_last,
  input  logic                         wr_en,
  input  logic [IW_IN-1:0]             wr_row,
  input  logic [GW-1:0]                wr_group,
  input  logic [WR_LANES-1:0][W_W-1:0] wr_data,
  output logic                         ev_stall,
  output logic                         ev_fire,
  output logic                         ev_fire_spiked,
  output logic                         ev_sat
);

  logic                          mem_re;
  logic [IW_IN-1:0]              mem_raddr;
  logic [N_NEURONS-1:0][W_W-1:0] weights;
  core_op_e                      op;
  logic                          clear;
  logic [N_NEURONS-1:0]          spikes;
  logic                          lopd_busy, lopd_last_done, lopd_load, lopd_send_last;
  logic                          dly_add, dly_fire;
  logic [DTW-1:0]                dly_delta, grp_delta;

  weight_memory #(.DEPTH(N_SYN), .N_NEURONS(N_NEURONS), .WW(W_W), .LANES(WR_LANES)) u_mem (
    .clk, .re(mem_re), .raddr(mem_raddr), .rdata(weights),
    .we(wr_en), .waddr(wr_row), .wgroup(wr_group), .wdata(wr_data)
  );

  layer_controller #(.N_SYN(N_SYN), .DTW(DTW)) u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_delta, .in_idx, .in_last,
    .mem_re, .mem_raddr,
    .op, .clear,
    .lopd_busy, .lopd_last_done, .lopd_load, .lopd_send_last,
    .dly_add, .dly_delta, .dly_fire,
    .stall(ev_stall)
  );

  for (genvar n = 0; n < N_NEURONS; n++) begin : g_core
    neuron_core u_core (
      .clk, .rst_n, .op, .clear,
      .w(weights[n]),
      .spike(spikes[n]),
      .pot()
    );
  end

  delta_delay #(.DTW(DTW)) u_dly (
    .clk, .rst_n, .clear,
    .add(dly_add), .delta_in(dly_delta),
    .fire(dly_fire), .any_spike(|spikes),
    .delta_out(grp_delta), .saturated(ev_sat)
  );

  lopd #(.N(N_NEURONS), .DTW(DTW)) u_lopd (
    .clk, .rst_n,
    .load(lopd_load), .spikes, .delta(grp_delta),
    .send_last(lopd_send_last), .busy(lopd_busy), .last_done(lopd_last_done),
    .out_valid, .out_ready, .out_delta, .out_idx, .out_last
  );

  assign ev_fire        = dly_fire;
  assign ev_fire_spiked = dly_fire && (|spikes);

endmodule
