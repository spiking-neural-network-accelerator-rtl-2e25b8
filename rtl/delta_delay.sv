// delta_delay: holds back the delta time of a layer until its output spikes leave.
//
// The delta time of an incoming spike is known at once, while the spikes it
// causes appear only after the neuron cores have decayed, accumulated and
// thresholded. All output spikes of one timestep share that timestep's time.
// This block keeps 'acc', the time from the last timestep that produced
// output spikes to the timestep being accumulated now:
//   add        acc <= acc + delta_in        (a new input spike was added)
//   fire       acc <= 0 if the timestep spiked
// delta_out shows acc; the LOPD captures it at the fire edge as the delta
// time of the timestep's output spikes.
// A timestep that produces no spike therefore hands its time on to the next
// one, and the next layer sees correct deltas. 'add' and 'fire' are never
// high together. The sum saturates at 2^DTW-1: a gap that long has already
// decayed every potential of the next layer to its floor, so nothing is lost
// as long as 2^DTW-1 >= POT_W. The accumulator and the saturation are this
// design's reading of the paper's 'Delay' block; 'clear' restarts it for a
// new inference.
module delta_delay
  import snn_pkg::*;
#(
  parameter int unsigned DTW = DT_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           add,
  input  logic [DTW-1:0] delta_in,
  input  logic           fire,
  input  logic           any_spike,
  output logic [DTW-1:0] delta_out,
  output logic           saturated
);

  logic [DTW-1:0] acc_q;
  logic [DTW:0]   sum;

  always_comb begin
    sum       = {1'b0, acc_q} + {1'b0, delta_in};
    saturated = add && sum[DTW];
    delta_out = acc_q;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      acc_q <= '0;
    end else if (fire) begin
      if (any_spike) acc_q <= '0;
    end else if (add) begin
      acc_q <= sum[DTW] ? {DTW{1'b1}} : sum[DTW-1:0];
    end
  end

  a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(add && fire))
    else $error("delta_delay: add and fire together");

endmodule
