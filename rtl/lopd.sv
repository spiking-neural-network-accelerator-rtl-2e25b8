// lopd: leading-one position detector that serializes a layer's spikes.
//
// When 'load' is high the spike vector of all neuron cores of a layer is
// captured together with the delta time of the timestep that produced it.
// Each cycle the detector finds the leading (highest) set bit, presents its
// position as out_idx, and, when the next layer takes the token, clears that
// bit with the detector's one-hot output. One spike leaves per cycle until
// the vector is empty. Spikes of one vector share one timestep, so only the
// first carries the delta time; the others, and the end token, carry 0.
// 'send_last' asks for an end-of-inference token; it is sent once the vector
// is empty and then 'last_done' pulses for one cycle.
// The paper gives the detector's function and cites several circuits for
// it; a plain priority encoder is used here. Scanning from the top bit and
// the end token are this design's own choices.
// Interface: valid/ready stream out; 'load' must only be raised while busy
// is low (asserted).
module lopd
  import snn_pkg::*;
#(
  parameter int unsigned N   = 800,
  parameter int unsigned DTW = DT_W,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  logic [N-1:0]   spikes,
  input  logic [DTW-1:0] delta,
  input  logic           send_last,
  output logic           busy,
  output logic           last_done,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [DTW-1:0] out_delta,
  output logic [IW-1:0]  out_idx,
  output logic           out_last
);

  logic [N-1:0]   vec_q;
  logic [DTW-1:0] dt_q;
  logic           first_q;
  logic [N-1:0]   onehot;
  logic [IW-1:0]  pos;
  logic           any;

  // Leading-one position and one-hot code.
  always_comb begin
    onehot = '0;
    pos    = '0;
    any    = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (vec_q[i] && !any) begin
        any       = 1'b1;
        pos       = IW'(i);
        onehot[i] = 1'b1;
      end
    end
  end

  assign busy      = any;
  assign out_valid = any || send_last;
  assign out_last  = !any;
  assign out_idx   = pos;
  assign out_delta = (any && first_q) ? dt_q : '0;
  assign last_done = send_last && !any && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vec_q   <= '0;
      dt_q    <= '0;
      first_q <= 1'b0;
    end else if (load) begin
      vec_q   <= spikes;
      dt_q    <= delta;
      first_q <= 1'b1;
    end else if (any && out_ready) begin
      vec_q   <= vec_q & ~onehot;
      first_q <= 1'b0;
    end
  end

  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) load |-> !any)
    else $error("lopd: load while still serializing");
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           (out_valid && !out_ready && !load) |=> out_valid)
    else $error("lopd: valid dropped without handshake");

endmodule
