// neuron_core: one leaky integrate-and-fire neuron with reset by subtraction.
//
// The core follows the paper's neuron core: a single potential register P,
// a one-bit right shift for the decay (beta = 0.5), one adder and one
// threshold comparator (theta = 1.0). Per cycle the layer controller sends
// one operation to every core of the layer:
//   OP_DECAY  P <= P >>> 1         (repeated delta-time times per spike)
//   OP_ADD    P <= P + w           (weight of the synapse that spiked)
//   OP_FIRE   spike <= (P >= theta); if so P <= P - theta
//   OP_NOP    hold
// The adder is shared: during OP_FIRE its addend is -theta instead of w.
// The shift is arithmetic, so negative potentials decay as well, and the
// adder saturates at the range of POT_W bits; both are this design's
// choices, as is the 'clear' input that zeroes P between inferences.
// The weight is a signed W_W-bit number with W_FRAC fraction bits and is
// aligned to the POT_FRAC fraction bits of P by a fixed left shift.
// Timing: P updates at the next clock edge; 'spike' is combinational and
// valid during the OP_FIRE cycle, so the layer can capture the spike vector
// at the same edge that resets the potentials.
module neuron_core
  import snn_pkg::*;
#(
  parameter int unsigned WW    = W_W,
  parameter int unsigned WFRAC = W_FRAC,
  parameter int unsigned PW    = POT_W,
  parameter int unsigned PFRAC = POT_FRAC
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  core_op_e             op,
  input  logic                 clear,
  input  logic signed [WW-1:0] w,
  output logic                 spike,
  output logic signed [PW-1:0] pot
);

  localparam logic signed [PW-1:0] THETA = PW'(1) <<< PFRAC;
  localparam logic signed [PW-1:0] PMAX  = {1'b0, {(PW-1){1'b1}}};
  localparam logic signed [PW-1:0] PMIN  = {1'b1, {(PW-1){1'b0}}};

  logic signed [PW-1:0] p_q;
  logic signed [PW-1:0] addend;
  logic signed [PW:0]   sum;
  logic signed [PW-1:0] sum_sat;
  logic                 ge_theta;

  // Weight aligned to the potential's fixed-point format.
  always_comb begin
    addend = (op == OP_FIRE) ? -THETA : (PW'(w) <<< (PFRAC - WFRAC));
    sum    = {p_q[PW-1], p_q} + {addend[PW-1], addend};
    if (sum[PW] != sum[PW-1]) sum_sat = sum[PW] ? PMIN : PMAX;
    else                      sum_sat = sum[PW-1:0];
    ge_theta = (p_q >= THETA);
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      p_q <= '0;
    end else begin
      unique case (op)
        OP_ADD:   p_q <= sum_sat;
        OP_DECAY: p_q <= p_q >>> 1;
        OP_FIRE:  if (ge_theta) p_q <= sum_sat;
        default:  p_q <= p_q;
      endcase
    end
  end

  assign pot   = p_q;
  assign spike = (op == OP_FIRE) && ge_theta;

endmodule
