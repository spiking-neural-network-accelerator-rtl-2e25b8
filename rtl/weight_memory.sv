// weight_memory: wide weight store of one layer, one row per input synapse.
//
// Row r holds the weights from input synapse r to every neuron of the
// layer. The synapse index of an incoming spike addresses the memory and
// the whole row is read at once, so all neuron cores get their weight in the
// same cycle; on an FPGA this row is split over several block RAMs read in
// parallel. Weights are loaded through a narrow write port, WR_LANES weights
// (one 32-bit word at the defaults) per cycle: 'wgroup' selects neurons
// wgroup*WR_LANES .. wgroup*WR_LANES+WR_LANES-1 of row 'waddr'. Lanes past
// the last neuron are ignored.
// The wide single-cycle read follows the paper; the weight width and the
// load port are this design's own.
// Timing: synchronous read; rdata shows the row addressed with 're' from
// the next cycle on and holds until the next read. Contents are not reset.
module weight_memory
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH     = 400,
  parameter int unsigned N_NEURONS = 800,
  parameter int unsigned WW        = W_W,
  parameter int unsigned LANES     = WR_LANES,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned GROUPS = (N_NEURONS + LANES - 1) / LANES,
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                            clk,
  input  logic                            re,
  input  logic [AW-1:0]                   raddr,
  output logic [N_NEURONS-1:0][WW-1:0]    rdata,
  input  logic                            we,
  input  logic [AW-1:0]                   waddr,
  input  logic [GW-1:0]                   wgroup,
  input  logic [LANES-1:0][WW-1:0]        wdata
);

  logic [N_NEURONS-1:0][WW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int l = 0; l < LANES; l++) begin
        if (int'(wgroup) * LANES + l < N_NEURONS)
          mem[waddr][int'(wgroup) * LANES + l] <= wdata[l];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
