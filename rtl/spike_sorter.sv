// spike_sorter: serializes the input spike trains of the whole network by time.
//
// Every input synapse delivers its spike train as a stream of delta times
// (time since its own previous spike), closed by an end token. The sorter is
// a binary tree of sorter_node elements over 2^ceil(log2 N_IN) leaves; leaves
// beyond N_IN hold a permanent end token. Each node forwards the earlier of
// its two head spikes and subtracts that time from the other, so the root
// emits all spikes in order of absolute time, each with the delta time to
// the previous one, without ever forming an absolute time (no integrator
// that could overflow). The comparison bits collected on a spike's way up
// form its synapse index: bit l is the choice made at tree level l (0 for
// the upper input), so the root's choice is the MSB. Spikes of equal time
// leave in ascending index order. A register at the root (the paper's s20)
// drives the output.
// The tree, subtraction and index scheme follow the paper's 4-input figure;
// its generalisation to N_IN inputs, the handshakes and the end token are
// this design's own.
// Interface: valid/ready per input and on the output; out_last marks the end
// of an inference after every input has sent its end token.
// Timing: one spike per cycle at best; a spike needs ceil(log2 N_IN)+1
// cycles from an input to the output register.
module spike_sorter
  import snn_pkg::*;
#(
  parameter int unsigned N_IN = 400,
  parameter int unsigned DTW  = DT_W,
  localparam int unsigned L      = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned LEAVES = 1 << L,
  localparam int unsigned IW     = L
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N_IN-1:0]           in_valid,
  output logic [N_IN-1:0]           in_ready,
  input  logic [N_IN-1:0][DTW-1:0]  in_delta,
  input  logic [N_IN-1:0]           in_last,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [DTW-1:0]            out_delta,
  output logic [IW-1:0]             out_idx,
  output logic                      out_last
);

  // Streams in heap order: stream k (1 <= k < LEAVES) is the output of node
  // k, whose inputs are streams 2k (upper) and 2k+1 (lower); streams
  // LEAVES+i are the inputs. Stream 0 is unused.
  logic [2*LEAVES-1:0]           s_valid, s_ready, s_last;
  logic [2*LEAVES-1:0][DTW-1:0]  s_delta;
  logic [2*LEAVES-1:0][IW-1:0]   s_idx;

  assign s_valid[0] = 1'b0;
  assign s_ready[0] = 1'b0;
  assign s_last[0]  = 1'b0;
  assign s_delta[0] = '0;
  assign s_idx[0]   = '0;

  for (genvar i = 0; i < LEAVES; i++) begin : g_leaf
    if (i < N_IN) begin : g_real
      assign s_valid[LEAVES+i] = in_valid[i];
      assign s_delta[LEAVES+i] = in_delta[i];
      assign s_last[LEAVES+i]  = in_last[i];
      assign in_ready[i]       = s_ready[LEAVES+i];
    end else begin : g_pad
      assign s_valid[LEAVES+i] = 1'b1;
      assign s_delta[LEAVES+i] = '0;
      assign s_last[LEAVES+i]  = 1'b1;
    end
    assign s_idx[LEAVES+i] = '0;
  end

  for (genvar k = 1; k < LEAVES; k++) begin : g_node
    // Depth of node k from the root is floor(log2 k); its bit is L-1-depth.
    localparam int unsigned DEPTH = $clog2(k + 1) - 1;
    sorter_node #(.DTW(DTW), .IW(IW), .LEVEL(L - 1 - DEPTH)) u_node (
      .clk, .rst_n,
      .a_valid(s_valid[2*k]),   .a_ready(s_ready[2*k]),   .a_delta(s_delta[2*k]),
      .a_idx(s_idx[2*k]),       .a_last(s_last[2*k]),
      .b_valid(s_valid[2*k+1]), .b_ready(s_ready[2*k+1]), .b_delta(s_delta[2*k+1]),
      .b_idx(s_idx[2*k+1]),     .b_last(s_last[2*k+1]),
      .out_valid(s_valid[k]),   .out_ready(s_ready[k]),   .out_delta(s_delta[k]),
      .out_idx(s_idx[k]),       .out_last(s_last[k])
    );
  end

  // Output register at the root.
  logic           r_full;
  assign s_ready[1] = !r_full || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_full    <= 1'b0;
      out_delta <= '0;
      out_idx   <= '0;
      out_last  <= 1'b0;
    end else if (s_valid[1] && s_ready[1]) begin
      r_full    <= 1'b1;
      out_delta <= s_delta[1];
      out_idx   <= s_idx[1];
      out_last  <= s_last[1];
    end else if (out_ready) begin
      r_full    <= 1'b0;
    end
  end

  assign out_valid = r_full;

endmodule
