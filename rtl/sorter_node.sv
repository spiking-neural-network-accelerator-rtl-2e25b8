// sorter_node: one compare-and-forward element of the spike sorter.
//
// The node merges two delta-time spike streams, A (upper) and B (lower),
// into one stream ordered by absolute time. Two registers hold the time
// still remaining until the head spike of each input, measured from the
// node's last output. When both are full, the smaller one is sent on as the
// output delta, and that minimum is subtracted from the other register, so
// that both stay relative to the spike just sent. The register whose spike
// was sent reloads from its input in the same cycle: the next delta of that
// input is relative to its previous spike, which is exactly the time just
// sent. The node appends one bit to the spike's index, at bit LEVEL: 0 if
// the upper input was chosen, 1 if the lower one was. Over a whole tree
// these bits spell the index of the input synapse.
// End tokens (last = 1) mark the end of an inference on each input. A node
// passes the other input's spikes while one side holds its end token, and
// forwards one end token once both sides hold one.
// Compare, select, subtract and the index bits follow the paper's sorter
// figure and text; ties going to the upper input, the valid/ready handshake
// and the end token are this design's choices.
// Timing: the output is combinational from the two registers; a spike is
// accepted per input and one leaves per cycle while both registers are full.
module sorter_node
  import snn_pkg::*;
#(
  parameter int unsigned DTW   = DT_W,
  parameter int unsigned IW    = 9,
  parameter int unsigned LEVEL = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           a_valid,
  output logic           a_ready,
  input  logic [DTW-1:0] a_delta,
  input  logic [IW-1:0]  a_idx,
  input  logic           a_last,
  input  logic           b_valid,
  output logic           b_ready,
  input  logic [DTW-1:0] b_delta,
  input  logic [IW-1:0]  b_idx,
  input  logic           b_last,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [DTW-1:0] out_delta,
  output logic [IW-1:0]  out_idx,
  output logic           out_last
);

  logic           sa_full, sb_full, sa_last, sb_last;
  logic [DTW-1:0] sa_dt, sb_dt;
  logic [IW-1:0]  sa_ix, sb_ix;
  logic           pick_b, fire, take_a, take_b;

  always_comb begin
    if (sa_last && sb_last) pick_b = 1'b0;
    else if (sa_last)       pick_b = 1'b1;
    else if (sb_last)       pick_b = 1'b0;
    else                    pick_b = (sb_dt < sa_dt);
    out_valid = sa_full && sb_full;
    out_last  = sa_last && sb_last;
    out_delta = out_last ? '0 : (pick_b ? sb_dt : sa_dt);
    out_idx   = pick_b ? (sb_ix | (IW'(1) << LEVEL)) : sa_ix;
    fire      = out_valid && out_ready;
    take_a    = fire && (!pick_b || out_last);
    take_b    = fire && ( pick_b || out_last);
    a_ready   = !sa_full || take_a;
    b_ready   = !sb_full || take_b;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sa_full <= 1'b0; sa_last <= 1'b0; sa_dt <= '0; sa_ix <= '0;
    end else if (a_valid && a_ready) begin
      sa_full <= 1'b1; sa_last <= a_last; sa_dt <= a_delta; sa_ix <= a_idx;
    end else if (take_a) begin
      sa_full <= 1'b0;
    end else if (fire && !sa_last) begin
      sa_dt <= sa_dt - out_delta;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sb_full <= 1'b0; sb_last <= 1'b0; sb_dt <= '0; sb_ix <= '0;
    end else if (b_valid && b_ready) begin
      sb_full <= 1'b1; sb_last <= b_last; sb_dt <= b_delta; sb_ix <= b_idx;
    end else if (take_b) begin
      sb_full <= 1'b0;
    end else if (fire && !sb_last) begin
      sb_dt <= sb_dt - out_delta;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           (out_valid && !out_ready) |=> (out_valid && $stable(out_delta)
                                                          && $stable(out_idx)))
    else $error("sorter_node: output changed without handshake");

endmodule
