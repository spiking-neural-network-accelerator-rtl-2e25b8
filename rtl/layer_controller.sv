// layer_controller: sequences the neuron cores of one layer spike by spike.
//
// Spikes enter a layer one at a time, each with the delta time to the
// previous spike. All neurons of a layer see the same decay, so the
// controller generates it once and broadcasts one operation per cycle to
// every neuron core. For each accepted spike:
//   1. S_FIRE   if the spike is later than the current timestep (delta > 0)
//               or is the end token, the pending timestep is thresholded
//               first: OP_FIRE, the LOPD captures the spike vector and the
//               delay block the timestep's delta. It waits while the LOPD is
//               still serializing the previous vector (stall).
//   2. S_DECAY  delta cycles of OP_DECAY, one halving each.
//   3. S_ADD    OP_ADD with the weight row read when the spike was accepted;
//               the next spike can be accepted in this cycle.
// The end token fires the last timestep, waits until the LOPD has sent all
// spikes and the end token on, then clears potentials and delay.
// Thresholding only after all spikes of equal time, decay by one shift per
// cycle of delta time, and the broadcast select follow the paper; the state
// machine, the stall and the end handling are this design's own.
// Timing: a spike costs delta+1 cycles, plus one FIRE cycle when it opens a
// new timestep; spikes with delta 0 are added at one per cycle.
module layer_controller
  import snn_pkg::*;
#(
  parameter int unsigned N_SYN = 400,
  parameter int unsigned DTW   = DT_W,
  localparam int unsigned IW   = (N_SYN > 1) ? $clog2(N_SYN) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // input spike stream
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [DTW-1:0] in_delta,
  input  logic [IW-1:0]  in_idx,
  input  logic           in_last,
  // weights memory read
  output logic           mem_re,
  output logic [IW-1:0]  mem_raddr,
  // neuron cores
  output core_op_e       op,
  output logic           clear,
  // LOPD
  input  logic           lopd_busy,
  input  logic           lopd_last_done,
  output logic           lopd_load,
  output logic           lopd_send_last,
  // delay block
  output logic           dly_add,
  output logic [DTW-1:0] dly_delta,
  output logic           dly_fire,
  // event strobe for observation
  output logic           stall
);

  typedef enum logic [2:0] {S_IDLE, S_FIRE, S_DECAY, S_ADD, S_END} state_e;

  state_e         state_q, state_d;
  logic [DTW-1:0] cnt_q, cnt_d;
  logic [DTW-1:0] dt_q, dt_d;
  logic           last_q, last_d;
  logic           grp_q, grp_d;
  logic           accept;

  always_comb begin
    state_d        = state_q;
    cnt_d          = cnt_q;
    dt_d           = dt_q;
    last_d         = last_q;
    grp_d          = grp_q;
    op             = OP_NOP;
    clear          = 1'b0;
    lopd_load      = 1'b0;
    lopd_send_last = 1'b0;
    dly_add        = 1'b0;
    dly_fire       = 1'b0;
    stall          = 1'b0;
    in_ready       = 1'b0;

    unique case (state_q)
      S_IDLE: in_ready = 1'b1;
      S_FIRE: begin
        if (lopd_busy) begin
          stall = 1'b1;
        end else begin
          op        = OP_FIRE;
          lopd_load = 1'b1;
          dly_fire  = 1'b1;
          grp_d     = 1'b0;
          if (last_q)           state_d = S_END;
          else if (cnt_q != '0) state_d = S_DECAY;
          else                  state_d = S_ADD;
        end
      end
      S_DECAY: begin
        op    = OP_DECAY;
        cnt_d = cnt_q - 1'b1;
        if (cnt_q == DTW'(1)) state_d = S_ADD;
      end
      S_ADD: begin
        op       = OP_ADD;
        dly_add  = 1'b1;
        grp_d    = 1'b1;
        in_ready = 1'b1;
        state_d  = S_IDLE;
      end
      S_END: begin
        lopd_send_last = 1'b1;
        if (lopd_last_done) begin
          clear   = 1'b1;
          grp_d   = 1'b0;
          state_d = S_IDLE;
        end
      end
      default: state_d = S_IDLE;
    endcase

    accept = in_valid && in_ready;
    if (accept) begin
      cnt_d  = in_delta;
      dt_d   = in_delta;
      last_d = in_last;
      if (grp_d && (in_delta != '0 || in_last)) state_d = S_FIRE;
      else if (in_last)                          state_d = S_END;
      else if (in_delta != '0)                   state_d = S_DECAY;
      else                                       state_d = S_ADD;
    end
  end

  assign mem_re    = accept && !in_last;
  assign mem_raddr = in_idx;
  assign dly_delta = dt_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
      dt_q    <= '0;
      last_q  <= 1'b0;
      grp_q   <= 1'b0;
    end else begin
      state_q <= state_d;
      cnt_q   <= cnt_d;
      dt_q    <= dt_d;
      last_q  <= last_d;
      grp_q   <= grp_d;
    end
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
                             (op == OP_FIRE) |-> !lopd_busy)
    else $error("layer_controller: fire while LOPD busy");

endmodule
