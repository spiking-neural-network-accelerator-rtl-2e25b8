// tb_neuron_layer: one 20-input, 24-neuron layer against the LIF reference.
//
// Loads test weights through the 8-lane port, then runs five inferences of
// random time-sorted input spikes (equal times, short and very long gaps)
// under random output back-pressure. The output stream must equal the
// reference layer model token by token. The last run loads weights scaled
// down by four. Also counts that LOPD stalls,
// quiet timesteps (no spike, time carried on) and delta saturation occur.
module tb_neuron_layer;
  import snn_pkg::*;
  import tb_snn_ref_pkg::*;

  localparam int NS = 20, NN = 24;
  localparam int IWI = $clog2(NS), IWO = $clog2(NN);
  localparam int G = (NN + WR_LANES - 1) / WR_LANES;
  localparam int GW = (G > 1) ? $clog2(G) : 1;
  localparam int SEED = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [DT_W-1:0] in_delta, out_delta;
  logic [IWI-1:0] in_idx;
  logic [IWO-1:0] out_idx;
  logic wr_en = 0;
  logic [IWI-1:0] wr_row = '0;
  logic [GW-1:0] wr_group = '0;
  logic [WR_LANES-1:0][W_W-1:0] wr_data = '0;
  logic ev_stall, ev_fire, ev_fire_spiked, ev_sat;
  int checks = 0, failures = 0;
  int n_stall = 0, n_quiet = 0, n_spiked = 0, n_sat = 0;

  neuron_layer #(.N_SYN(NS), .N_NEURONS(NN)) dut (.clk, .rst_n, .in_valid, .in_ready,
    .in_delta, .in_idx, .in_last, .out_valid, .out_ready, .out_delta, .out_idx, .out_last,
    .wr_en, .wr_row, .wr_group, .wr_data, .ev_stall, .ev_fire, .ev_fire_spiked, .ev_sat);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  tok_q_t src, expq;
  int sp = 0;
  bit gate, running = 0;
  always_ff @(posedge clk) gate <= ($urandom_range(0, 3) != 0);
  always_ff @(posedge clk) out_ready <= ($urandom_range(0, 4) != 0);
  assign in_valid = running && gate && (sp < src.size());
  assign in_delta = (sp < src.size()) ? DT_W'(src[sp].delta) : '0;
  assign in_idx   = (sp < src.size()) ? IWI'(src[sp].idx) : '0;
  assign in_last  = (sp < src.size()) ? src[sp].last : 1'b0;
  always_ff @(posedge clk) if (in_valid && in_ready) sp <= sp + 1;
  always_ff @(posedge clk) begin
    if (ev_stall) n_stall++;
    if (ev_fire && !ev_fire_spiked) n_quiet++;
    if (ev_fire_spiked) n_spiked++;
    if (ev_sat) n_sat++;
  end

  task automatic load_weights(int wshift);
    for (int r = 0; r < NS; r++)
      for (int g = 0; g < G; g++) begin
        @(negedge clk);
        wr_en = 1; wr_row = IWI'(r); wr_group = GW'(g);
        for (int l = 0; l < WR_LANES; l++)
          wr_data[l] = W_W'(test_weight(0, r, g * WR_LANES + l, SEED) >>> wshift);
      end
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights(0);
    for (int run = 0; run < 5; run++) begin
      int got;
      int ws;
      got = 0;
      // The last run uses weights below 1/4 and long gaps: quiet timesteps
      // whose time piles up until the delta saturates.
      ws = (run == 4) ? 2 : 0;
      if (run == 4) load_weights(ws);
      src.delete();
      for (int k = 0; k < 80; k++) begin
        tok_t t;
        int r;
        r = $urandom_range(0, 19);
        t.delta = (r < 8) ? 0 : (r < 16) ? $urandom_range(1, 4) : $urandom_range(100, 255);
        if (run == 4) t.delta = $urandom_range(100, 255);
        t.idx = $urandom_range(0, NS - 1);
        t.last = 0;
        src.push_back(t);
      end
      begin
        tok_t e; e.delta = 0; e.idx = 0; e.last = 1;
        src.push_back(e);
      end
      expq = ref_layer(src, NN, 0, SEED, ws);
      @(negedge clk);
      sp = 0;
      running = 1;
      while (1) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          if (got < expq.size()) begin
            check("delta", out_delta, expq[got].delta);
            check("idx", out_last ? 0 : out_idx, expq[got].idx);
            check("last", out_last, expq[got].last);
          end else check("extra token", 1, 0);
          got++;
          if (out_last) break;
        end
      end
      check("token count", got, expq.size());
      @(negedge clk);
      running = 0;
    end
    check("stall seen", n_stall > 0, 1);
    check("quiet timestep seen", n_quiet > 0, 1);
    check("spiking timestep seen", n_spiked > 0, 1);
    check("saturation seen", n_sat > 0, 1);
    $display("stall %0d quiet %0d spiked %0d sat %0d", n_stall, n_quiet, n_spiked, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
