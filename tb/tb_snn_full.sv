// tb_snn_full: the accelerator at its default size, 400 inputs and
// 800-512-256-10 neurons, through complete inferences.
//
// All 863,232 weights are loaded through the 32-bit port (108,096 writes),
// then one inference with random delta-time trains on all 400 inputs is
// run and the last layer's output spike stream is compared with the
// reference model (absolute-time sort, then four LIF layers); a second one
// follows with weights scaled by 1/4 and long gaps, after reloading.
// Same stimulus scheme as the reduced end-to-end test.
module tb_snn_full;
  import snn_pkg::*;
  import tb_snn_ref_pkg::*;

  // Sizes of the accelerator's defaults (400 inputs, 800-512-256-10).
  localparam int N_IN = 400, N_L0 = 800, N_L1 = 512, N_L2 = 256, N_L3 = 10;
  localparam int RUNS = 2;
  localparam int MAX_SPK = 4;
  localparam int SEED = 5;
  localparam int WATCHDOG = 1000000;
  localparam bit CHECK_MECHANISMS = 0;

  localparam int NL [5] = '{N_IN, N_L0, N_L1, N_L2, N_L3};
  localparam int OUT_IW = (N_L3 > 1) ? $clog2(N_L3) : 1;

  logic clk = 0, rst_n = 0;
  logic [N_IN-1:0] in_valid, in_ready, in_last;
  logic [N_IN-1:0][DT_W-1:0] in_delta;
  logic out_valid, out_ready, out_last;
  logic [DT_W-1:0] out_delta;
  logic [OUT_IW-1:0] out_idx;
  logic wr_en = 0;
  logic [1:0] wr_layer = '0;
  logic [9:0] wr_row = '0;
  logic [6:0] wr_group = '0;
  logic [WR_LANES-1:0][W_W-1:0] wr_data = '0;
  logic [3:0] ev_stall, ev_fire, ev_fire_spiked, ev_sat;
  int checks = 0, failures = 0;

  snn_accelerator dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_delta, .in_last,
    .out_valid, .out_ready, .out_delta, .out_idx, .out_last,
    .wr_en, .wr_layer, .wr_row, .wr_group, .wr_data,
    .ev_stall, .ev_fire, .ev_fire_spiked, .ev_sat);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
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

  // ---- input drivers ----
  int unsigned trains[][$];
  int unsigned pos[N_IN];
  bit running = 0;
  logic [N_IN-1:0] gate;
  always_ff @(posedge clk) begin
    for (int i = 0; i < N_IN; i++) if (in_valid[i] && in_ready[i]) pos[i] <= pos[i] + 1;
  end
  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      in_delta[i] = (pos[i] < trains[i].size()) ? DT_W'(trains[i][pos[i]]) : '0;
      in_last[i]  = (pos[i] >= trains[i].size());
      in_valid[i] = running && gate[i] && (pos[i] <= trains[i].size());
    end
  end
  always_ff @(posedge clk) for (int i = 0; i < N_IN; i++) gate[i] <= ($urandom_range(0, 3) != 0);
  always_ff @(posedge clk) out_ready <= ($urandom_range(0, 4) != 0);

  // ---- mechanism counters ----
  int n_tie = 0, n_decay = 0, n_spiked = 0, n_quiet = 0, n_stall = 0, n_sat = 0;
  int n_bp = 0, n_end = 0;
  always_ff @(posedge clk) begin
    if (dut.st_valid[0] && dut.st_ready[0] && !dut.st_last[0] && dut.st_delta[0] == '0) n_tie++;
    if (dut.g_layer[0].u_layer.u_ctrl.op == OP_DECAY) n_decay++;
    n_spiked <= n_spiked + $countones(ev_fire_spiked);
    n_quiet  <= n_quiet + $countones(ev_fire & ~ev_fire_spiked);
    n_stall  <= n_stall + $countones(ev_stall);
    n_sat    <= n_sat + $countones(ev_sat);
    if (out_valid && !out_ready) n_bp++;
    if (out_valid && out_ready && out_last) n_end++;
  end

  task automatic load_weights(int wshift);
    for (int l = 0; l < 4; l++) begin
      int groups = (NL[l+1] + WR_LANES - 1) / WR_LANES;
      for (int r = 0; r < NL[l]; r++)
        for (int g = 0; g < groups; g++) begin
          @(negedge clk);
          wr_en = 1; wr_layer = 2'(l); wr_row = 10'(r); wr_group = 7'(g);
          for (int k = 0; k < WR_LANES; k++)
            wr_data[k] = W_W'(test_weight(l, r, g * WR_LANES + k, SEED) >>> wshift);
        end
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    tok_q_t q;
    int got, t0, ws;
    trains = new[N_IN];
    foreach (pos[i]) pos[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights(0);
    $display("weights loaded at cycle %0d", cyc);
    for (int run = 0; run < RUNS; run++) begin
      bit quiet_run;
      quiet_run = (run == RUNS - 1) && (RUNS > 1);
      ws = quiet_run ? 2 : 0;
      if (quiet_run) load_weights(ws);
      trains = new[N_IN];
      foreach (trains[i]) begin
        int n;
        n = $urandom_range(0, MAX_SPK);
        for (int k = 0; k < n; k++) begin
          int r;
          r = $urandom_range(0, 9);
          trains[i].push_back(quiet_run ? $urandom_range(150, 255) :
                              (r < 3) ? 0 : (r < 9) ? $urandom_range(1, 8) : $urandom_range(40, 200));
        end
      end
      q = ref_sort(trains);
      for (int l = 0; l < 4; l++) q = ref_layer(q, NL[l+1], l, SEED, ws);
      @(negedge clk);
      foreach (pos[i]) pos[i] = 0;
      running = 1;
      got = 0;
      t0 = cyc;
      while (1) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          if (got < q.size()) begin
            check("delta", out_delta, q[got].delta);
            check("idx", out_last ? 0 : out_idx, q[got].idx);
            check("last", out_last, q[got].last);
          end else check("extra token", 1, 0);
          got++;
          if (out_last) break;
        end
      end
      check("token count", got, q.size());
      $display("inference %0d: %0d output tokens, %0d cycles", run, got, cyc - t0);
      @(negedge clk);
      running = 0;
    end
    if (CHECK_MECHANISMS) begin
      check("equal-time input spikes", n_tie > 0, 1);
      check("decay cycles", n_decay > 0, 1);
      check("timesteps with spikes", n_spiked > 0, 1);
      check("timesteps without spikes", n_quiet > 0, 1);
      check("LOPD stalls", n_stall > 0, 1);
      check("delta saturation", n_sat > 0, 1);
      check("output back-pressure", n_bp > 0, 1);
      check("inferences ended", n_end, RUNS);
    end
    $display("ties %0d decays %0d spiked %0d quiet %0d stalls %0d sat %0d backpressure %0d ends %0d",
             n_tie, n_decay, n_spiked, n_quiet, n_stall, n_sat, n_bp, n_end);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
