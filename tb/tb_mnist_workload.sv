// tb_mnist_workload: MNIST-shaped inference at the default network size.
//
// The accelerator's inputs are the spike trains of a patch-encoding layer
// that runs outside the hardware: 400 LIF neurons, one per 9x9 patch of a
// 28x28 image (stride 1, (28-9+1)^2 = 400), each fed the 81 pixels of its
// patch one per time step in raster order, with ternary weights
// {-1, 0, 1}. This testbench contains a behavioural model of that layer
// (beta = 0.5, threshold 1, pixels scaled to 0..1, random ternary weights)
// and two synthetic digit images drawn by formula, a ring ('0') and a
// stroke ('7'); no trained weights or real images are used. The encoded
// trains drive the default-size accelerator, whose output stream is checked
// against the reference model, and the cycles per image are printed next to
// the budget of about 88,000 cycles that 3400 images/s at 300 MHz allow.
module tb_mnist_workload;
  import snn_pkg::*;
  import tb_snn_ref_pkg::*;

  // Sizes of the accelerator's defaults (400 inputs, 800-512-256-10).
  localparam int N_IN = 400, N_L0 = 800, N_L1 = 512, N_L2 = 256, N_L3 = 10;
  localparam int RUNS = 2;
  localparam int CYCLE_BUDGET = 300_000_000 / 3400;
  localparam int MAX_SPK = 4;
  localparam int SEED = 9;
  localparam int WATCHDOG = 2000000;
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

  // ---- behavioural patch encoder (offline in the real system) ----
  localparam int IMG = 28, PATCH = 9, POS = IMG - PATCH + 1;

  function automatic int pixel(int img, int r, int c);
    int dr = r - 14, dc = c - 14;
    int d2 = dr * dr + dc * dc;
    if (img == 0) return (d2 >= 36 && d2 <= 81) ? 255 : (d2 >= 30 && d2 <= 90) ? 128 : 0;
    // '7': top bar and a diagonal stroke
    if (r >= 5 && r <= 7 && c >= 7 && c <= 21) return 255;
    if (r > 7 && r <= 23 && (c - (21 - (r - 7) / 2)) inside {[-1:1]}) return 255;
    return 0;
  endfunction

  task automatic encode_image(int img);
    trains = new[N_IN];
    for (int n = 0; n < N_IN; n++) begin
      int pr = n / POS, pc = n % POS;
      longint p = 0;
      int last_t = 0;
      for (int k = 0; k < PATCH * PATCH; k++) begin
        int w = ((n * 40503 + k * 9973 + (n ^ k)) % 3) - 1;
        int x = pixel(img, pr + k / PATCH, pc + k % PATCH);
        // potential in 1/256 units: P = 0.5 P + w * x, threshold 256
        p = (p >>> 1) + w * x;
        if (p >= 256) begin
          p -= 256;
          trains[n].push_back(k - last_t);
          last_t = k;
        end
      end
    end
  endtask

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
    int q_in;
    int got, t0, ws;
    trains = new[N_IN];
    foreach (pos[i]) pos[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights(0);
    $display("weights loaded at cycle %0d", cyc);
    for (int run = 0; run < RUNS; run++) begin
      bit quiet_run;
      quiet_run = 0;
      ws = quiet_run ? 2 : 0;
      if (quiet_run) load_weights(ws);
      encode_image(run);
      q = ref_sort(trains);
      q_in = q.size() - 1;
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
      $display("image %0d: %0d input spikes, %0d output tokens, %0d cycles (budget %0d)",
               run, q_in, got, cyc - t0, CYCLE_BUDGET);
      check("image finished", got > 0, 1);
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
