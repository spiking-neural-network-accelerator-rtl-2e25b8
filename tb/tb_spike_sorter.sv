// tb_spike_sorter: random spike trains through a 13-input sorter.
//
// Each synapse gets a random delta-time train (including zero deltas, so
// spikes of equal time occur, and empty trains). Inputs are offered with
// random gaps and the output is back-pressured at random. The serialized
// stream must equal the reference: all spikes sorted by absolute time, ties
// in ascending synapse index, as delta times, closed by one end token.
// Three inferences run back to back. A fourth, with every input ready and
// no back-pressure, checks the rate of one spike per cycle.
module tb_spike_sorter;
  import snn_pkg::*;
  import tb_snn_ref_pkg::*;

  localparam int N = 13;
  localparam int IW = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, in_last;
  logic [N-1:0][DT_W-1:0] in_delta;
  logic out_valid, out_ready, out_last;
  logic [DT_W-1:0] out_delta;
  logic [IW-1:0] out_idx;
  int checks = 0, failures = 0, n_ties = 0;
  bit random_gaps = 1;
  bit running = 0;

  spike_sorter #(.N_IN(N)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_delta, .in_last,
                                .out_valid, .out_ready, .out_delta, .out_idx, .out_last);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned trains[][$];
  int unsigned pos[N];
  tok_q_t expq;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Input drivers: synapse i offers trains[i][pos[i]], then its end token.
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (in_valid[i] && in_ready[i]) pos[i] <= pos[i] + 1;
    end
  end
  always_comb begin
    for (int i = 0; i < N; i++) begin
      in_delta[i] = (pos[i] < trains[i].size()) ? DT_W'(trains[i][pos[i]]) : '0;
      in_last[i]  = (pos[i] >= trains[i].size());
    end
  end
  logic [N-1:0] gate;
  always_ff @(posedge clk) gate <= random_gaps ? N'($urandom) | N'($urandom) : '1;
  always_comb for (int i = 0; i < N; i++) in_valid[i] = running && gate[i] && (pos[i] <= trains[i].size());
  always_ff @(posedge clk) out_ready <= random_gaps ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic run_one(int max_spikes, int max_dt, output int cycles);
    int got = 0;
    int start;
    trains = new[N];
    foreach (trains[i]) begin
      int n = $urandom_range(0, max_spikes);
      if (i == 3) n = 0;
      for (int k = 0; k < n; k++)
        trains[i].push_back(($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, max_dt));
    end
    expq = ref_sort(trains);
    @(negedge clk);
    foreach (pos[i]) pos[i] = 0;
    running = 1;
    start = $time;
    while (1) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (got < expq.size()) begin
          check("delta", out_delta, expq[got].delta);
          check("idx", out_last ? 0 : out_idx, expq[got].idx);
          check("last", out_last, expq[got].last);
          if (!out_last && out_delta == 0 && got > 0) n_ties++;
        end else check("extra token", 1, 0);
        got++;
        if (out_last) break;
      end
    end
    @(negedge clk);
    running = 0;
    cycles = ($time - start) / 10;
    check("token count", got, expq.size());
  endtask

  initial begin
    int cyc;
    trains = new[N];
    foreach (pos[i]) pos[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) run_one(12, 20, cyc);
    // Rate: deltas all zero so every input can move each cycle.
    random_gaps = 0;
    repeat (3) @(posedge clk);
    begin
      int total;
      trains = new[N];
      foreach (trains[i]) for (int k = 0; k < 8; k++) trains[i].push_back(0);
      total = 8 * N;
      expq = ref_sort(trains);
      @(negedge clk);
      foreach (pos[i]) pos[i] = 0;
      running = 1;
      begin
        int got = 0, first_cyc = -1, last_cyc = 0, cycle = 0;
        while (1) begin
          @(posedge clk);
          cycle++;
          if (out_valid && out_ready) begin
            if (got < expq.size()) begin
              check("rate delta", out_delta, expq[got].delta);
              check("rate idx", out_last ? 0 : out_idx, expq[got].idx);
            end
            if (first_cyc < 0) first_cyc = cycle;
            last_cyc = cycle;
            got++;
            if (out_last) break;
          end
        end
        $display("rate run: %0d tokens in %0d cycles", got, last_cyc - first_cyc + 1);
        check("one token per cycle", last_cyc - first_cyc + 1, total + 1);
      end
    end
    check("equal-time spikes seen", n_ties > 0, 1);
    $display("equal-time spikes: %0d", n_ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
