// tb_delta_delay: delta-time bookkeeping of a layer.
//
// Random sequences of 'add' (input spike with delta) and 'fire' (timestep
// thresholded, with or without spikes). The output must always equal the
// time since the last timestep that produced spikes, saturated at 255,
// computed here from absolute times.
module tb_delta_delay;
  import snn_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, add = 0, fire = 0, any_spike = 0;
  logic [DT_W-1:0] delta_in = '0, delta_out;
  logic saturated;
  int checks = 0, failures = 0, n_sat = 0, n_quiet = 0;

  delta_delay dut (.clk, .rst_n, .clear, .add, .delta_in, .fire, .any_spike,
                   .delta_out, .saturated);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  initial begin
    longint now, last_spiked, expv;
    int r;
    now = 0;
    last_spiked = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 4000; i++) begin
      r = $urandom_range(0, 9);
      @(negedge clk);
      add = 0; fire = 0; clear = 0;
      if (r < 6) begin
        add = 1;
        delta_in = (r == 0) ? DT_W'($urandom_range(100, 255)) : DT_W'($urandom_range(0, 6));
      end else if (r < 9) begin
        fire = 1;
        any_spike = ($urandom_range(0, 2) != 0);
      end else if (i % 50 == 0) clear = 1;
      #1;
      expv = now - last_spiked;
      if (expv > 255) expv = 255;
      check("delta_out", delta_out, expv);
      if (add && saturated) n_sat++;
      if (fire && !any_spike) n_quiet++;
      if (clear) begin now = 0; last_spiked = 0; end
      else if (add) now += delta_in;
      else if (fire && any_spike) last_spiked = now;
    end
    check("saturation seen", n_sat > 0, 1);
    check("quiet timestep seen", n_quiet > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
