// tb_lopd: serialization of random spike vectors by the LOPD.
//
// Loads random 37-bit vectors (some empty, some full) with a random delta
// time, drains them under random back-pressure and checks that every set
// bit comes out exactly once, highest index first, that only the first
// spike carries the delta time, and that one spike leaves per cycle
// without back-pressure (popcount cycles). Then checks the end token.
module tb_lopd;
  import snn_pkg::*;

  localparam int N = 37;
  localparam int IW = $clog2(N);

  logic clk = 0, rst_n = 0, load = 0, send_last = 0, out_ready = 0;
  logic [N-1:0] spikes = '0;
  logic [DT_W-1:0] delta = '0;
  logic busy, last_done, out_valid, out_last;
  logic [DT_W-1:0] out_delta;
  logic [IW-1:0] out_idx;
  int checks = 0, failures = 0;

  lopd #(.N(N)) dut (.clk, .rst_n, .load, .spikes, .delta, .send_last, .busy, .last_done,
                     .out_valid, .out_ready, .out_delta, .out_idx, .out_last);

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
    logic [N-1:0] v;
    logic [DT_W-1:0] d;
    bit bp;
    int expect_i, cycles, pop;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int r = 0; r < 200; r++) begin
      bp = (r % 2 == 0);
      v = {$urandom, $urandom};
      if (r % 3 == 0) v = v & {$urandom, $urandom} & {$urandom, $urandom};
      if (r == 5) v = '0;
      if (r == 7) v = '1;
      d = DT_W'($urandom);
      pop = $countones(v);
      @(negedge clk);
      spikes = v; delta = d; load = 1;
      @(negedge clk);
      load = 0;
      check("busy", busy, pop != 0);
      expect_i = N - 1;
      cycles = 0;
      while (busy) begin
        out_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;
        #1;
        while (expect_i >= 0 && !v[expect_i]) expect_i--;
        check("valid", out_valid, 1);
        check("not last", out_last, 0);
        check("idx", out_idx, expect_i);
        // only the highest set bit (first spike) carries the delta time
        check("delta", out_delta, ((v >> (expect_i + 1)) == 0) ? d : 0);
        @(negedge clk);
        cycles++;
        if (out_ready) expect_i--;
      end
      check("all drained", expect_i < 0 || (v & ((N'(1) << (expect_i + 1)) - 1)) == 0, 1);
      if (!bp) check("one spike per cycle", cycles, pop);
    end
    // End token
    out_ready = 0;
    send_last = 1;
    #1;
    check("end valid", out_valid, 1);
    check("end last", out_last, 1);
    check("end delta", out_delta, 0);
    check("no done without ready", last_done, 0);
    out_ready = 1;
    #1;
    check("done", last_done, 1);
    @(negedge clk);
    send_last = 0;
    #1;
    check("idle", out_valid, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
