// tb_layer_controller: operation schedule of one layer.
//
// Feeds random spike tokens (deltas 0..5, some larger) and end tokens and
// models the LOPD as busy for a random number of cycles after each load.
// The broadcast operations must follow the neuron equation: for each spike,
// first a threshold step if it opens a new time (delta > 0, or end token)
// after earlier spikes, then exactly 'delta' decay cycles, then one add with
// the weight row of that spike's synapse. Checks the read address, the
// delay-block strobes, the clear after the end token, that a fire never
// overlaps a busy LOPD, and, in a run without stalls, the cycle count of
// delta + 1 cycles per spike, plus one per threshold step.
module tb_layer_controller;
  import snn_pkg::*;
  import tb_snn_ref_pkg::*;

  localparam int NS = 23;
  localparam int IW = $clog2(NS);

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last;
  logic [DT_W-1:0] in_delta;
  logic [IW-1:0] in_idx;
  logic mem_re, clear, lopd_busy, lopd_last_done, lopd_load, lopd_send_last;
  logic [IW-1:0] mem_raddr;
  core_op_e op;
  logic dly_add, dly_fire, stall;
  logic [DT_W-1:0] dly_delta;
  int checks = 0, failures = 0, n_stall = 0;

  layer_controller #(.N_SYN(NS)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_delta, .in_idx,
    .in_last, .mem_re, .mem_raddr, .op, .clear, .lopd_busy, .lopd_last_done, .lopd_load,
    .lopd_send_last, .dly_add, .dly_delta, .dly_fire, .stall);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  // LOPD stand-in
  int busy_cnt = 0;
  bit allow_busy = 1;
  assign lopd_busy = (busy_cnt != 0);
  assign lopd_last_done = lopd_send_last && !lopd_busy;
  always_ff @(posedge clk) begin
    if (lopd_load) busy_cnt <= allow_busy ? $urandom_range(0, 12) : 0;
    else if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
  end

  // Token source
  tok_t src[$];
  int sp = 0;
  bit gaps = 1, gate;
  always_ff @(posedge clk) gate <= gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
  assign in_valid = rst_n && gate && (sp < src.size());
  assign in_delta = (sp < src.size()) ? DT_W'(src[sp].delta) : '0;
  assign in_idx   = (sp < src.size()) ? IW'(src[sp].idx) : '0;
  assign in_last  = (sp < src.size()) ? src[sp].last : 1'b0;

  // Expected schedule of operations (NOPs not listed); ADD carries the row.
  typedef struct { core_op_e op; int row; int dt; } sched_t;
  sched_t exp_ops[$];
  int ep = 0, n_accept = 0;
  int last_row = -1;
  int accept_cyc[$];
  int cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (op == OP_FIRE) check("fire while busy", lopd_busy, 0);
      check("fire strobes", lopd_load, op == OP_FIRE);
      check("delay fire", dly_fire, op == OP_FIRE);
      check("delay add", dly_add, op == OP_ADD);
      if (stall) n_stall++;
      if (op != OP_NOP) begin
        if (ep < exp_ops.size()) begin
          check("op", op, exp_ops[ep].op);
          if (op == OP_ADD) begin
            check("row of add", last_row, exp_ops[ep].row);
            check("delta to delay", dly_delta, exp_ops[ep].dt);
          end
        end else check("extra op", 1, 0);
        ep++;
      end
      if (in_valid && in_ready) begin
        sp <= sp + 1;
        accept_cyc.push_back(cyc);
        if (!in_last) begin
          check("mem_re on accept", mem_re, 1);
          check("raddr", mem_raddr, in_idx);
          last_row = int'(in_idx);
        end
      end
      if (clear) check("clear only after end", lopd_last_done, 1);
    end
  end

  function automatic void build(int n_tok);
    bit pend = 0;
    src.delete();
    exp_ops.delete();
    ep = 0;
    sp = 0;
    for (int k = 0; k < n_tok; k++) begin
      tok_t t;
      int r;
      r = $urandom_range(0, 9);
      t.delta = (r < 4) ? 0 : (r < 9) ? $urandom_range(1, 5) : $urandom_range(6, 40);
      t.idx = $urandom_range(0, NS - 1);
      t.last = (k == n_tok - 1);
      if (t.last) t.delta = 0;
      src.push_back(t);
      if (pend && (t.delta != 0 || t.last)) begin
        sched_t s; s.op = OP_FIRE; s.row = 0; s.dt = 0;
        exp_ops.push_back(s);
        pend = 0;
      end
      if (!t.last) begin
        for (int d = 0; d < int'(t.delta); d++) begin
          sched_t s; s.op = OP_DECAY; s.row = 0; s.dt = 0;
          exp_ops.push_back(s);
        end
        begin
          sched_t s; s.op = OP_ADD; s.row = int'(t.idx); s.dt = int'(t.delta);
          exp_ops.push_back(s);
        end
        pend = 1;
      end
    end
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      build(60);
      wait (sp == src.size() && ep == exp_ops.size());
      repeat (20) @(posedge clk);
      check("all ops issued", ep, exp_ops.size());
    end
    // Timing run: no gaps, no LOPD stalls.
    @(negedge clk);
    gaps = 0;
    allow_busy = 0;
    accept_cyc.delete();
    build(80);
    wait (sp == src.size() && ep == exp_ops.size());
    repeat (5) @(posedge clk);
    begin
      bit pend = 0;
      for (int k = 0; k + 1 < src.size() - 1; k++) begin
        int cost;
        // accept of k+1 happens in the ADD cycle of k
        cost = ((pend && src[k].delta != 0) ? 1 : 0) + int'(src[k].delta) + 1;
        check("cycles per spike", accept_cyc[k+1] - accept_cyc[k], cost);
        pend = 1;
      end
    end
    check("stall seen", n_stall > 0, 1);
    $display("stall cycles %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
