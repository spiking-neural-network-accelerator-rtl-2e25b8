// tb_neuron_core: random operation sequences against a reference LIF model.
//
// Drives random ADD / DECAY / FIRE / NOP operations and random weights into
// one neuron core and compares potential and spike with a model written
// from the neuron equation: halving by arithmetic shift, weight scaled to
// the potential's fraction bits, fire when P >= 1.0 with reset by
// subtraction, saturation at the potential's range.
module tb_neuron_core;
  import snn_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0;
  core_op_e op = OP_NOP;
  logic signed [W_W-1:0]   w = '0;
  logic                    spike;
  logic signed [POT_W-1:0] pot;
  int checks = 0, failures = 0;
  int n_fire_spk = 0, n_fire_none = 0;

  neuron_core dut (.clk, .rst_n, .op, .clear, .w, .spike, .pot);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint model;
  localparam longint THETA = 1 << POT_FRAC;
  localparam longint PMAX = (1 << (POT_W-1)) - 1;
  localparam longint PMIN = -(1 << (POT_W-1));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    longint wv;
    logic exp_spk;
    int r;
    core_op_e o;
    model = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      r = $urandom_range(0, 9);
      o = (r < 5) ? OP_ADD : (r < 7) ? OP_DECAY : (r < 9) ? OP_FIRE : OP_NOP;
      op <= o;
      w  <= W_W'($urandom);
      clear <= (i % 700 == 699);
      #1;
      // combinational spike during the FIRE cycle
      exp_spk = (o == OP_FIRE) && (model >= THETA);
      check("spike", longint'(spike), longint'(exp_spk));
      if (o == OP_FIRE) begin
        if (exp_spk) n_fire_spk++; else n_fire_none++;
      end
      wv = longint'(w) * (1 << (POT_FRAC - W_FRAC));
      @(posedge clk);
      if (clear) model = 0;
      else begin
        case (o)
          OP_ADD:   model = model + wv;
          OP_DECAY: model = (model >= 0) ? model / 2 : -((-model + 1) / 2);
          OP_FIRE:  if (exp_spk) model = model - THETA;
          default:  ;
        endcase
        if (model > PMAX) model = PMAX;
        if (model < PMIN) model = PMIN;
      end
      #1;
      check("pot", longint'(pot), model);
    end
    check("fired with spike", longint'(n_fire_spk > 0), 1);
    check("fired without spike", longint'(n_fire_none > 0), 1);
    $display("fires with spike %0d, without %0d", n_fire_spk, n_fire_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
