// tb_weight_memory: load port and wide read of one weights memory.
//
// Fills a 21 x 19 memory through the 8-lane write port (the last group is
// partial) with a known pattern, then reads rows in random order and
// checks every weight of the row, one cycle after the read, and that the
// output holds while no read is issued.
module tb_weight_memory;
  import snn_pkg::*;

  localparam int D = 21, NN = 19;
  localparam int AW = $clog2(D);
  localparam int G = (NN + WR_LANES - 1) / WR_LANES;
  localparam int GW = $clog2(G);

  logic clk = 0, re = 0, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [GW-1:0] wgroup = '0;
  logic [WR_LANES-1:0][W_W-1:0] wdata = '0;
  logic [NN-1:0][W_W-1:0] rdata;
  int checks = 0, failures = 0;

  weight_memory #(.DEPTH(D), .N_NEURONS(NN)) dut (.clk, .re, .raddr, .rdata, .we, .waddr,
                                                  .wgroup, .wdata);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W_W-1:0] pat(int r, int c);
    return W_W'(r * 3 + c * 5 + (r ^ c));
  endfunction

  initial begin
    int row;
    logic [NN-1:0][W_W-1:0] prev;
    for (int r = 0; r < D; r++)
      for (int g = 0; g < G; g++) begin
        @(negedge clk);
        we = 1; waddr = AW'(r); wgroup = GW'(g);
        for (int l = 0; l < WR_LANES; l++) wdata[l] = pat(r, g * WR_LANES + l);
      end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 200; i++) begin
      row = $urandom_range(0, D - 1);
      re = 1; raddr = AW'(row);
      @(negedge clk);
      re = 0; raddr = AW'($urandom_range(0, D - 1));
      for (int c = 0; c < NN; c++) begin
        checks++;
        if (rdata[c] !== pat(row, c)) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d col %0d: %h vs %h", row, c, rdata[c], pat(row, c));
        end
      end
      prev = rdata;
      @(negedge clk);
      checks++;
      if (rdata !== prev) begin
        failures++;
        $display("FAIL output changed without read");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
