`timescale 1ns / 1ps
// tb_ro_cell - checks the ring-oscillator model: no oscillation while
// disabled, the programmed period while enabled, and a clean stop.
module tb_ro_cell;

  localparam real HALF_NS = 1.25;

  int unsigned checks = 0, failures = 0;
  logic en, osc;
  int unsigned edges = 0;
  realtime first_edge, last_edge;

  ro_cell #(.HALF_PERIOD_NS(HALF_NS)) dut (.en, .osc);

  always @(posedge osc) begin
    if (edges == 0) first_edge = $realtime;
    last_edge = $realtime;
    edges++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real period;
    int unsigned e0;
    en = 1'b0;
    #100ns;
    check(edges == 0, "no edges while disabled");
    check(osc == 1'b0, "output low while disabled");

    en = 1'b1;
    #1000ns;
    en = 1'b0;
    // 1000 ns / 2.5 ns = 400 rising edges (the first after one half period).
    check(edges >= 399 && edges <= 401, $sformatf("edge count %0d, expected 400", edges));
    period = (last_edge - first_edge) / real'(edges - 1);
    check(period > 2.49 && period < 2.51, $sformatf("period %f ns, expected 2.5", period));
    check(first_edge > 100.0 && first_edge < 102.0, "first edge one half period after enable");

    #5ns;
    e0 = edges;
    #200ns;
    check(edges == e0, "oscillation stops when disabled");
    check(osc == 1'b0, "output returns low when disabled");

    // re-enable works
    edges = 0;
    en = 1'b1;
    #100ns;
    en = 1'b0;
    check(edges >= 39 && edges <= 41, $sformatf("second run edge count %0d, expected 40", edges));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
