`timescale 1ns / 1ps
// tb_ro_puf_core - checks the PUF core against oscillators whose periods the
// testbench sets: the counts over the window, the response of the comparator,
// that only the selected pair runs and only during the window, the exact
// evaluation latency, and that a start while busy is ignored.
module tb_ro_puf_core;

  localparam int unsigned NUM_RO  = 8;
  localparam int unsigned COUNT_W = 12;
  localparam int unsigned WINDOW  = 64;
  localparam int unsigned SETTLE  = 4;
  localparam int unsigned SEL_W   = 3;
  localparam int unsigned LATENCY = 2 + WINDOW + SETTLE + 1;
  localparam real         TCLK_NS = 10.0;

  int unsigned checks = 0, failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic [2*SEL_W-1:0] challenge = '0;
  logic busy, done, response;
  logic [COUNT_W-1:0] count_a, count_b;
  logic [NUM_RO-1:0] ro_en, ro_osc;

  always #(TCLK_NS / 2) clk = ~clk;

  ro_puf_core #(
    .NUM_RO(NUM_RO), .COUNT_W(COUNT_W), .WINDOW_CYCLES(WINDOW), .SETTLE_CYCLES(SETTLE)
  ) dut (.*);

  // Oscillators with testbench-chosen half periods (in ps), all different.
  function automatic int unsigned half_ps(input int unsigned i);
    return 1500 + ((i * 7919) % 97) * 3;
  endfunction

  int unsigned en_cycles [NUM_RO];

  for (genvar i = 0; i < NUM_RO; i++) begin : g_osc
    initial ro_osc[i] = 1'b0;
    always begin
      if (ro_en[i]) begin
        #(real'(half_ps(i)) / 1000.0);
        ro_osc[i] = ro_en[i] ? ~ro_osc[i] : 1'b0;
      end else begin
        ro_osc[i] = 1'b0;
        @(ro_en[i]);
      end
    end
    always @(posedge clk) if (ro_en[i]) en_cycles[i]++;
  end

  // Rising edges of an oscillator that runs for t_ns from a standing start.
  function automatic int unsigned expected_edges(input int unsigned i, input real t_ns);
    real h;
    h = real'(half_ps(i)) / 1000.0;
    return $rtoi((t_ns - h) / (2.0 * h)) + 1;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned others_enabled = 0;
  always @(posedge clk) begin
    if ($countones(ro_en) > 2) others_enabled++;
  end

  task automatic evaluate(input int unsigned a, input int unsigned b);
    int unsigned lat, ea, eb;
    for (int i = 0; i < NUM_RO; i++) en_cycles[i] = 0;
    challenge <= {SEL_W'(b), SEL_W'(a)};
    start     <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    lat = 0;
    do begin
      @(posedge clk);
      lat++;
      if (lat == 10) begin
        // a second start while busy must be ignored
        start     <= 1'b1;
        challenge <= {SEL_W'(a), SEL_W'(b)};
      end else begin
        start <= 1'b0;
      end
      if (lat > 5 && lat < WINDOW) check_busy: assert (busy);
    end while (!done && lat < 1000);
    // `done` is sampled here as it was just before this edge: it became 1 at
    // the edge LATENCY edges after the start edge.
    check(lat == LATENCY + 1, $sformatf("done seen %0d edges after start, expected %0d", lat, LATENCY + 1));
    ea = expected_edges(a, WINDOW * TCLK_NS);
    eb = expected_edges(b, WINDOW * TCLK_NS);
    if (a != b) begin
      check(int'(count_a) >= int'(ea) - 1 && int'(count_a) <= int'(ea) + 1,
            $sformatf("count_a %0d, expected %0d (RO %0d)", count_a, ea, a));
      check(int'(count_b) >= int'(eb) - 1 && int'(count_b) <= int'(eb) + 1,
            $sformatf("count_b %0d, expected %0d (RO %0d)", count_b, eb, b));
      check(en_cycles[a] == WINDOW && en_cycles[b] == WINDOW,
            $sformatf("RO %0d/%0d enabled %0d/%0d cycles, expected %0d",
                      a, b, en_cycles[a], en_cycles[b], WINDOW));
    end
    // a faster oscillator has the shorter half period
    check(response == (half_ps(a) < half_ps(b)),
          $sformatf("response %0b for RO %0d vs RO %0d", response, a, b));
    for (int i = 0; i < NUM_RO; i++)
      if (i != a && i != b) check(en_cycles[i] == 0, $sformatf("RO %0d enabled", i));
    @(posedge clk);
    check(!busy, "idle after evaluation (busy start ignored)");
  endtask

  initial begin
    int unsigned ones = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(!busy && ro_en == '0, "idle after reset");
    for (int a = 0; a < NUM_RO; a++)
      for (int b = 0; b < NUM_RO; b++)
        if ((a + b) % 3 == 0) begin
          evaluate(a, b);
          ones += response;
        end
    check(ones > 0, "some responses are 1");
    check(others_enabled == 0, "never more than two ROs enabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
