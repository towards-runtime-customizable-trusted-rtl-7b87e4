`timescale 1ns / 1ps
// tb_ro_counter - checks the oscillation counter: counting, asynchronous
// clear and saturation (a 4-bit instance saturates after 15 edges).
module tb_ro_counter;

  int unsigned checks = 0, failures = 0;
  logic ro_clk, clr_n;
  logic [15:0] count;
  logic [3:0]  count4;

  ro_counter #(.WIDTH(16)) dut   (.ro_clk, .clr_n, .count(count));
  ro_counter #(.WIDTH(4))  dut4  (.ro_clk, .clr_n, .count(count4));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic pulses(input int n);
    repeat (n) begin
      #1 ro_clk = 1'b1;
      #1 ro_clk = 1'b0;
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
    ro_clk = 1'b0;
    clr_n  = 1'b0;
    #5;
    check(count == 0 && count4 == 0, "cleared");
    pulses(3);
    check(count == 0, "held in clear while clr_n low");
    clr_n = 1'b1;
    #1;
    for (int n = 1; n <= 40; n++) begin
      pulses(1);
      check(count == 16'(n), $sformatf("count %0d after %0d edges", count, n));
      check(count4 == 4'((n > 15) ? 15 : n), $sformatf("4-bit count %0d after %0d edges", count4, n));
    end
    // asynchronous clear, no clock edge needed
    clr_n = 1'b0;
    #1;
    check(count == 0 && count4 == 0, "asynchronous clear");
    clr_n = 1'b1;
    pulses(1234);
    check(count == 1234, $sformatf("count %0d after 1234 edges", count));
    check(count4 == 15, "4-bit counter saturated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
