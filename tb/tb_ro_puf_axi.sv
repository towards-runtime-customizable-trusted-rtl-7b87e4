`timescale 1ns / 1ps
// tb_ro_puf_axi - checks the secure RO-PUF peripheral through its AXI4-Lite
// port: register access, challenge/response against a reference model of the
// device's oscillators, evaluation time, and that every normal-world
// (AxPROT[1] = 1) access is refused with SLVERR and has no effect.  A second
// instance with another DEVICE_SEED stands for a second chip: it follows its
// own oscillators and answers some of the same challenges differently.
module tb_ro_puf_axi;
  import rctee_pkg::*;

  localparam int unsigned NUM_RO    = 16;
  localparam int unsigned WINDOW    = 128;
  localparam int unsigned SETTLE    = 4;
  localparam int unsigned SPREAD_PS = 100;
  localparam int unsigned SEED      = 32'hCAFE_0042;
  localparam int unsigned SEED2     = 32'h0BAD_F00D;   // a second device
  localparam axi_prot_t   SEC       = 3'b000;
  localparam axi_prot_t   NSEC      = 3'b010;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t req;
  axil_rsp_t rsp;

  always #5 clk = ~clk;

  ro_puf_axi #(
    .NUM_RO(NUM_RO), .WINDOW_CYCLES(WINDOW), .SETTLE_CYCLES(SETTLE),
    .RO_SPREAD_PS(SPREAD_PS), .DEVICE_SEED(SEED)
  ) dut (.clk, .rst_n, .s_axi_req(req), .s_axi_rsp(rsp));

  axil_master_bfm bfm (.clk, .req, .rsp);

  // A second device: same design, different silicon.
  axil_req_t req2;
  axil_rsp_t rsp2;
  ro_puf_axi #(
    .NUM_RO(NUM_RO), .WINDOW_CYCLES(WINDOW), .SETTLE_CYCLES(SETTLE),
    .RO_SPREAD_PS(SPREAD_PS), .DEVICE_SEED(SEED2)
  ) dut2 (.clk, .rst_n, .s_axi_req(req2), .s_axi_rsp(rsp2));

  axil_master_bfm bfm2 (.clk, .req(req2), .rsp(rsp2));

  // Reference model of the oscillator spread of this simulated device: the
  // same hash of (index, seed) that sets each model oscillator's half period.
  function automatic int unsigned ref_var_ps(input int unsigned idx, input int unsigned seed);
    logic [31:0] h;
    h = ((idx + 1) * 32'h9E37_79B9) ^ seed;
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return h % SPREAD_PS;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input logic [7:0] off, input axi_data_t d, input axi_prot_t p,
                    input axi_resp_e exp);
    axi_resp_e r;
    int unsigned c;
    bfm.write(PL_BASE_ADDR | axi_addr_t'(off), d, p, r, c);
    check(r == exp, $sformatf("write 0x%02h: resp %s, expected %s", off, r.name(), exp.name()));
  endtask

  task automatic rd(input logic [7:0] off, input axi_prot_t p, input axi_resp_e exp,
                    output axi_data_t d);
    axi_resp_e r;
    int unsigned c;
    bfm.read(PL_BASE_ADDR | axi_addr_t'(off), p, d, r, c);
    check(r == exp, $sformatf("read 0x%02h: resp %s, expected %s", off, r.name(), exp.name()));
  endtask

  // One evaluation; returns the response and the cycles from the CTRL write
  // until STATUS first reports a valid response.
  task automatic evaluate(input int unsigned a, input int unsigned b,
                          output logic resp_bit, output int unsigned cycles);
    axi_data_t d;
    int unsigned t0;
    wr(PUF_REG_CHAL, axi_data_t'({4'(b), 4'(a)}), SEC, RESP_OKAY);
    t0 = cyc;
    wr(PUF_REG_CTRL, 32'h1, SEC, RESP_OKAY);
    do rd(PUF_REG_STATUS, SEC, RESP_OKAY, d); while (d[1] == 1'b0 && cyc - t0 < 5000);
    cycles = cyc - t0;
    rd(PUF_REG_RESP, SEC, RESP_OKAY, d);
    resp_bit = d[0];
  endtask

  // One evaluation on the second device (secure world, no timing checks).
  task automatic evaluate2(input int unsigned a, input int unsigned b, output logic resp_bit);
    axi_data_t d;
    axi_resp_e r;
    int unsigned c;
    bfm2.write(PL_BASE_ADDR | axi_addr_t'(PUF_REG_CHAL), axi_data_t'({4'(b), 4'(a)}), SEC, r, c);
    bfm2.write(PL_BASE_ADDR | axi_addr_t'(PUF_REG_CTRL), 32'h1, SEC, r, c);
    do bfm2.read(PL_BASE_ADDR | axi_addr_t'(PUF_REG_STATUS), SEC, d, r, c); while (d[1] == 1'b0);
    bfm2.read(PL_BASE_ADDR | axi_addr_t'(PUF_REG_RESP), SEC, d, r, c);
    resp_bit = d[0];
  endtask

  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    axi_data_t d;
    logic      r;
    int unsigned cycles, tested = 0, ones = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // register access from the secure world
    rd(PUF_REG_STATUS, SEC, RESP_OKAY, d);
    check(d[1:0] == 2'b00, "status idle, no response after reset");
    wr(PUF_REG_CHAL, 32'h0000_00A5, SEC, RESP_OKAY);
    rd(PUF_REG_CHAL, SEC, RESP_OKAY, d);
    check(d == 32'h0000_00A5, $sformatf("challenge read back 0x%08h", d));

    // normal-world accesses are refused and change nothing
    wr(PUF_REG_CHAL, 32'h0000_005A, NSEC, RESP_SLVERR);
    rd(PUF_REG_CHAL, NSEC, RESP_SLVERR, d);
    check(d == '0, "non-secure read returns zero");
    rd(PUF_REG_CHAL, SEC, RESP_OKAY, d);
    check(d == 32'h0000_00A5, "non-secure write did not change the challenge");
    wr(PUF_REG_CTRL, 32'h1, NSEC, RESP_SLVERR);
    rd(PUF_REG_STATUS, SEC, RESP_OKAY, d);
    check(d[1:0] == 2'b00, "non-secure start did not start an evaluation");
    rd(PUF_REG_RESP, NSEC, RESP_SLVERR, d);

    // challenge/response pairs against the reference model; pairs whose
    // half periods differ by less than 5 ps are skipped as unreliable, as an
    // enrolment would discard them
    for (int k = 0; k < 24; k++) begin
      int unsigned a, b, va, vb;
      a  = (k * 5 + 1) % NUM_RO;
      b  = (k * 11 + 3) % NUM_RO;
      va = ref_var_ps(a, SEED);
      vb = ref_var_ps(b, SEED);
      if (a == b || (va > vb ? va - vb : vb - va) < 5) continue;
      evaluate(a, b, r, cycles);
      tested++;
      ones += r;
      check(r == (va < vb), $sformatf("response %0b for RO %0d (%0d ps) vs RO %0d (%0d ps)",
                                      r, a, va, b, vb));
      // evaluation: 2 clear + WINDOW + SETTLE + 1 compare cycles, plus the
      // bus accesses around it
      check(cycles >= WINDOW + SETTLE + 3 && cycles <= WINDOW + SETTLE + 20,
            $sformatf("evaluation took %0d cycles", cycles));
    end
    check(tested >= 10, $sformatf("only %0d usable pairs", tested));

    // uniqueness: the same challenges on the second device, where reliable
    // there, follow that device's oscillators and differ from the first
    // device on some challenges
    begin
      int unsigned both = 0, differ = 0;
      for (int k = 0; k < 24; k++) begin
        int unsigned a, b, va, vb, wa, wb;
        logic r2;
        a  = (k * 5 + 1) % NUM_RO;
        b  = (k * 11 + 3) % NUM_RO;
        va = ref_var_ps(a, SEED);
        vb = ref_var_ps(b, SEED);
        wa = ref_var_ps(a, SEED2);
        wb = ref_var_ps(b, SEED2);
        if (a == b || (va > vb ? va - vb : vb - va) < 5 || (wa > wb ? wa - wb : wb - wa) < 5) continue;
        evaluate(a, b, r, cycles);
        evaluate2(a, b, r2);
        check(r2 == (wa < wb), $sformatf("device 2 response %0b for RO %0d vs %0d", r2, a, b));
        both++;
        if (r != r2) differ++;
      end
      check(both >= 8 && differ > 0 && differ < both,
            $sformatf("devices differ on %0d of %0d challenges", differ, both));
    end
    check(ones > 0 && ones < tested, "responses are not constant");

    // a started evaluation shows busy
    wr(PUF_REG_CTRL, 32'h1, SEC, RESP_OKAY);
    rd(PUF_REG_STATUS, SEC, RESP_OKAY, d);
    check(d[1:0] == 2'b01, $sformatf("status 0x%0h while evaluating", d));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
