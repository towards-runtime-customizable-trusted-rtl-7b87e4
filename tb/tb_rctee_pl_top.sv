`timescale 1ns / 1ps
// tb_rctee_pl_top - end-to-end test of the initial PL design at its default
// parameters.  The testbench plays the processing system: secure-world
// accesses (AxPROT[1] = 0) stand for the trusted OS system calls, normal-world
// accesses (AxPROT[1] = 1) for software in Linux.  Two behavioural secure IPs
// sit on the user-IP ports.  The sequence follows the life of the TEE:
//   1. seed generation: PUF responses to a pseudo-random challenge sequence
//   2. device authentication: enrol challenge/response pairs, later answer
//      the same challenges again
//   3. normal-world attacks on the PUF and on a user IP: all refused
//   4. IP invocation of both user IPs in the unified input/output format
//   5. accesses outside the PL window
// PUF responses are compared with a reference model of the device's
// oscillators (default DEVICE_SEED, 1.5 ns nominal half period, 0..99 ps
// spread).  Each mechanism must occur at least once.
module tb_rctee_pl_top;
  import rctee_pkg::*;

  localparam int unsigned NUM_RO    = 16;
  localparam int unsigned WINDOW    = 1024;
  localparam int unsigned SPREAD_PS = 100;
  localparam int unsigned SEED      = 32'h1234_5678;
  localparam axi_prot_t   SEC       = 3'b000;
  localparam axi_prot_t   NSEC      = 3'b010;
  localparam axi_addr_t   PUF       = PL_BASE_ADDR;
  localparam axi_addr_t   IP1       = PL_BASE_ADDR + PL_SLOT_SPAN;
  localparam axi_addr_t   IP2       = PL_BASE_ADDR + 2 * PL_SLOT_SPAN;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t req, ip1_req, ip2_req;
  axil_rsp_t rsp, ip1_rsp, ip2_rsp;

  always #5 clk = ~clk;

  rctee_pl_top dut (
    .clk, .rst_n,
    .s_axi_req(req), .s_axi_rsp(rsp),
    .ip1_axi_req(ip1_req), .ip1_axi_rsp(ip1_rsp),
    .ip2_axi_req(ip2_req), .ip2_axi_rsp(ip2_rsp)
  );

  secure_ip_model #(.IP_ID(1), .LATENCY(30)) u_ip1 (.clk, .rst_n, .req(ip1_req), .rsp(ip1_rsp));
  secure_ip_model #(.IP_ID(2), .LATENCY(7))  u_ip2 (.clk, .rst_n, .req(ip2_req), .rsp(ip2_rsp));

  axil_master_bfm bfm (.clk, .req, .rsp);

  int unsigned cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int unsigned n_puf_eval = 0, n_puf_busy_seen = 0, n_ns_refused = 0;
  int unsigned n_ip_invoke = 0, n_ip_running_seen = 0, n_unmapped = 0, n_auth_match = 0;

  function automatic int unsigned ref_var_ps(input int unsigned idx);
    logic [31:0] h;
    h = ((idx + 1) * 32'h9E37_79B9) ^ SEED;
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return h % SPREAD_PS;
  endfunction

  // 1 = reliable pair (half periods at least 5 ps apart)
  function automatic bit reliable(input int unsigned a, input int unsigned b);
    int unsigned va = ref_var_ps(a), vb = ref_var_ps(b);
    return a != b && ((va > vb) ? va - vb : vb - va) >= 5;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input axi_addr_t a, input axi_data_t d, input axi_prot_t p,
                    input axi_resp_e exp);
    axi_resp_e r;
    int unsigned c;
    bfm.write(a, d, p, r, c);
    check(r == exp, $sformatf("write 0x%08h: %s, expected %s", a, r.name(), exp.name()));
  endtask

  task automatic rd(input axi_addr_t a, input axi_prot_t p, input axi_resp_e exp,
                    output axi_data_t d);
    axi_resp_e r;
    int unsigned c;
    bfm.read(a, p, d, r, c);
    check(r == exp, $sformatf("read 0x%08h: %s, expected %s", a, r.name(), exp.name()));
  endtask

  // What the PUF system call does: set the challenge, start, poll, read.
  task automatic puf_response(input int unsigned a, input int unsigned b, output logic bit_o);
    axi_data_t d;
    int unsigned t0, polls = 0;
    wr(PUF + PUF_REG_CHAL, axi_data_t'({4'(b), 4'(a)}), SEC, RESP_OKAY);
    t0 = cyc;
    wr(PUF + PUF_REG_CTRL, 32'h1, SEC, RESP_OKAY);
    do begin
      rd(PUF + PUF_REG_STATUS, SEC, RESP_OKAY, d);
      if (d[0]) n_puf_busy_seen++;
      polls++;
    end while (!d[1] && polls < 2000);
    check(cyc - t0 >= WINDOW, $sformatf("evaluation done after %0d cycles, window is %0d",
                                        cyc - t0, WINDOW));
    check(cyc - t0 <= WINDOW + 40, $sformatf("evaluation took %0d cycles", cyc - t0));
    rd(PUF + PUF_REG_RESP, SEC, RESP_OKAY, d);
    bit_o = d[0];
    n_puf_eval++;
    if (reliable(a, b))
      check(bit_o == (ref_var_ps(a) < ref_var_ps(b)),
            $sformatf("PUF response %0b for RO %0d vs %0d", bit_o, a, b));
  endtask

  // What the IP invocation system call does for one secure IP.
  task automatic invoke_ip(input axi_addr_t base, input int unsigned id);
    axi_data_t in_w [8];
    axi_data_t d, sum, x;
    int unsigned polls = 0;
    sum = '0;
    x   = axi_data_t'(id);
    for (int i = 0; i < 8; i++) begin
      in_w[i] = $urandom;
      sum += in_w[i];
      x   ^= in_w[i];
      wr(base + axi_addr_t'(4 * i), in_w[i], SEC, RESP_OKAY);
    end
    wr(base + 32'h40, 32'h1, SEC, RESP_OKAY);
    do begin
      rd(base + 32'h40, SEC, RESP_OKAY, d);
      if (d == 1) n_ip_running_seen++;
      polls++;
    end while (d != 2 && polls < 500);
    rd(base + 32'h80, SEC, RESP_OKAY, d);
    check(d == sum, $sformatf("IP%0d OUT0 0x%08h, expected 0x%08h", id, d, sum));
    rd(base + 32'h84, SEC, RESP_OKAY, d);
    check(d == x, $sformatf("IP%0d OUT1 0x%08h, expected 0x%08h", id, d, x));
    n_ip_invoke++;
  endtask

  initial begin
    axi_data_t d;
    logic      r;
    logic [15:0] lfsr = 16'hACE1;
    logic [31:0] seed_word = '0;
    int unsigned enrol_a [8], enrol_b [8];
    logic        enrol_r [8];
    int unsigned n_enrol = 0, acc1, acc2;

    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // 1. seed from responses to a pseudo-random challenge sequence
    for (int k = 0; k < 16; k++) begin
      lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      puf_response(lfsr[3:0], lfsr[7:4], r);
      seed_word = {seed_word[30:0], r};
    end
    check(seed_word[15:0] != 16'h0000 && seed_word[15:0] != 16'hFFFF,
          $sformatf("seed bits 0x%04h are not constant", seed_word[15:0]));

    // 2. authentication: enrol reliable pairs, answer them again later
    for (int a = 0; a < NUM_RO && n_enrol < 8; a++) begin
      int unsigned b = (a * 7 + 5) % NUM_RO;
      if (!reliable(a, b)) continue;
      enrol_a[n_enrol] = a;
      enrol_b[n_enrol] = b;
      puf_response(a, b, enrol_r[n_enrol]);
      n_enrol++;
    end
    for (int i = n_enrol - 1; i >= 0; i--) begin
      puf_response(enrol_a[i], enrol_b[i], r);
      check(r == enrol_r[i], $sformatf("challenge %0d/%0d answered differently", enrol_a[i], enrol_b[i]));
      if (r == enrol_r[i]) n_auth_match++;
    end

    // 3. normal-world attacks
    acc1 = u_ip1.accesses;
    rd(PUF + PUF_REG_RESP, NSEC, RESP_DECERR, d);
    check(d == '0, "normal-world PUF read returns zero");
    wr(PUF + PUF_REG_CHAL, 32'h0000_0033, NSEC, RESP_DECERR);
    wr(PUF + PUF_REG_CTRL, 32'h1, NSEC, RESP_DECERR);
    rd(PUF + PUF_REG_STATUS, SEC, RESP_OKAY, d);
    check(d[0] == 1'b0, "normal-world start did not start the PUF");
    rd(PUF + PUF_REG_CHAL, SEC, RESP_OKAY, d);
    check(d[7:0] == {4'(enrol_b[0]), 4'(enrol_a[0])}, "normal-world write did not change the challenge");
    wr(IP1 + 32'h00, 32'hDEAD_BEEF, NSEC, RESP_DECERR);
    wr(IP1 + 32'h40, 32'h1, NSEC, RESP_DECERR);
    rd(IP1 + 32'h80, NSEC, RESP_DECERR, d);
    rd(IP2 + 32'h84, NSEC, RESP_DECERR, d);
    n_ns_refused += 8;
    check(u_ip1.accesses == acc1 && u_ip1.ns_accesses == 0 && u_ip2.ns_accesses == 0,
          "no normal-world access reached a user IP");

    // 4. IP invocation
    acc2 = u_ip2.runs;
    invoke_ip(IP1, 1);
    invoke_ip(IP2, 2);
    invoke_ip(IP1, 1);
    check(u_ip1.runs == 2 && u_ip2.runs == acc2 + 1, "each invocation ran the IP once");

    // 5. outside the window
    rd(PL_BASE_ADDR + 3 * PL_SLOT_SPAN, SEC, RESP_DECERR, d);
    wr(PL_BASE_ADDR - 32'h10, 32'h1, SEC, RESP_DECERR);
    n_unmapped += 2;

    $display("mechanisms: puf_eval=%0d puf_busy_seen=%0d auth_match=%0d ns_refused=%0d ip_invoke=%0d ip_running_seen=%0d unmapped=%0d",
             n_puf_eval, n_puf_busy_seen, n_auth_match, n_ns_refused, n_ip_invoke, n_ip_running_seen, n_unmapped);
    check(n_puf_eval > 0,        "mechanism: PUF evaluation");
    check(n_puf_busy_seen > 0,   "mechanism: PUF busy observed");
    check(n_auth_match > 0,      "mechanism: authentication re-evaluation");
    check(n_ns_refused > 0,      "mechanism: normal-world access refused");
    check(n_ip_invoke > 0,       "mechanism: IP invocation");
    check(n_ip_running_seen > 0, "mechanism: IP running observed");
    check(n_unmapped > 0,        "mechanism: decode error outside the window");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
