`timescale 1ns / 1ps
// tb_axi_tz_interconnect - checks address decoding, TrustZone filtering and
// response forwarding of the interconnect.  Slaves 0 and 2 are declared
// secure, slave 1 non-secure.  Every write goes to a scoreboard; reads are
// compared with it; the slaves' access counters show that refused accesses
// never reach a slave.
module tb_axi_tz_interconnect;
  import rctee_pkg::*;

  localparam int unsigned NS      = 3;
  localparam logic [NS-1:0] MASK  = 3'b101;
  localparam axi_prot_t   SEC     = 3'b000;
  localparam axi_prot_t   NSEC    = 3'b010;

  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t req;
  axil_rsp_t rsp;
  axil_req_t sreq [NS];
  axil_rsp_t srsp [NS];

  always #5 clk = ~clk;

  axi_tz_interconnect #(.NUM_SLAVES(NS), .SECURE_MASK(MASK)) dut (
    .clk, .rst_n, .s_axi_req(req), .s_axi_rsp(rsp), .m_axi_req(sreq), .m_axi_rsp(srsp)
  );

  for (genvar i = 0; i < NS; i++) begin : g_slv
    axil_mem_slave u_slv (.clk, .rst_n, .req(sreq[i]), .rsp(srsp[i]));
  end

  axil_master_bfm bfm (.clk, .req, .rsp);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned acc(input int s);
    case (s)
      0: return g_slv[0].u_slv.accesses;
      1: return g_slv[1].u_slv.accesses;
      default: return g_slv[2].u_slv.accesses;
    endcase
  endfunction

  axi_data_t   sb [NS][16];
  int unsigned blocked = 0, forwarded = 0, unmapped = 0;

  initial begin
    axi_resp_e r;
    axi_data_t d;
    int unsigned c, n_before;
    for (int s = 0; s < NS; s++) for (int w = 0; w < 16; w++) sb[s][w] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // random traffic: slot, word, world and direction at random
    for (int n = 0; n < 300; n++) begin
      int unsigned s, w;
      bit          ns, is_wr, ok;
      axi_addr_t   a;
      axi_data_t   v;
      s     = $urandom_range(0, NS - 1);
      w     = $urandom_range(0, 15);
      ns    = $urandom_range(0, 1);
      is_wr = $urandom_range(0, 1);
      v     = $urandom;
      a     = PL_BASE_ADDR + s * PL_SLOT_SPAN + w * 4;
      ok    = !(MASK[s] && ns);
      n_before = acc(s);
      if (is_wr) begin
        bfm.write(a, v, ns ? NSEC : SEC, r, c);
        if (ok) sb[s][w] = v;
      end else begin
        bfm.read(a, ns ? NSEC : SEC, d, r, c);
        if (ok) check(d == sb[s][w], $sformatf("read slot %0d word %0d: 0x%08h, expected 0x%08h",
                                               s, w, d, sb[s][w]));
        else    check(d == '0, "refused read returns zero");
      end
      check(r == (ok ? RESP_OKAY : RESP_DECERR),
            $sformatf("slot %0d ns=%0b wr=%0b: resp %s", s, ns, is_wr, r.name()));
      check(acc(s) == n_before + (ok ? 1 : 0),
            $sformatf("slot %0d access count %0d -> %0d (allowed=%0b)", s, n_before, acc(s), ok));
      if (ok) forwarded++; else begin
        blocked++;
        // a refused access is answered by the interconnect itself: AW/W
        // accepted in 1 edge, B 1 edge later
        check(c == 2, $sformatf("refused access took %0d edges, expected 2", c));
      end
    end

    // secure access reaches a secure slave with its AxPROT intact
    bfm.write(PL_BASE_ADDR + 2 * PL_SLOT_SPAN + 8, 32'h1234_5678, 3'b001, r, c);
    check(r == RESP_OKAY && g_slv[2].u_slv.last_prot == 3'b001, "AxPROT passed to slave");

    // slave errors are passed back
    bfm.write(PL_BASE_ADDR + PL_SLOT_SPAN + 8'hFC, 32'h1, SEC, r, c);
    check(r == RESP_SLVERR, "slave SLVERR forwarded on write");
    bfm.read(PL_BASE_ADDR + 8'hFC, SEC, d, r, c);
    check(r == RESP_SLVERR, "slave SLVERR forwarded on read");

    // addresses outside every slot
    n_before = acc(0) + acc(1) + acc(2);
    bfm.read(PL_BASE_ADDR + NS * PL_SLOT_SPAN, SEC, d, r, c);
    check(r == RESP_DECERR, "read past the last slot: DECERR");
    bfm.write(PL_BASE_ADDR - 4, 32'h5, SEC, r, c);
    check(r == RESP_DECERR, "write below the window: DECERR");
    check(acc(0) + acc(1) + acc(2) == n_before, "unmapped accesses reach no slave");
    unmapped += 2;

    check(blocked > 20 && forwarded > 20, $sformatf("blocked %0d forwarded %0d", blocked, forwarded));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
