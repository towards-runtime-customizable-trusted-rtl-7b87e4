`timescale 1ns / 1ps
// ro_puf_axi - the secure RO-PUF IP: ring oscillators, PUF core and an
// AXI4-Lite register interface with TrustZone protection ports.
//
// The trusted OS uses this peripheral for two things: a random seed for the
// attestation key pair (many evaluations with pseudo-random challenges) and
// device authentication (responses to challenges whose answers a trusted
// third party recorded at enrolment).  The IP therefore must answer only
// secure-world software.  Every access carries AWPROT/ARPROT; an access
// whose non-secure bit (AxPROT[1]) is set is refused with SLVERR, a write is
// then dropped and a read returns zero.  The interconnect in front of it
// refuses such accesses as well, so this check is the second line of defence.
//
// Register map (byte offsets, 32-bit registers, see rctee_pkg):
//   0x00 CTRL    W   bit0 = 1 starts an evaluation (ignored while busy)
//   0x04 CHAL    R/W challenge: bits [SEL_W-1:0] select RO a, the next
//                    SEL_W bits select RO b
//   0x08 STATUS  R   bit0 busy, bit1 response valid (cleared by a start)
//   0x0C RESP    R   bit0 response: 1 when RO a counted more than RO b
// Other offsets read as zero and ignore writes, with OKAY.
//
// Bus timing: a write is accepted in the cycle both AWVALID and WVALID are
// high and no response is pending; BVALID follows one cycle later.  A read
// is accepted when ARVALID is high and no read data is pending; RVALID
// follows one cycle later.  One evaluation takes
// 2 + WINDOW_CYCLES + SETTLE_CYCLES + 1 cycles (see ro_puf_core).
//
// The ring oscillators are ro_cell behavioural models whose half periods are
// spread around RO_HALF_PERIOD_NS by a hash of the oscillator index and
// DEVICE_SEED; DEVICE_SEED thus stands for the silicon of one device.  On an
// FPGA the ro_cell instances are replaced by LUT ring oscillators.
module ro_puf_axi
  import rctee_pkg::*;
#(
  parameter int unsigned NUM_RO            = 16,
  parameter int unsigned COUNT_W           = 16,
  parameter int unsigned WINDOW_CYCLES     = 1024,
  parameter int unsigned SETTLE_CYCLES     = 4,
  parameter real         RO_HALF_PERIOD_NS = 1.5,
  parameter int unsigned RO_SPREAD_PS      = 100,
  parameter int unsigned DEVICE_SEED       = 32'h1234_5678
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axi_req,
  output axil_rsp_t s_axi_rsp
);

  localparam int unsigned SEL_W = (NUM_RO > 1) ? $clog2(NUM_RO) : 1;

  // Process-variation model: a fixed, well-mixed hash of (index, seed).
  function automatic int unsigned ro_variation_ps(input int unsigned idx,
                                                  input int unsigned seed);
    logic [31:0] h;
    h = ((idx + 1) * 32'h9E37_79B9) ^ seed;
    h = h ^ (h >> 15);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return (RO_SPREAD_PS == 0) ? 0 : (h % RO_SPREAD_PS);
  endfunction

  // ---------------------------------------------------------------- RO array
  logic [NUM_RO-1:0] ro_en, ro_osc;

  for (genvar i = 0; i < NUM_RO; i++) begin : g_ro
    localparam real HALF_NS = RO_HALF_PERIOD_NS + real'(ro_variation_ps(i, DEVICE_SEED)) / 1000.0;
    ro_cell #(.HALF_PERIOD_NS(HALF_NS)) u_ro (.en(ro_en[i]), .osc(ro_osc[i]));
  end

  // ---------------------------------------------------------------- PUF core
  logic               start;
  logic [2*SEL_W-1:0] challenge;
  logic               busy, done, response;

  ro_puf_core #(
    .NUM_RO       (NUM_RO),
    .COUNT_W      (COUNT_W),
    .WINDOW_CYCLES(WINDOW_CYCLES),
    .SETTLE_CYCLES(SETTLE_CYCLES)
  ) u_core (
    .clk, .rst_n, .start, .challenge, .busy, .done, .response,
    .count_a(), .count_b(), .ro_en, .ro_osc
  );

  // ---------------------------------------------------------- AXI4-Lite slave
  logic       resp_valid;
  logic       bvalid_q, rvalid_q;
  axi_resp_e  bresp_q, rresp_q;
  axi_data_t  rdata_q;
  logic       wr_fire, rd_fire;
  logic [7:0] wr_off, rd_off;
  logic       wr_ns, rd_ns;

  assign wr_fire = s_axi_req.awvalid && s_axi_req.wvalid && !bvalid_q;
  assign rd_fire = s_axi_req.arvalid && !rvalid_q;
  assign wr_off  = {s_axi_req.awaddr[7:2], 2'b00};
  assign rd_off  = {s_axi_req.araddr[7:2], 2'b00};
  assign wr_ns   = is_nonsecure(s_axi_req.awprot);
  assign rd_ns   = is_nonsecure(s_axi_req.arprot);

  always_comb begin
    s_axi_rsp.awready = wr_fire;
    s_axi_rsp.wready  = wr_fire;
    s_axi_rsp.bvalid  = bvalid_q;
    s_axi_rsp.bresp   = bresp_q;
    s_axi_rsp.arready = rd_fire;
    s_axi_rsp.rvalid  = rvalid_q;
    s_axi_rsp.rresp   = rresp_q;
    s_axi_rsp.rdata   = rdata_q;
  end

  // Start pulse for the core: a secure write of 1 to CTRL.bit0.
  assign start = wr_fire && !wr_ns && (wr_off == PUF_REG_CTRL) &&
                 s_axi_req.wstrb[0] && s_axi_req.wdata[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      bresp_q  <= RESP_OKAY;
      rvalid_q <= 1'b0;
      rresp_q  <= RESP_OKAY;
      rdata_q  <= '0;
      challenge  <= '0;
      resp_valid <= 1'b0;
    end else begin
      // write channel
      if (wr_fire) begin
        bvalid_q <= 1'b1;
        bresp_q  <= wr_ns ? RESP_SLVERR : RESP_OKAY;
        if (!wr_ns && wr_off == PUF_REG_CHAL) begin
          for (int b = 0; b < AXI_STRB_W; b++)
            if (s_axi_req.wstrb[b])
              for (int k = 0; k < 8; k++)
                if (b * 8 + k < 2 * SEL_W) challenge[b*8+k] <= s_axi_req.wdata[b*8+k];
        end
      end else if (s_axi_req.bready) begin
        bvalid_q <= 1'b0;
      end

      // response-valid flag
      if (start && !busy) resp_valid <= 1'b0;
      else if (done)      resp_valid <= 1'b1;

      // read channel
      if (rd_fire) begin
        rvalid_q <= 1'b1;
        if (rd_ns) begin
          rresp_q  <= RESP_SLVERR;
          rdata_q  <= '0;
        end else begin
          rresp_q  <= RESP_OKAY;
          unique case (rd_off)
            PUF_REG_CHAL:   rdata_q <= AXI_DATA_W'(challenge);
            PUF_REG_STATUS: rdata_q <= AXI_DATA_W'({resp_valid, busy});
            PUF_REG_RESP:   rdata_q <= AXI_DATA_W'(response);
            default:        rdata_q <= '0;
          endcase
        end
      end else if (s_axi_req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------- assertions
  // A response, once offered, stays until the master takes it.
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rsp.bvalid && !s_axi_req.bready |=> s_axi_rsp.bvalid);
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rsp.rvalid && !s_axi_req.rready |=> s_axi_rsp.rvalid && $stable(s_axi_rsp.rdata));
  // A non-secure access never starts the PUF.
  a_ns_no_start: assert property (@(posedge clk) disable iff (!rst_n)
    wr_fire && wr_ns |-> !start);

endmodule
