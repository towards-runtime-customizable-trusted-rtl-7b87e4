`timescale 1ns / 1ps
// rctee_pl_top - initial programmable-logic design of the runtime-
// customizable TEE.
//
// This is the hardware that is loaded at boot, before any user design: the
// PS reaches the PL through one AXI4-Lite master port, an interconnect
// splits the PL window into three slots, and every slot is declared secure,
// so only the trusted OS can use it.  Slot 0 holds the RO-PUF that the trusted
// OS uses for the attestation key seed and for device authentication.
// Slots 1 and 2 are the AXI4-Lite ports of the two secure user IPs; the user
// IPs themselves are the customer's design, loaded at run time, and are
// outside this module, so their ports are ports of the top.
//
// Ports:
//   s_axi_req/s_axi_rsp   AXI4-Lite slave port for the PS master (AxPROT
//                         carries the TrustZone world of each access)
//   ip1_axi_*/ip2_axi_*   AXI4-Lite master ports towards the user IPs
// Addresses: BASE_ADDR + 0x0_0000 RO-PUF, + 0x1_0000 user IP 1,
// + 0x2_0000 user IP 2 (64 KiB slots).  Latencies: see axi_tz_interconnect
// and ro_puf_axi.
module rctee_pl_top
  import rctee_pkg::*;
#(
  parameter int unsigned          NUM_RO        = 16,
  parameter int unsigned          COUNT_W       = 16,
  parameter int unsigned          WINDOW_CYCLES = 1024,
  parameter int unsigned          DEVICE_SEED   = 32'h1234_5678,
  parameter axi_addr_t            BASE_ADDR     = PL_BASE_ADDR,
  parameter logic [NUM_PL_SLAVES-1:0] SECURE_MASK = '1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axi_req,
  output axil_rsp_t s_axi_rsp,
  output axil_req_t ip1_axi_req,
  input  axil_rsp_t ip1_axi_rsp,
  output axil_req_t ip2_axi_req,
  input  axil_rsp_t ip2_axi_rsp
);

  axil_req_t slv_req [NUM_PL_SLAVES];
  axil_rsp_t slv_rsp [NUM_PL_SLAVES];

  axi_tz_interconnect #(
    .NUM_SLAVES (NUM_PL_SLAVES),
    .BASE_ADDR  (BASE_ADDR),
    .SLOT_SPAN  (PL_SLOT_SPAN),
    .SECURE_MASK(SECURE_MASK)
  ) u_xbar (
    .clk, .rst_n,
    .s_axi_req, .s_axi_rsp,
    .m_axi_req(slv_req),
    .m_axi_rsp(slv_rsp)
  );

  ro_puf_axi #(
    .NUM_RO       (NUM_RO),
    .COUNT_W      (COUNT_W),
    .WINDOW_CYCLES(WINDOW_CYCLES),
    .DEVICE_SEED  (DEVICE_SEED)
  ) u_puf (
    .clk, .rst_n,
    .s_axi_req(slv_req[SLOT_PUF]),
    .s_axi_rsp(slv_rsp[SLOT_PUF])
  );

  assign ip1_axi_req      = slv_req[SLOT_IP1];
  assign slv_rsp[SLOT_IP1] = ip1_axi_rsp;
  assign ip2_axi_req      = slv_req[SLOT_IP2];
  assign slv_rsp[SLOT_IP2] = ip2_axi_rsp;

endmodule
