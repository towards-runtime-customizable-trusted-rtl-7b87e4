`timescale 1ns / 1ps
// rctee_pkg - types and constants shared by the programmable-logic (PL) side
// of the runtime-customizable TEE.
//
// The PL part of the design is a small AXI4-Lite system: the processing
// system (PS) is the only bus master, an interconnect routes its accesses to
// the RO-PUF and to the user IPs, and every slave is protected by ARM
// TrustZone.  TrustZone reaches the PL through the AXI protection signals
// AWPROT (writes) and ARPROT (reads).  Bit 1 of AxPROT is the "non-secure"
// bit of the AXI specification: 0 means the access was issued by secure-world
// software (the trusted OS), 1 means it came from the normal world (Linux).
//
// The request/response structs bundle one AXI4-Lite port.  The request
// struct carries everything the master drives, the response struct
// everything the slave drives.  Widths (32-bit address and data), the base
// address of the PL window and the 64 KiB slot per slave are choices of this
// design, not values fixed by the TEE scheme.
package rctee_pkg;

  localparam int unsigned AXI_ADDR_W = 32;
  localparam int unsigned AXI_DATA_W = 32;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;

  // AxPROT[1] = 1 marks a non-secure (normal-world) access.
  localparam int unsigned PROT_NS_BIT = 1;

  typedef logic [AXI_ADDR_W-1:0] axi_addr_t;
  typedef logic [AXI_DATA_W-1:0] axi_data_t;
  typedef logic [AXI_STRB_W-1:0] axi_strb_t;
  typedef logic [2:0]            axi_prot_t;

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  // Master-driven half of an AXI4-Lite port.
  typedef struct packed {
    axi_addr_t awaddr;
    axi_prot_t awprot;
    logic      awvalid;
    axi_data_t wdata;
    axi_strb_t wstrb;
    logic      wvalid;
    logic      bready;
    axi_addr_t araddr;
    axi_prot_t arprot;
    logic      arvalid;
    logic      rready;
  } axil_req_t;

  // Slave-driven half of an AXI4-Lite port.
  typedef struct packed {
    logic      awready;
    logic      wready;
    axi_resp_e bresp;
    logic      bvalid;
    logic      arready;
    axi_data_t rdata;
    axi_resp_e rresp;
    logic      rvalid;
  } axil_rsp_t;

  // PL address window seen from the PS (the usual base of the full-power
  // domain master port of a Zynq UltraScale+), one 64 KiB slot per slave.
  localparam axi_addr_t PL_BASE_ADDR  = 32'hA000_0000;
  localparam axi_addr_t PL_SLOT_SPAN  = 32'h0001_0000;

  // Slot order follows the PL of the implementation figure: RO-PUF first,
  // then the two user (secure) IPs.
  localparam int unsigned NUM_PL_SLAVES = 3;
  localparam int unsigned SLOT_PUF      = 0;
  localparam int unsigned SLOT_IP1      = 1;
  localparam int unsigned SLOT_IP2      = 2;

  // Register map of the RO-PUF peripheral (byte offsets in its slot).
  localparam logic [7:0] PUF_REG_CTRL   = 8'h00;  // W: bit0 = 1 starts one evaluation
  localparam logic [7:0] PUF_REG_CHAL   = 8'h04;  // R/W: challenge {sel_b, sel_a}
  localparam logic [7:0] PUF_REG_STATUS = 8'h08;  // R: bit0 busy, bit1 response valid
  localparam logic [7:0] PUF_REG_RESP   = 8'h0C;  // R: bit0 response

  function automatic logic is_nonsecure(input axi_prot_t prot);
    return prot[PROT_NS_BIT];
  endfunction

endpackage
