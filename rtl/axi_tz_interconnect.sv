`timescale 1ns / 1ps
// axi_tz_interconnect - AXI4-Lite interconnect with TrustZone slave
// protection, between the PS master port and the PL peripherals.
//
// The TEE extends ARM TrustZone into the programmable logic by declaring
// peripherals behind the interconnect "secure".  A secure slave is reached
// only by accesses whose AxPROT[1] (non-secure bit) is 0, i.e. accesses made
// by the trusted OS; a normal-world access to it is answered by the
// interconnect itself with DECERR and never appears on the slave port.  An
// address outside every slot also gets DECERR.  SECURE_MASK bit i declares
// slave i secure; by default every slave is secure, as for the RO-PUF and the
// user IPs of the TEE.
//
// Address decoding: slave i owns [BASE_ADDR + i*SLOT_SPAN,
// BASE_ADDR + (i+1)*SLOT_SPAN).  The full address and AxPROT are passed on.
//
// Structure: one write engine and one read engine, independent of each
// other, each with one transaction in flight (AXI4-Lite masters of a PS issue
// single-beat accesses; no outstanding-transaction reordering is needed).
//   write: IDLE --(AWVALID & WVALID, both accepted in one cycle)--> decode
//          --> FWD (AW and W offered to the slave until each is taken)
//          --> WAIT (slave B) --> RESP (B to the master)  or, on a refused
//          access, straight to RESP with DECERR.
//   read:  IDLE --(ARVALID)--> FWD --> WAIT (slave R) --> RESP, or straight to
//          RESP with DECERR and zero data.
// Latency through the interconnect for an accepted access: 2 cycles more than
// the slave's own, both for writes and for reads; a refused access answers 1
// cycle after it is accepted.
//
// The interconnect is a vendor IP in the original system; only its secure
// slave setting is part of the TEE.  This simple implementation is this
// design's own.
module axi_tz_interconnect
  import rctee_pkg::*;
#(
  parameter int unsigned           NUM_SLAVES  = NUM_PL_SLAVES,
  parameter axi_addr_t             BASE_ADDR   = PL_BASE_ADDR,
  parameter axi_addr_t             SLOT_SPAN   = PL_SLOT_SPAN,
  parameter logic [NUM_SLAVES-1:0] SECURE_MASK = '1
) (
  input  logic      clk,
  input  logic      rst_n,
  // from the PS master
  input  axil_req_t s_axi_req,
  output axil_rsp_t s_axi_rsp,
  // to the PL slaves
  output axil_req_t m_axi_req [NUM_SLAVES],
  input  axil_rsp_t m_axi_rsp [NUM_SLAVES]
);

  localparam int unsigned IDX_W = (NUM_SLAVES > 1) ? $clog2(NUM_SLAVES) : 1;

  typedef enum logic [1:0] {X_IDLE, X_FWD, X_WAIT, X_RESP} xstate_e;

  typedef struct packed {
    logic             hit;     // address inside one slot
    logic [IDX_W-1:0] idx;     // slot number
  } decode_t;

  function automatic decode_t decode(input axi_addr_t addr);
    decode_t   d;
    axi_addr_t off;
    d   = '{hit: 1'b0, idx: '0};
    off = addr - BASE_ADDR;
    if (addr >= BASE_ADDR && (off / SLOT_SPAN) < NUM_SLAVES) begin
      d.hit = 1'b1;
      d.idx = IDX_W'(off / SLOT_SPAN);
    end
    return d;
  endfunction

  // Access is allowed when the slot exists and, for a secure slot, the
  // access is a secure one.
  function automatic logic allowed(input decode_t d, input axi_prot_t prot);
    return d.hit && !(SECURE_MASK[d.idx] && is_nonsecure(prot));
  endfunction

  // ------------------------------------------------------------ write engine
  xstate_e          wstate;
  logic [IDX_W-1:0] widx;
  axi_addr_t        waddr;
  axi_prot_t        wprot;
  axi_data_t        wdata;
  axi_strb_t        wstrb;
  logic             aw_done, w_done;
  axi_resp_e        bresp;
  decode_t          wdec;

  assign wdec = decode(s_axi_req.awaddr);

  // ------------------------------------------------------------- read engine
  xstate_e          rstate;
  logic [IDX_W-1:0] ridx;
  axi_addr_t        raddr;
  axi_prot_t        rprot;
  axi_data_t        rdata;
  axi_resp_e        rresp;
  decode_t          rdec;

  assign rdec = decode(s_axi_req.araddr);

  // Master side handshakes.
  always_comb begin
    s_axi_rsp         = '0;
    s_axi_rsp.awready = (wstate == X_IDLE) && s_axi_req.awvalid && s_axi_req.wvalid;
    s_axi_rsp.wready  = s_axi_rsp.awready;
    s_axi_rsp.bvalid  = (wstate == X_RESP);
    s_axi_rsp.bresp   = bresp;
    s_axi_rsp.arready = (rstate == X_IDLE) && s_axi_req.arvalid;
    s_axi_rsp.rvalid  = (rstate == X_RESP);
    s_axi_rsp.rresp   = rresp;
    s_axi_rsp.rdata   = rdata;
  end

  // Slave side: only the selected slave sees valid/ready.
  always_comb begin
    for (int i = 0; i < NUM_SLAVES; i++) begin
      m_axi_req[i]         = '0;
      m_axi_req[i].awaddr  = waddr;
      m_axi_req[i].awprot  = wprot;
      m_axi_req[i].wdata   = wdata;
      m_axi_req[i].wstrb   = wstrb;
      m_axi_req[i].araddr  = raddr;
      m_axi_req[i].arprot  = rprot;
      if (widx == IDX_W'(i)) begin
        m_axi_req[i].awvalid = (wstate == X_FWD) && !aw_done;
        m_axi_req[i].wvalid  = (wstate == X_FWD) && !w_done;
        m_axi_req[i].bready  = (wstate == X_WAIT);
      end
      if (ridx == IDX_W'(i)) begin
        m_axi_req[i].arvalid = (rstate == X_FWD);
        m_axi_req[i].rready  = (rstate == X_WAIT);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wstate  <= X_IDLE;
      widx    <= '0;
      waddr   <= '0;
      wprot   <= '0;
      wdata   <= '0;
      wstrb   <= '0;
      aw_done <= 1'b0;
      w_done  <= 1'b0;
      bresp   <= RESP_OKAY;
    end else begin
      unique case (wstate)
        X_IDLE: if (s_axi_rsp.awready) begin
          waddr   <= s_axi_req.awaddr;
          wprot   <= s_axi_req.awprot;
          wdata   <= s_axi_req.wdata;
          wstrb   <= s_axi_req.wstrb;
          widx    <= wdec.idx;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          if (allowed(wdec, s_axi_req.awprot)) begin
            wstate <= X_FWD;
          end else begin
            bresp  <= RESP_DECERR;
            wstate <= X_RESP;
          end
        end
        X_FWD: begin
          if (m_axi_rsp[widx].awready) aw_done <= 1'b1;
          if (m_axi_rsp[widx].wready)  w_done  <= 1'b1;
          if ((aw_done || m_axi_rsp[widx].awready) && (w_done || m_axi_rsp[widx].wready))
            wstate <= X_WAIT;
        end
        X_WAIT: if (m_axi_rsp[widx].bvalid) begin
          bresp  <= m_axi_rsp[widx].bresp;
          wstate <= X_RESP;
        end
        X_RESP: if (s_axi_req.bready) wstate <= X_IDLE;
        default: wstate <= X_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate <= X_IDLE;
      ridx   <= '0;
      raddr  <= '0;
      rprot  <= '0;
      rdata  <= '0;
      rresp  <= RESP_OKAY;
    end else begin
      unique case (rstate)
        X_IDLE: if (s_axi_rsp.arready) begin
          raddr <= s_axi_req.araddr;
          rprot <= s_axi_req.arprot;
          ridx  <= rdec.idx;
          if (allowed(rdec, s_axi_req.arprot)) begin
            rstate <= X_FWD;
          end else begin
            rresp  <= RESP_DECERR;
            rdata  <= '0;
            rstate <= X_RESP;
          end
        end
        X_FWD: if (m_axi_rsp[ridx].arready) rstate <= X_WAIT;
        X_WAIT: if (m_axi_rsp[ridx].rvalid) begin
          rdata  <= m_axi_rsp[ridx].rdata;
          rresp  <= m_axi_rsp[ridx].rresp;
          rstate <= X_RESP;
        end
        X_RESP: if (s_axi_req.rready) rstate <= X_IDLE;
        default: rstate <= X_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------- assertions
  // No non-secure access ever reaches a secure slave.
  for (genvar i = 0; i < NUM_SLAVES; i++) begin : g_chk
    if (SECURE_MASK[i]) begin : g_sec
      a_no_ns_aw: assert property (@(posedge clk) disable iff (!rst_n)
        m_axi_req[i].awvalid |-> !is_nonsecure(m_axi_req[i].awprot));
      a_no_ns_ar: assert property (@(posedge clk) disable iff (!rst_n)
        m_axi_req[i].arvalid |-> !is_nonsecure(m_axi_req[i].arprot));
    end
  end
  // Master-side responses stay until taken.
  a_b_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rsp.bvalid && !s_axi_req.bready |=> s_axi_rsp.bvalid && $stable(s_axi_rsp.bresp));
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_axi_rsp.rvalid && !s_axi_req.rready |=> s_axi_rsp.rvalid && $stable(s_axi_rsp.rdata));

endmodule
