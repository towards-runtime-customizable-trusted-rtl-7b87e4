`timescale 1ns / 1ps
// axil_master_bfm - AXI4-Lite master used by the testbenches in place of the
// processing system.
//
// The tasks drive the request struct with non-blocking assignments just
// after a rising clock edge and sample the response right after the next
// edges, so every handshake is seen exactly as the clocked logic sees it.
// `prot` is the AxPROT value of the access; bit 1 set makes it a normal-world
// (non-secure) access.  Each task also returns how many clock edges the
// access took from the first valid cycle to the response handshake.
module axil_master_bfm
  import rctee_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);

  initial req = '0;

  task automatic write(input axi_addr_t addr, input axi_data_t data,
                       input axi_prot_t prot, output axi_resp_e resp,
                       output int unsigned cycles);
    cycles = 0;
    req.awaddr  <= addr;
    req.awprot  <= prot;
    req.awvalid <= 1'b1;
    req.wdata   <= data;
    req.wstrb   <= '1;
    req.wvalid  <= 1'b1;
    do begin
      @(posedge clk);
      cycles++;
    end while (!(rsp.awready && rsp.wready));
    req.awvalid <= 1'b0;
    req.wvalid  <= 1'b0;
    req.bready  <= 1'b1;
    do begin
      @(posedge clk);
      cycles++;
    end while (!rsp.bvalid);
    resp = rsp.bresp;
    req.bready <= 1'b0;
  endtask

  task automatic read(input axi_addr_t addr, input axi_prot_t prot,
                      output axi_data_t data, output axi_resp_e resp,
                      output int unsigned cycles);
    cycles = 0;
    req.araddr  <= addr;
    req.arprot  <= prot;
    req.arvalid <= 1'b1;
    do begin
      @(posedge clk);
      cycles++;
    end while (!rsp.arready);
    req.arvalid <= 1'b0;
    req.rready  <= 1'b1;
    do begin
      @(posedge clk);
      cycles++;
    end while (!rsp.rvalid);
    data = rsp.rdata;
    resp = rsp.rresp;
    req.rready <= 1'b0;
  endtask

endmodule
