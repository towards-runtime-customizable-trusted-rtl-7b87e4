`timescale 1ns / 1ps
// axil_mem_slave - AXI4-Lite memory slave for the interconnect testbench.
//
// 16 words of storage addressed by address bits [5:2]; offset 0xFC answers
// SLVERR.  AW/W and AR are accepted after a random 0..3 cycle wait, the
// response follows after another random 0..3 cycles.  It counts every access
// it receives and remembers the AxPROT of the last one.
module axil_mem_slave
  import rctee_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp
);

  axi_data_t   mem [16];
  int unsigned accesses = 0;
  axi_prot_t   last_prot = '0;

  initial begin
    rsp = '0;
    for (int i = 0; i < 16; i++) mem[i] = '0;
  end

  initial begin : writer
    int unsigned w;
    forever begin
      @(posedge clk);
      if (rst_n && req.awvalid && req.wvalid) begin
        w = $urandom_range(0, 3);
        repeat (w) @(posedge clk);
        rsp.awready <= 1'b1;
        rsp.wready  <= 1'b1;
        @(posedge clk);
        rsp.awready <= 1'b0;
        rsp.wready  <= 1'b0;
        accesses++;
        last_prot = req.awprot;
        if (req.awaddr[7:0] == 8'hFC) rsp.bresp <= RESP_SLVERR;
        else begin
          rsp.bresp <= RESP_OKAY;
          mem[req.awaddr[5:2]] = req.wdata;
        end
        repeat ($urandom_range(0, 3)) @(posedge clk);
        rsp.bvalid <= 1'b1;
        do @(posedge clk); while (!req.bready);
        rsp.bvalid <= 1'b0;
      end
    end
  end

  initial begin : reader
    forever begin
      @(posedge clk);
      if (rst_n && req.arvalid) begin
        repeat ($urandom_range(0, 3)) @(posedge clk);
        rsp.arready <= 1'b1;
        @(posedge clk);
        rsp.arready <= 1'b0;
        accesses++;
        last_prot = req.arprot;
        rsp.rresp <= (req.araddr[7:0] == 8'hFC) ? RESP_SLVERR : RESP_OKAY;
        rsp.rdata <= mem[req.araddr[5:2]];
        repeat ($urandom_range(0, 3)) @(posedge clk);
        rsp.rvalid <= 1'b1;
        do @(posedge clk); while (!req.rready);
        rsp.rvalid <= 1'b0;
      end
    end
  end

endmodule
