`timescale 1ns / 1ps
// secure_ip_model - behavioural model of a user's secure IP, used by the
// end-to-end testbench in place of a design loaded at run time.
//
// It follows the unified invocation format of the TEE: inputs are written to
// input addresses, execution is started and watched through a state address,
// and results are read from output addresses.
//   0x00-0x1C IN[0..7]   input words
//   0x40      STATE      write 1: start; read 0 idle, 1 running, 2 done
//   0x80      OUT[0]     sum of the inputs
//   0x84      OUT[1]     XOR of the inputs and IP_ID
// The result is ready LATENCY cycles after the start.  Like every secure IP
// it has AWPROT/ARPROT ports and answers a normal-world access with SLVERR.
// It counts the accesses that reach it and the normal-world ones among them.
module secure_ip_model
  import rctee_pkg::*;
#(
  parameter int unsigned IP_ID   = 1,
  parameter int unsigned LATENCY = 20
) (
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t req,
  output axil_rsp_t rsp
);

  axi_data_t   in_reg [8];
  axi_data_t   out_reg [2];
  int unsigned state = 0;
  int unsigned accesses = 0, ns_accesses = 0, runs = 0;

  initial begin
    rsp = '0;
    for (int i = 0; i < 8; i++) in_reg[i] = '0;
    out_reg[0] = '0;
    out_reg[1] = '0;
  end

  initial begin : writer
    forever begin
      @(posedge clk);
      if (rst_n && req.awvalid && req.wvalid) begin
        rsp.awready <= 1'b1;
        rsp.wready  <= 1'b1;
        @(posedge clk);
        rsp.awready <= 1'b0;
        rsp.wready  <= 1'b0;
        accesses++;
        if (req.awprot[PROT_NS_BIT]) begin
          ns_accesses++;
          rsp.bresp <= RESP_SLVERR;
        end else begin
          rsp.bresp <= RESP_OKAY;
          if (req.awaddr[7:0] < 8'h20) in_reg[req.awaddr[4:2]] = req.wdata;
          else if (req.awaddr[7:0] == 8'h40 && req.wdata[0] && state != 1) begin
            state = 1;
            runs++;
            fork
              begin
                axi_data_t s, x;
                s = '0;
                x = axi_data_t'(IP_ID);
                repeat (LATENCY) @(posedge clk);
                for (int i = 0; i < 8; i++) begin
                  s += in_reg[i];
                  x ^= in_reg[i];
                end
                out_reg[0] = s;
                out_reg[1] = x;
                state = 2;
              end
            join_none
          end
        end
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
        rsp.arready <= 1'b1;
        @(posedge clk);
        rsp.arready <= 1'b0;
        accesses++;
        if (req.arprot[PROT_NS_BIT]) begin
          ns_accesses++;
          rsp.rresp <= RESP_SLVERR;
          rsp.rdata <= '0;
        end else begin
          rsp.rresp <= RESP_OKAY;
          case (req.araddr[7:0])
            8'h40:   rsp.rdata <= axi_data_t'(state);
            8'h80:   rsp.rdata <= out_reg[0];
            8'h84:   rsp.rdata <= out_reg[1];
            default: rsp.rdata <= (req.araddr[7:0] < 8'h20) ? in_reg[req.araddr[4:2]] : '0;
          endcase
        end
        rsp.rvalid <= 1'b1;
        do @(posedge clk); while (!req.rready);
        rsp.rvalid <= 1'b0;
      end
    end
  end

endmodule
