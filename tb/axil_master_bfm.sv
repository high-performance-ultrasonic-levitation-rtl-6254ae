// axil_master_bfm: AXI4-Lite master for testbenches. The tasks write() and
// read() each run one transaction to completion, keeping every valid signal
// and its payload stable until the slave accepts it, and then return the
// response. Call them hierarchically (bfm.write(...)) from the testbench.
module axil_master_bfm
  import lev_pkg::*;
(
  input  logic       clk,
  output axil_req_t  req,
  input  axil_resp_t resp
);

  initial req = '0;

  task automatic write(input axil_addr_t addr, input axil_data_t data,
                       output axi_resp_e bresp);
    @(posedge clk);
    req.awvalid <= 1'b1;
    req.awaddr  <= addr;
    req.wvalid  <= 1'b1;
    req.wdata   <= data;
    req.wstrb   <= 4'hF;
    req.bready  <= 1'b1;
    do @(negedge clk); while (!(resp.awready && resp.wready));
    @(posedge clk);
    req.awvalid <= 1'b0;
    req.wvalid  <= 1'b0;
    do @(negedge clk); while (!resp.bvalid);
    bresp = resp.bresp;
    @(posedge clk);
    req.bready  <= 1'b0;
  endtask

  task automatic read(input axil_addr_t addr, output axil_data_t data,
                      output axi_resp_e rresp);
    @(posedge clk);
    req.arvalid <= 1'b1;
    req.araddr  <= addr;
    req.rready  <= 1'b1;
    do @(negedge clk); while (!resp.arready);
    @(posedge clk);
    req.arvalid <= 1'b0;
    do @(negedge clk); while (!resp.rvalid);
    data  = resp.rdata;
    rresp = resp.rresp;
    @(posedge clk);
    req.rready  <= 1'b0;
  endtask

endmodule
