// axil_slave: AXI4-Lite slave front end that turns bus transactions into
// single-cycle register accesses for the block behind it.
//
// How it works: a write is taken when the address and data channels are both
// valid and no write response is waiting; in that cycle wr_en pulses with the
// address, data and byte strobes, and a response (OKAY, or SLVERR when the
// block flags wr_err) is held on B until the master takes it. A read is taken
// when AR is valid and no read data is waiting; rd_en pulses, the block
// answers combinationally on rd_data/rd_err in the same cycle, and the value
// is registered onto R. At most one write and one read are outstanding, so
// the master sees one transaction per three cycles at best.
//
// Timing: AW/W accepted in cycle t, B valid from t+1. AR accepted in cycle t,
// R valid from t+1. Reset is synchronous, active low.
//
// The published platform only says that the processor writes the registers
// "over the AXI bus"; the AXI4-Lite subset, the joint AW/W acceptance and the
// error response are this design's choices. The assertions check that the
// master keeps a request stable until it is accepted, as AXI requires.
module axil_slave
  import lev_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  req,
  output axil_resp_t resp,
  // register side
  output logic       wr_en,
  output axil_addr_t wr_addr,
  output axil_data_t wr_data,
  output logic [3:0] wr_strb,
  input  logic       wr_err,
  output logic       rd_en,
  output axil_addr_t rd_addr,
  input  axil_data_t rd_data,
  input  logic       rd_err
);

  logic       bvalid_q;
  axi_resp_e  bresp_q;
  logic       rvalid_q;
  axil_data_t rdata_q;
  axi_resp_e  rresp_q;

  assign wr_en   = req.awvalid && req.wvalid && !bvalid_q;
  assign wr_addr = req.awaddr;
  assign wr_data = req.wdata;
  assign wr_strb = req.wstrb;
  assign rd_en   = req.arvalid && !rvalid_q;
  assign rd_addr = req.araddr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      bresp_q  <= AXI_RESP_OKAY;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
      rresp_q  <= AXI_RESP_OKAY;
    end else begin
      if (wr_en) begin
        bvalid_q <= 1'b1;
        bresp_q  <= wr_err ? AXI_RESP_SLVERR : AXI_RESP_OKAY;
      end else if (req.bready) begin
        bvalid_q <= 1'b0;
      end
      if (rd_en) begin
        rvalid_q <= 1'b1;
        rdata_q  <= rd_data;
        rresp_q  <= rd_err ? AXI_RESP_SLVERR : AXI_RESP_OKAY;
      end else if (req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    resp         = '0;
    resp.awready = wr_en;
    resp.wready  = wr_en;
    resp.bvalid  = bvalid_q;
    resp.bresp   = bresp_q;
    resp.arready = rd_en;
    resp.rvalid  = rvalid_q;
    resp.rdata   = rdata_q;
    resp.rresp   = rresp_q;
  end

  // AXI handshake rules on the master side: once raised, a valid stays up,
  // with its payload unchanged, until the matching ready.
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.awvalid && !resp.awready |=> req.awvalid && $stable(req.awaddr));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.wvalid && !resp.wready |=> req.wvalid && $stable(req.wdata));
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.arvalid && !resp.arready |=> req.arvalid && $stable(req.araddr));

endmodule
