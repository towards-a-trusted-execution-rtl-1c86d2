// teeod_axil_slave: AXI4-Lite slave front end shared by the register blocks.
//
// Turns the five AXI4-Lite channels into a one-cycle register write strobe
// (wr_en, wr_addr, wr_data, wr_strb) and a one-cycle read strobe (rd_en,
// rd_addr) whose data the parent returns combinationally on rd_data in the same
// cycle. A write is taken when both AW and W are valid; one write and one read
// may be outstanding at a time. The parent can refuse an access by raising
// wr_err/rd_err in the strobe cycle, which answers SLVERR. Latency: the write
// response and the read data appear one cycle after the address is accepted.
// The handshake rules (a valid stays up, with stable payload, until it is
// accepted) are checked by assertions on the master side of the bus.
module teeod_axil_slave
  import teeod_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  axil_req_t   req,
  output axil_rsp_t   rsp,
  output logic        wr_en,
  output logic [7:0]  wr_addr,
  output logic [31:0] wr_data,
  output logic [3:0]  wr_strb,
  input  logic        wr_err,
  output logic        rd_en,
  output logic [7:0]  rd_addr,
  input  logic [31:0] rd_data,
  input  logic        rd_err
);

  logic        bvalid_q, rvalid_q;
  logic [1:0]  bresp_q, rresp_q;
  logic [31:0] rdata_q;

  // accept a write when address and data are both present and no response is pending
  assign wr_en   = req.awvalid && req.wvalid && !bvalid_q;
  assign wr_addr = req.awaddr[7:0];
  assign wr_data = req.wdata;
  assign wr_strb = req.wstrb;
  assign rd_en   = req.arvalid && !rvalid_q;
  assign rd_addr = req.araddr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      bresp_q  <= AXI_OKAY;
      rresp_q  <= AXI_OKAY;
      rdata_q  <= '0;
    end else begin
      if (wr_en) begin
        bvalid_q <= 1'b1;
        bresp_q  <= wr_err ? AXI_SLVERR : AXI_OKAY;
      end else if (req.bready) begin
        bvalid_q <= 1'b0;
      end
      if (rd_en) begin
        rvalid_q <= 1'b1;
        rdata_q  <= rd_data;
        rresp_q  <= rd_err ? AXI_SLVERR : AXI_OKAY;
      end else if (req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  always_comb begin
    rsp         = '0;
    rsp.awready = wr_en;
    rsp.wready  = wr_en;
    rsp.bvalid  = bvalid_q;
    rsp.bresp   = bresp_q;
    rsp.arready = rd_en;
    rsp.rvalid  = rvalid_q;
    rsp.rdata   = rdata_q;
    rsp.rresp   = rresp_q;
  end

  // AXI handshake rules for the master driving this port
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.awvalid && !rsp.awready |=> req.awvalid && $stable(req.awaddr));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.wvalid && !rsp.wready |=> req.wvalid && $stable(req.wdata));
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.arvalid && !rsp.arready |=> req.arvalid && $stable(req.araddr));

endmodule
