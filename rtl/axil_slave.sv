// axil_slave: AXI4-Lite slave front end for the classifier control registers.
//
// Turns AXI4-Lite transactions into a simple register interface. A write is
// accepted when both the address and the data channel are valid and no write
// response is pending; it appears as a one-cycle wr_en with the word-aligned
// address, data and byte strobes, and the OKAY response is raised the next
// cycle and held until bready. A read is accepted when no read response is
// pending; rd_en pulses for one cycle with the word-aligned address, the
// register file must present rd_data combinationally in that cycle, and the
// data is held with rvalid until rready (so a register with a read side
// effect, such as a clear-on-read flag, sees rd_en exactly once per read).
// One write and one read may be in flight at the same time. The AXI4-Lite
// control bus follows the paper's system; this minimal slave is this design's
// own. The assertions check the AXI valid/ready rules on both sides.
module axil_slave
  import svm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  axil_req_t          req,
  output axil_rsp_t          rsp,
  output logic               wr_en,
  output logic [AXIL_AW-1:0] wr_addr,
  output logic [31:0]        wr_data,
  output logic [3:0]         wr_strb,
  output logic               rd_en,
  output logic [AXIL_AW-1:0] rd_addr,
  input  logic [31:0]        rd_data
);

  logic        bvalid_q, rvalid_q;
  logic [31:0] rdata_q;

  assign wr_en   = req.awvalid && req.wvalid && !bvalid_q;
  assign wr_addr = {req.awaddr[AXIL_AW-1:2], 2'b00};
  assign wr_data = req.wdata;
  assign wr_strb = req.wstrb;
  assign rd_en   = req.arvalid && !rvalid_q;
  assign rd_addr = {req.araddr[AXIL_AW-1:2], 2'b00};

  always_comb begin
    rsp         = '0;
    rsp.awready = wr_en;
    rsp.wready  = wr_en;
    rsp.bvalid  = bvalid_q;
    rsp.bresp   = AXI_RESP_OKAY;
    rsp.arready = rd_en;
    rsp.rvalid  = rvalid_q;
    rsp.rdata   = rdata_q;
    rsp.rresp   = AXI_RESP_OKAY;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid_q <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      if (wr_en)                          bvalid_q <= 1'b1;
      else if (bvalid_q && req.bready)    bvalid_q <= 1'b0;
      if (rd_en) begin
        rvalid_q <= 1'b1;
        rdata_q  <= rd_data;
      end else if (rvalid_q && req.rready) begin
        rvalid_q <= 1'b0;
      end
    end
  end

  // AXI handshake rules: a raised valid stays raised, with a stable payload,
  // until the matching ready.
  a_bvalid_held: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.bvalid && !req.bready |=> rsp.bvalid);
  a_rvalid_held: assert property (@(posedge clk) disable iff (!rst_n)
    rsp.rvalid && !req.rready |=> rsp.rvalid && $stable(rsp.rdata));
  a_awvalid_held: assert property (@(posedge clk) disable iff (!rst_n)
    req.awvalid && !rsp.awready |=> req.awvalid && $stable(req.awaddr));
  a_wvalid_held: assert property (@(posedge clk) disable iff (!rst_n)
    req.wvalid && !rsp.wready |=> req.wvalid && $stable(req.wdata));
  a_arvalid_held: assert property (@(posedge clk) disable iff (!rst_n)
    req.arvalid && !rsp.arready |=> req.arvalid && $stable(req.araddr));

endmodule
