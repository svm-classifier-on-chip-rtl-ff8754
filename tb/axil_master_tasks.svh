// AXI4-Lite master tasks for the testbenches, included inside a testbench
// module. The including module declares `clk`, `axi_req` (svm_pkg::axil_req_t,
// driven here) and `axi_rsp` (svm_pkg::axil_rsp_t), and an int `bp_stalls`
// that counts the cycles in which a response was held back by the master.
// Signals change at #1 after the rising edge or at the falling edge; ready
// and valid are sampled at the falling edge. Response ready is held low for a
// random 0..2 cycles to exercise the slave's hold rules.

task automatic axil_write(input logic [11:0] addr, input logic [31:0] data,
                          input logic [3:0] strb = 4'hF);
  int stall;
  @(negedge clk);
  axi_req.awvalid = 1'b1;
  axi_req.awaddr  = addr;
  axi_req.wvalid  = 1'b1;
  axi_req.wdata   = data;
  axi_req.wstrb   = strb;
  #1;
  while (!(axi_rsp.awready && axi_rsp.wready)) begin
    @(negedge clk);
    #1;
  end
  @(posedge clk);
  #1;
  axi_req.awvalid = 1'b0;
  axi_req.wvalid  = 1'b0;
  @(negedge clk);
  while (!axi_rsp.bvalid) @(negedge clk);
  stall = int'($urandom % 3);
  repeat (stall) @(negedge clk);
  bp_stalls += stall;
  axi_req.bready = 1'b1;
  @(posedge clk);
  #1;
  axi_req.bready = 1'b0;
endtask

task automatic axil_read(input logic [11:0] addr, output logic [31:0] data);
  int stall;
  @(negedge clk);
  axi_req.arvalid = 1'b1;
  axi_req.araddr  = addr;
  #1;
  while (!axi_rsp.arready) begin
    @(negedge clk);
    #1;
  end
  @(posedge clk);
  #1;
  axi_req.arvalid = 1'b0;
  @(negedge clk);
  while (!axi_rsp.rvalid) @(negedge clk);
  stall = int'($urandom % 3);
  repeat (stall) @(negedge clk);
  bp_stalls += stall;
  data = axi_rsp.rdata;
  axi_req.rready = 1'b1;
  @(posedge clk);
  #1;
  axi_req.rready = 1'b0;
endtask
