// tb_axil_slave: self-checking test of the AXI4-Lite slave front end.
// A behavioural 16-word register file with byte strobes sits behind the
// slave. Random writes (some with partial strobes) and reads are checked
// against a model of the register file; the test also checks that every
// read gives exactly one rd_en pulse, that each write gives one wr_en pulse,
// and that responses wait for a stalled ready.
module tb_axil_slave;
  import svm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  axil_req_t axi_req;
  axil_rsp_t axi_rsp;
  logic               wr_en, rd_en;
  logic [AXIL_AW-1:0] wr_addr, rd_addr;
  logic [31:0]        wr_data, rd_data;
  logic [3:0]         wr_strb;
  logic [31:0] regs [16];
  logic [31:0] model [16];
  int checks = 0, failures = 0, bp_stalls = 0;
  int n_rd_en = 0, n_wr_en = 0;

  always #5 clk = ~clk;

  axil_slave dut (.clk, .rst_n, .req(axi_req), .rsp(axi_rsp),
                  .wr_en, .wr_addr, .wr_data, .wr_strb, .rd_en, .rd_addr, .rd_data);

  assign rd_data = regs[rd_addr[5:2]];
  always_ff @(posedge clk) begin
    if (wr_en) begin
      n_wr_en <= n_wr_en + 1;
      for (int k = 0; k < 4; k++) if (wr_strb[k]) regs[wr_addr[5:2]][8*k +: 8] <= wr_data[8*k +: 8];
    end
    if (rd_en) n_rd_en <= n_rd_en + 1;
  end

  `include "axil_master_tasks.svh"

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v, data;
    logic [3:0]  s;
    int idx, nr = 0, nw = 0;
    axi_req = '0;
    for (int k = 0; k < 16; k++) begin
      regs[k]  = 32'd0;
      model[k] = 32'd0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 600; t++) begin
      idx = int'($urandom % 16);
      if ($urandom % 2) begin
        v = $urandom;
        s = ($urandom % 4 == 0) ? 4'($urandom) : 4'hF;
        axil_write({6'd0, 4'(idx), 2'b00}, v, s);
        nw++;
        for (int k = 0; k < 4; k++) if (s[k]) model[idx][8*k +: 8] = v[8*k +: 8];
      end else begin
        axil_read({6'd0, 4'(idx), 2'b01}, data);  // low address bits are ignored
        nr++;
        check(data == model[idx], $sformatf("read reg %0d: %h expected %h", idx, data, model[idx]));
        check(axi_rsp.rresp == AXI_RESP_OKAY, "rresp OKAY");
      end
    end
    @(negedge clk);
    check(n_rd_en == nr, $sformatf("rd_en pulses %0d for %0d reads", n_rd_en, nr));
    check(n_wr_en == nw, $sformatf("wr_en pulses %0d for %0d writes", n_wr_en, nw));
    check(bp_stalls > 0, "response stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
