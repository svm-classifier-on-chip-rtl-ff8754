// tb_dp_bram: self-checking test of the dual-port block RAM.
// Random byte-masked writes and reads on both ports of a 20-word RAM are
// checked against a model: one cycle of read latency, read-before-write on
// the same port, port B winning a same-word write collision, and words
// beyond DEPTH reading as zero.
module tb_dp_bram;
  localparam int unsigned DEPTH = 20;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic clk = 1'b0;
  logic          a_en, b_en;
  logic [3:0]    a_we, b_we;
  logic [AW-1:0] a_addr, b_addr;
  logic [31:0]   a_wdata, b_wdata, a_rdata, b_rdata;
  logic [31:0]   model [32];
  logic [31:0]   exp_a, exp_b;
  logic          chk_a, chk_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dp_bram #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    chk_a = 0; chk_b = 0;
    // fill through port B
    for (int k = 0; k < int'(DEPTH); k++) begin
      @(negedge clk);
      b_en = 1; b_we = 4'hF; b_addr = AW'(k); b_wdata = $urandom;
      model[k] = b_wdata;
    end
    for (int k = DEPTH; k < 32; k++) model[k] = 32'd0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check the reads issued in the previous cycle
      if (chk_a) begin
        checks++;
        if (a_rdata !== exp_a) begin failures++; $display("FAIL A %h exp %h", a_rdata, exp_a); end
      end
      if (chk_b) begin
        checks++;
        if (b_rdata !== exp_b) begin failures++; $display("FAIL B %h exp %h", b_rdata, exp_b); end
      end
      a_en = $urandom % 4 != 0;
      b_en = $urandom % 4 != 0;
      a_we = ($urandom % 3 == 0) ? 4'($urandom) : 4'h0;
      b_we = ($urandom % 3 == 0) ? 4'($urandom) : 4'h0;
      a_addr = AW'($urandom % 24);
      b_addr = ($urandom % 4 == 0) ? a_addr : AW'($urandom % 24);
      a_wdata = $urandom;
      b_wdata = $urandom;
      chk_a = a_en; chk_b = b_en;
      exp_a = model[a_addr];
      exp_b = model[b_addr];
      if (a_en && 32'(a_addr) < DEPTH)
        for (int k = 0; k < 4; k++) if (a_we[k]) model[a_addr][8*k +: 8] = a_wdata[8*k +: 8];
      if (b_en && 32'(b_addr) < DEPTH)
        for (int k = 0; k < 4; k++) if (b_we[k]) model[b_addr][8*k +: 8] = b_wdata[8*k +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
