// dp_bram: true dual-port block RAM of DEPTH 32-bit words.
//
// Holds one of the classifier's input arrays (SVs, Parameters or X). Each
// port has an enable, four byte write enables, a word address, write data and
// registered read data: a read returns the word one cycle after the enabled
// address (the old word when the same cycle writes it). The classifier reads
// through port A; the host side fills the memory through port B. Words at or
// beyond DEPTH are not stored and read as zero. When both ports write the
// same word in one cycle, port B's bytes win (this design's choice; the paper
// only says the memories are dual-port BRAMs).
module dp_bram #(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH) > 0 ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic [3:0]    a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [31:0]   a_wdata,
  output logic [31:0]   a_rdata,
  input  logic          b_en,
  input  logic [3:0]    b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);

  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= (32'(a_addr) < DEPTH) ? mem[a_addr] : 32'd0;
      for (int k = 0; k < 4; k++)
        if (a_we[k] && 32'(a_addr) < DEPTH) mem[a_addr][8*k +: 8] <= a_wdata[8*k +: 8];
    end
    if (b_en) begin
      b_rdata <= (32'(b_addr) < DEPTH) ? mem[b_addr] : 32'd0;
      for (int k = 0; k < 4; k++)
        if (b_we[k] && 32'(b_addr) < DEPTH) mem[b_addr][8*k +: 8] <= b_wdata[8*k +: 8];
    end
  end

endmodule
