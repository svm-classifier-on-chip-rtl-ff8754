// svm_pkg: types, constants and small functions shared by the SVM classifier.
//
// All data are IEEE-754 single-precision words (fp32_t), the format the
// classifier computes in. Subnormal numbers are treated as zero throughout
// (flush-to-zero), as common FPGA floating-point operators do; this is a
// choice of this design. The class result is a 32-bit two's-complement
// integer, +1 for melanoma and -1 for benign, as in the classifier's sign
// function. The AXI4-Lite bundle is carried as two packed structs, request
// (master to slave) and response (slave to master), so that it can be passed
// through ports and arrays without interfaces.
package svm_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP32_POS_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_QNAN     = 32'h7FC0_0000;

  // Class codes returned on the control bus.
  localparam logic [31:0] CLASS_MELANOMA = 32'h0000_0001; // +1
  localparam logic [31:0] CLASS_BENIGN   = 32'hFFFF_FFFF; // -1

  // AXI4-Lite address width of every control slave (4 KiB window).
  localparam int unsigned AXIL_AW = 12;

  typedef struct packed {
    logic               awvalid;
    logic [AXIL_AW-1:0] awaddr;
    logic               wvalid;
    logic [31:0]        wdata;
    logic [3:0]         wstrb;
    logic               bready;
    logic               arvalid;
    logic [AXIL_AW-1:0] araddr;
    logic               rready;
  } axil_req_t;

  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    logic [1:0]  bresp;
    logic        arready;
    logic        rvalid;
    logic [31:0] rdata;
    logic [1:0]  rresp;
  } axil_rsp_t;

  localparam logic [1:0] AXI_RESP_OKAY = 2'b00;

  // Control-register map shared by the classifier slaves (byte addresses).
  localparam logic [AXIL_AW-1:0] REG_CTRL   = 12'h000; // [0] start, [1] done (clear on read), [2] idle
  localparam logic [AXIL_AW-1:0] REG_RETURN = 12'h010; // F(X): +1 or -1
  localparam logic [AXIL_AW-1:0] REG_STAGE  = 12'h014; // cascade only: stage that decided
  localparam logic [AXIL_AW-1:0] REG_TH     = 12'h018; // full IP only: threshold th (fp32)
  localparam logic [AXIL_AW-1:0] REG_X_BASE = 12'h080; // cascade only: X[j] at REG_X_BASE + 4*j

  function automatic logic fp32_is_zero(fp32_t a);
    return a[30:23] == 8'd0;  // zero or subnormal (flushed)
  endfunction

  function automatic logic fp32_is_nan(fp32_t a);
    return (a[30:23] == 8'hFF) && (a[22:0] != 23'd0);
  endfunction

  // a >= b in IEEE order, with subnormals equal to zero. A NaN operand gives 0.
  function automatic logic fp32_ge(fp32_t a, fp32_t b);
    logic az, bz;
    az = fp32_is_zero(a);
    bz = fp32_is_zero(b);
    if (fp32_is_nan(a) || fp32_is_nan(b)) return 1'b0;
    if (az && bz) return 1'b1;
    if (az) return b[31];                   // 0 >= b  iff b negative
    if (bz) return !a[31];                  // a >= 0  iff a positive
    if (a[31] != b[31]) return !a[31];
    if (!a[31]) return a[30:0] >= b[30:0];  // both positive
    return a[30:0] <= b[30:0];              // both negative
  endfunction

endpackage
