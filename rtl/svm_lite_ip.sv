// svm_lite_ip: simplified SVM classifier stage for the cascade.
//
// The SVs summation of the full classifier depends only on the trained model,
// so here it is done offline and its result, the accumulated vector Z, is
// kept inside the stage as a constant memory (parameter Z_MODEL), together
// with the bias B_MODEL and the threshold TH_MODEL. What remains in hardware
// is distance_calc (D = X . Z) and class_decision (+1 if D - b >= th, else
// -1), sharing one fp32_mul and one fp32_add (the adder serves the distance
// block while it is busy and the decision otherwise). The test sample X is written into a small internal register file
// through x_we/x_waddr/x_wdata (from the control bus or from the previous
// stage). When FWD_X is set and the stage decides -1, it then passes X on:
// it streams all N_FEAT words out on xo_valid/xo_addr/xo_data, one per cycle,
// ready to be written into the next stage, and reports passed = 1.
//
// Timing: start (one-cycle pulse while idle) -> distance N_FEAT + 3 cycles
// -> decision 1 cycle -> (if forwarding) N_FEAT cycles of X -> done pulse.
// f and passed hold until the next start. Keeping Z internal and taking X
// from the control side follows the paper's simplified IP; passing X on from
// stage to stage through this stream is this design's reading of the cascade
// figure.
module svm_lite_ip
  import svm_pkg::*;
#(
  parameter int unsigned N_FEAT           = 27,
  parameter fp32_t       Z_MODEL [N_FEAT] = '{default: 32'h0000_0000},
  parameter fp32_t       B_MODEL          = 32'h0000_0000,
  parameter fp32_t       TH_MODEL         = 32'h0000_0000,
  parameter bit          FWD_X            = 1'b1,
  localparam int unsigned X_AW            = $clog2(N_FEAT) > 0 ? $clog2(N_FEAT) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  output logic            busy,
  output logic            done,
  output logic [31:0]     f,
  output logic            passed,
  input  logic            x_we,
  input  logic [X_AW-1:0] x_waddr,
  input  fp32_t           x_wdata,
  output logic            xo_valid,
  output logic [X_AW-1:0] xo_addr,
  output fp32_t           xo_data
);

  typedef enum logic [1:0] {S_IDLE, S_DIST, S_DEC, S_FWD} state_t;
  state_t state;

  fp32_t           x_mem [N_FEAT];
  fp32_t           z_rom [N_FEAT];
  logic            x_en;
  logic [X_AW-1:0] x_addr, fwd_cnt;
  fp32_t           x_rdata, d, diff;
  logic            dist_busy, dist_done, dec_valid;
  logic [31:0]     f_dec;
  fp32_t           mul_a, mul_b, mul_y, add_a, add_b, add_y;
  fp32_t           d_add_a, d_add_b, c_add_a, c_add_b;

  fp32_mul u_mul (.a(mul_a), .b(mul_b), .y(mul_y));
  fp32_add u_add (.a(add_a), .b(add_b), .y(add_y));
  assign add_a = dist_busy ? d_add_a : c_add_a;
  assign add_b = dist_busy ? d_add_b : c_add_b;

  assign z_rom = Z_MODEL;

  // X register file: written from outside, read by the distance block
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(N_FEAT); k++) x_mem[k] <= FP32_POS_ZERO;
      x_rdata <= FP32_POS_ZERO;
    end else begin
      if (x_we && 32'(x_waddr) < N_FEAT) x_mem[x_waddr] <= x_wdata;
      if (x_en) x_rdata <= x_mem[x_addr];
    end
  end

  distance_calc #(.N_FEAT(N_FEAT)) u_dist (
    .clk, .rst_n, .start(start && state == S_IDLE), .busy(dist_busy), .done(dist_done),
    .x_en, .x_addr, .x_rdata, .z(z_rom), .d,
    .mul_a, .mul_b, .mul_y, .add_a(d_add_a), .add_b(d_add_b), .add_y
  );

  class_decision u_dec (
    .clk, .rst_n, .start(dist_done), .d, .b(B_MODEL), .th(TH_MODEL),
    .valid(dec_valid), .f(f_dec), .diff, .add_a(c_add_a), .add_b(c_add_b), .add_y
  );

  assign busy     = (state != S_IDLE);
  assign xo_valid = (state == S_FWD);
  assign xo_addr  = fwd_cnt;
  assign xo_data  = x_mem[fwd_cnt];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      f       <= CLASS_BENIGN;
      passed  <= 1'b0;
      fwd_cnt <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_DIST;
          passed <= 1'b0;
        end
        S_DIST: if (dist_done) state <= S_DEC;
        S_DEC: if (dec_valid) begin
          f <= f_dec;
          if (FWD_X && f_dec == CLASS_BENIGN) begin
            state   <= S_FWD;
            fwd_cnt <= '0;
            passed  <= 1'b1;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_FWD: begin
          if (fwd_cnt == X_AW'(N_FEAT - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            fwd_cnt <= fwd_cnt + X_AW'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
