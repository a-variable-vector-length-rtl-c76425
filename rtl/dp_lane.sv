// dp_lane: the double-precision slice of the FP units for one pair of
// adjacent 32-bit lanes.
//
// A 64-bit element occupies lanes 2k (low half) and 2k+1 (high half). For an
// FP instruction with 64-bit elements the two 32-bit lanes stay idle and this
// slice computes instead: operand pipeline register (PR), then the double-
// precision adder (latency LAT_FADD), multiplier (LAT_FMUL) or iterative
// divider (LAT_FDIV, 4 quotient bits per cycle), then a one-hot result
// multiplexer. The timing is the same as in simd_lane: issue in cycle t,
// result valid in cycle t+L+1, so the issue logic treats single and double
// precision alike. The paper evaluates mostly double-precision programs but
// does not describe the lane organisation for them; sharing lane pairs
// between the two precisions is this design's choice.
//
// Interface: issue (the pair is enabled and an FP instruction with dp = 1 is
// issued), fu/op as decoded by the issue logic, a/b 64-bit operands; res,
// res_valid and res_dz (FP divide by zero) come from the result registers.
module dp_lane
  import simd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        issue,
  input  fu_e         fu,
  input  op_e         op,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic        res_valid,
  output logic [63:0] res,
  output logic        res_dz
);
  logic        pr_valid;
  fu_e         pr_fu;
  op_e         pr_op;
  logic [63:0] pr_a, pr_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pr_valid <= 1'b0;
    else        pr_valid <= issue;
  end

  always_ff @(posedge clk) begin
    if (issue) begin
      pr_fu <= fu;
      pr_op <= op;
      pr_a  <= a;
      pr_b  <= b;
    end
  end

  logic        v_fadd, v_fmul, v_fdiv, dz_fdiv;
  logic [63:0] y_fadd, y_fmul, y_fdiv;

  fp_add #(.EXP_W(11), .MAN_W(52)) u_fadd (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_FADD), .sub(pr_op == OP_FSUB),
    .a(pr_a), .b(pr_b), .out_valid(v_fadd), .y(y_fadd));

  fp_mul #(.EXP_W(11), .MAN_W(52)) u_fmul (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_FMUL),
    .a(pr_a), .b(pr_b), .out_valid(v_fmul), .y(y_fmul));

  fp_div #(.EXP_W(11), .MAN_W(52), .STEP_BITS(4), .LAT(LAT_FDIV)) u_fdiv (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_FDIV),
    .a(pr_a), .b(pr_b), .busy(), .out_valid(v_fdiv), .y(y_fdiv), .dz(dz_fdiv));

  always_comb begin
    res_valid = v_fadd | v_fmul | v_fdiv;
    res       = '0;
    res_dz    = 1'b0;
    case (1'b1)
      v_fadd: res = y_fadd;
      v_fmul: res = y_fmul;
      v_fdiv: begin
        res    = y_fdiv;
        res_dz = dz_fdiv;
      end
      default: ;
    endcase
  end

  // The issue logic never lets two results meet in one cycle.
  a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({v_fadd, v_fmul, v_fdiv}));
endmodule
