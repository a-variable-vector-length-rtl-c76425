// simd_lane: one 32-bit lane of the SIMD unit (one column of the datapath
// drawn as operand muxes, pipeline registers, ALUs and result registers).
//
// The selected operands of an issued instruction are captured in the lane's
// operand pipeline registers at the end of the issue cycle when the lane is
// enabled; a disabled (masked-off) lane captures nothing and none of its
// units starts, so it neither computes, raises a flag nor spends switching
// power. From the operand registers the operation goes to the one unit of its
// class: simple integer (1 cycle), integer multiply (3), integer divide (10),
// simple FP (2), FP multiply (4) or FP divide (20). The issue logic
// guarantees that at most one unit finishes per cycle, so the lane result is
// simply the output of the unit whose result register is valid.
module simd_lane
  import simd_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  issue,      // instruction issued this cycle and lane enabled
  input  fu_e   fu,
  input  op_e   op,
  input  elem_t a,
  input  elem_t b,
  output logic  res_valid,
  output elem_t res,
  output logic  res_dz      // divider busy is tracked by the issue logic
);
  // Operand pipeline registers.
  logic  pr_valid;
  fu_e   pr_fu;
  op_e   pr_op;
  elem_t pr_a, pr_b;

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

  logic  v_int, v_imul, v_idiv, v_fadd, v_fmul, v_fdiv;
  elem_t y_int, y_imul, y_idiv, y_fadd, y_fmul, y_fdiv;
  logic  dz_idiv, dz_fdiv;

  int_alu u_int (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_INT), .op(pr_op),
    .a(pr_a), .b(pr_b), .out_valid(v_int), .y(y_int));

  int_mul u_imul (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_IMUL),
    .a(pr_a), .b(pr_b), .out_valid(v_imul), .y(y_imul));

  int_div #(.LAT(LAT_IDIV)) u_idiv (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_IDIV),
    .a(pr_a), .b(pr_b), .busy(), .out_valid(v_idiv), .y(y_idiv), .dz(dz_idiv));

  fp_add u_fadd (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_FADD), .sub(pr_op == OP_FSUB),
    .a(pr_a), .b(pr_b), .out_valid(v_fadd), .y(y_fadd));

  fp_mul u_fmul (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_FMUL),
    .a(pr_a), .b(pr_b), .out_valid(v_fmul), .y(y_fmul));

  fp_div #(.LAT(LAT_FDIV)) u_fdiv (
    .clk, .rst_n, .in_valid(pr_valid && pr_fu == FU_FDIV),
    .a(pr_a), .b(pr_b), .busy(), .out_valid(v_fdiv), .y(y_fdiv), .dz(dz_fdiv));

  always_comb begin
    res_valid = v_int | v_imul | v_idiv | v_fadd | v_fmul | v_fdiv;
    res_dz    = (v_idiv & dz_idiv) | (v_fdiv & dz_fdiv);
    case (1'b1)
      v_imul:  res = y_imul;
      v_idiv:  res = y_idiv;
      v_fadd:  res = y_fadd;
      v_fmul:  res = y_fmul;
      v_fdiv:  res = y_fdiv;
      default: res = y_int;
    endcase
  end

  // The issue logic must never let two units of a lane finish together.
  a_one_result: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({v_int, v_imul, v_idiv, v_fadd, v_fmul, v_fdiv}));
endmodule
