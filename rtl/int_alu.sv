// int_alu: one lane of the simple-integer vector unit: add, subtract, and,
// or, xor and move (copy of the second operand, used for loads). The result
// register is valid LAT_INT = 1 cycle after in_valid, the simple-integer
// latency of the evaluated machine.
module int_alu
  import simd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  op_e         op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] y
);
  logic [31:0] r;
  always_comb begin
    case (op)
      OP_IADD: r = a + b;
      OP_ISUB: r = a - b;
      OP_IAND: r = a & b;
      OP_IOR:  r = a | b;
      OP_IXOR: r = a ^ b;
      default: r = b;       // OP_MOV
    endcase
  end

  always_ff @(posedge clk) begin
    if (in_valid) y <= r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
