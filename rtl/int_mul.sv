// int_mul: 32-bit integer multiplier, one lane of the integer
// multiply/divide vector unit. Returns the low 32 bits of the product
// (equal for signed and unsigned operands). Three pipeline stages, so the
// result is valid LAT_IMUL = 3 cycles after in_valid, as in the evaluated
// machine; the product is formed in the first stage and carried by the other
// two. Fully pipelined.
module int_mul (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] y
);
  logic [2:0]  v;
  logic [31:0] p1, p2, p3;

  always_ff @(posedge clk) begin
    p1 <= a * b;
    p2 <= p1;
    p3 <= p2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[1:0], in_valid};
  end

  assign out_valid = v[2];
  assign y = p3;
endmodule
