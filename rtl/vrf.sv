// vrf: the vector register file, NUM_VREGS registers of NUM_LANES 32-bit
// elements (128 x 512 bits by default, as in the evaluated machine).
//
// Two asynchronous read ports feed the operand network. The single write
// port has one enable per element: a masked vector instruction writes only
// its active lanes, a selectively-writing scalar instruction writes one
// element and PACKPS writes two, and every other element keeps its value.
// A write takes effect at the clock edge; a read in the same cycle sees the
// old value (the operand network forwards the new one). The storage is not
// reset.
module vrf
  import simd_pkg::*;
#(
  parameter int unsigned NREGS = NUM_VREGS
) (
  input  logic                     clk,
  input  logic [$clog2(NREGS)-1:0] ra1,
  output vec_t                     rd1,
  input  logic [$clog2(NREGS)-1:0] ra2,
  output vec_t                     rd2,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] wa,
  input  lane_mask_t               wen,    // element enables
  input  vec_t                     wd
);
  vec_t regs [NREGS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int e = 0; e < NUM_LANES; e++)
        if (wen[e]) regs[wa][e] <= wd[e];
    end
  end

  assign rd1 = regs[ra1];
  assign rd2 = regs[ra2];
endmodule
