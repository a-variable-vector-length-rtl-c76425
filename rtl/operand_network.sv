// operand_network: the per-lane operand multiplexers in front of the lanes'
// pipeline registers.
//
// For each lane and each of the two source operands the multiplexer chooses
// between the register file, the memory port (second operand only, for
// instructions with a memory operand) and the result being written back in
// this cycle. Forwarding is per element: a lane takes the written-back value
// when the write targets its source register and enables that element. Since
// the write-back of a selectively-writing scalar instruction carries the
// lane-0 result in every element position, a scalar result reaches any lane
// through this path, which is how Selective Writing replaces a shuffle.
// Purely combinational.
module operand_network
  import simd_pkg::*;
(
  input  vreg_t      vs1,
  input  vreg_t      vs2,
  input  logic       mem_src,
  input  vec_t       rf1,
  input  vec_t       rf2,
  input  vec_t       mem_data,
  input  logic       wb_valid,
  input  vreg_t      wb_reg,
  input  lane_mask_t wb_en,
  input  vec_t       wb_data,
  output vec_t       opa,
  output vec_t       opb,
  output lane_mask_t fwd_a,   // lanes that took a forwarded first operand
  output lane_mask_t fwd_b
);
  always_comb begin
    for (int i = 0; i < NUM_LANES; i++) begin
      fwd_a[i] = wb_valid && (wb_reg == vs1) && wb_en[i];
      fwd_b[i] = !mem_src && wb_valid && (wb_reg == vs2) && wb_en[i];
      opa[i]   = fwd_a[i] ? wb_data[i] : rf1[i];
      opb[i]   = mem_src ? mem_data[i] : (fwd_b[i] ? wb_data[i] : rf2[i]);
    end
  end
endmodule
