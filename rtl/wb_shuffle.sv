// wb_shuffle: the shuffle network between the functional-unit result
// registers and the write-back port, together with the element write-enable
// generation that implements masking and Selective Writing.
//
//  * Vector instruction: each lane's result goes to its own element; only the
//    lanes the instruction enabled are written (Variable Length
//    Vectorization: the other elements keep their old values).
//  * Scalar instruction: the lane-0 result is broadcast to every element
//    position and only element `elem` (from the instruction's immediate) is
//    written, so a scalar result lands in any element of the destination
//    without a separate shuffle (Selective Writing). With 64-bit elements
//    (dp) the lane-0/1 pair is broadcast to every pair and the two lanes of
//    element elem[2:0] are written.
//  * PACKPS: data and enables come from the permutation unit.
// The division-by-zero flag is gathered from the written lanes only, so a
// masked-off lane can never raise a false exception. Combinational: the
// write-back happens in the cycle the result registers become valid.
module wb_shuffle
  import simd_pkg::*;
(
  input  logic                  meta_valid,
  input  vreg_t                 meta_reg,
  input  logic                  meta_scalar,
  input  logic                  meta_dp,
  input  logic [IDX_W-1:0]      meta_elem,
  input  lane_mask_t            meta_lanes,
  input  logic                  meta_pack,
  input  vec_t                  lane_res,
  input  lane_mask_t            lane_dz,
  input  vec_t                  pack_res,
  input  lane_mask_t            pack_en,
  output logic                  wb_valid,
  output vreg_t                 wb_reg,
  output lane_mask_t            wb_en,
  output vec_t                  wb_data,
  output logic                  wb_dz
);
  always_comb begin
    wb_valid = meta_valid;
    wb_reg   = meta_reg;
    wb_dz    = 1'b0;
    if (meta_pack) begin
      wb_data = pack_res;
      wb_en   = pack_en;
    end else if (meta_scalar) begin
      for (int i = 0; i < NUM_LANES; i++) wb_data[i] = lane_res[meta_dp ? i % 2 : 0];
      wb_en = scalar_en(meta_dp, meta_elem);
      wb_dz = lane_dz[0] | (meta_dp & lane_dz[1]);
    end else begin
      wb_data = lane_res;
      wb_en   = meta_lanes;
      wb_dz   = |(lane_dz & meta_lanes);
    end
    if (!meta_valid) begin
      wb_en = '0;
      wb_dz = 1'b0;
    end
  end
endmodule
