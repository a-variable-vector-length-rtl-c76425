// packps_unit: the PACKPS permutation unit.
//
// PACKPS reads two vector registers and writes two elements of the
// destination; its 16-bit immediate holds four element indices:
//   imm[3:0]   element of the first source      -> destination element imm[7:4]
//   imm[11:8]  element of the second source     -> destination element imm[15:12]
// With 64-bit elements (dp) the indices are the low three bits of each field
// and a whole lane pair is moved. All other destination elements keep their values (the write enables are
// returned with the data). When both indices name the same destination
// element the second source wins (this design's choice). Operands are
// captured at the end of the issue cycle and the result register is valid
// one cycle later (LAT_PACK = 1, an assumed shuffle latency).
module packps_unit
  import simd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  vec_t       a,
  input  vec_t       b,
  input  logic [15:0] imm,
  input  logic       dp,
  output logic       out_valid,
  output vec_t       y,
  output lane_mask_t y_en
);
  logic        pr_valid, v;
  vec_t        pr_a, pr_b;
  logic [15:0] pr_imm;
  logic        pr_dp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pr_valid <= 1'b0;
      v        <= 1'b0;
    end else begin
      pr_valid <= in_valid;
      v        <= pr_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      pr_a   <= a;
      pr_b   <= b;
      pr_imm <= imm;
      pr_dp  <= dp;
    end
  end

  vec_t       r;
  lane_mask_t r_en;
  always_comb begin
    r    = '0;
    r_en = '0;
    if (pr_dp) begin
      for (int h = 0; h < 2; h++) begin
        r[{pr_imm[6:4], 1'(h)}]      = pr_a[{pr_imm[2:0], 1'(h)}];
        r_en[{pr_imm[6:4], 1'(h)}]   = 1'b1;
      end
      for (int h = 0; h < 2; h++) begin
        r[{pr_imm[14:12], 1'(h)}]    = pr_b[{pr_imm[10:8], 1'(h)}];
        r_en[{pr_imm[14:12], 1'(h)}] = 1'b1;
      end
    end else begin
      r[pr_imm[7:4]]      = pr_a[pr_imm[3:0]];
      r_en[pr_imm[7:4]]   = 1'b1;
      r[pr_imm[15:12]]    = pr_b[pr_imm[11:8]];
      r_en[pr_imm[15:12]] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (pr_valid) begin
      y    <= r;
      y_en <= r_en;
    end
  end

  assign out_valid = v;
endmodule
