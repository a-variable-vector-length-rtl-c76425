// tb_wb_shuffle: random write-back descriptors. Checks that a vector result
// writes exactly its low vl lanes, that a scalar result is written to the
// selected element with the lane-0 value, that PACKPS data and enables pass
// through, and that the divide-by-zero flag ignores masked-off lanes. With
// 64-bit elements a scalar result is the lane-0/1 pair written to one pair.
module tb_wb_shuffle;
  import simd_pkg::*;
  logic meta_valid, meta_scalar, meta_dp, meta_pack;
  vreg_t meta_reg;
  logic [IDX_W-1:0] meta_elem;
  lane_mask_t meta_lanes, lane_dz, pack_en;
  vec_t lane_res, pack_res;
  logic wb_valid, wb_dz;
  vreg_t wb_reg;
  lane_mask_t wb_en;
  vec_t wb_data;
  int checks = 0, failures = 0;

  wb_shuffle dut (.*);

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int vl;
      lane_mask_t een;
      logic edz;
      meta_valid  = ($urandom_range(5) != 0);
      meta_reg    = vreg_t'($urandom);
      meta_pack   = ($urandom_range(3) == 0);
      meta_scalar = !meta_pack && ($urandom_range(1) == 0);
      meta_dp     = ($urandom_range(1) == 0);
      meta_elem   = IDX_W'($urandom);
      vl          = $urandom_range(meta_dp ? NUM_LANES / 2 : NUM_LANES);
      meta_lanes  = lanes_of(meta_scalar, meta_dp, VL_W'(vl));
      lane_dz     = lane_mask_t'($urandom) & lane_mask_t'($urandom);
      pack_en     = lane_mask_t'($urandom);
      for (int i = 0; i < NUM_LANES; i++) begin lane_res[i] = $urandom; pack_res[i] = $urandom; end
      #1;
      if (!meta_valid)      begin een = '0; edz = 0; end
      else if (meta_pack)   begin een = pack_en; edz = 0; end
      else if (meta_scalar && meta_dp) begin
        een = '0;
        een[2 * meta_elem[2:0]] = 1; een[2 * meta_elem[2:0] + 1] = 1;
        edz = lane_dz[0] | lane_dz[1];
      end
      else if (meta_scalar) begin een = lane_mask_t'(1) << meta_elem; edz = lane_dz[0]; end
      else                  begin een = meta_lanes; edz = |(lane_dz & meta_lanes); end
      checks++;
      if (wb_valid !== meta_valid || wb_reg !== meta_reg || wb_en !== een || wb_dz !== edz) begin
        failures++;
        $display("FAIL en=%h exp %h dz=%b exp %b", wb_en, een, wb_dz, edz);
      end
      for (int i = 0; i < NUM_LANES; i++) if (een[i]) begin
        elem_t e;
        e = meta_pack ? pack_res[i] : (meta_scalar ? lane_res[meta_dp ? i % 2 : 0] : lane_res[i]);
        checks++;
        if (wb_data[i] !== e) begin failures++; $display("FAIL data elem %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
