// tb_simd_pkg: checks the shared helper functions of the package: the
// lane-enable decode of the vector-length field (low vl lanes of a vector
// instruction, lane 0 of a scalar one, lane pairs for 64-bit elements), the
// scalar element write enables, the unit class of every operation
// and the latency of every unit.
module tb_simd_pkg;
  import simd_pkg::*;
  int checks = 0, failures = 0;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0h expected %0h", what, got, exp); end
  endtask

  initial begin
    for (int vl = 0; vl <= NUM_LANES; vl++) begin
      expect_eq($sformatf("lanes vl=%0d", vl), lanes_of(1'b0, 1'b0, VL_W'(vl)), (longint'(1) << vl) - 1);
      expect_eq($sformatf("scalar lanes vl=%0d", vl), lanes_of(1'b1, 1'b0, VL_W'(vl)), 1);
      expect_eq($sformatf("dp lanes vl=%0d", vl), lanes_of(1'b0, 1'b1, VL_W'(vl)),
                (longint'(1) << (2 * ((vl > NUM_LANES / 2) ? NUM_LANES / 2 : vl))) - 1);
      expect_eq($sformatf("dp scalar lanes vl=%0d", vl), lanes_of(1'b1, 1'b1, VL_W'(vl)), 3);
    end
    for (int e = 0; e < NUM_LANES; e++) begin
      expect_eq($sformatf("scalar_en %0d", e), scalar_en(1'b0, IDX_W'(e)), longint'(1) << e);
      expect_eq($sformatf("dp scalar_en %0d", e), scalar_en(1'b1, IDX_W'(e)), longint'(3) << (2 * (e % 8)));
    end
    expect_eq("fu IADD", fu_of(OP_IADD), FU_INT);
    expect_eq("fu MOV", fu_of(OP_MOV), FU_INT);
    expect_eq("fu IMUL", fu_of(OP_IMUL), FU_IMUL);
    expect_eq("fu IDIV", fu_of(OP_IDIV), FU_IDIV);
    expect_eq("fu FSUB", fu_of(OP_FSUB), FU_FADD);
    expect_eq("fu FMUL", fu_of(OP_FMUL), FU_FMUL);
    expect_eq("fu FDIV", fu_of(OP_FDIV), FU_FDIV);
    expect_eq("fu PACK", fu_of(OP_PACK), FU_PACK);
    expect_eq("fu STORE", fu_of(OP_STORE), FU_NONE);
    expect_eq("lat INT", lat_of(FU_INT), 1);
    expect_eq("lat IMUL", lat_of(FU_IMUL), 3);
    expect_eq("lat IDIV", lat_of(FU_IDIV), 10);
    expect_eq("lat FADD", lat_of(FU_FADD), 2);
    expect_eq("lat FMUL", lat_of(FU_FMUL), 4);
    expect_eq("lat FDIV", lat_of(FU_FDIV), 20);
    expect_eq("lanes", NUM_LANES, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
