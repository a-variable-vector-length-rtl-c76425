// tb_operand_network: random register-file data, memory data and
// write-back bus contents; checks per lane that each operand comes from the
// write-back bus exactly when that bus writes the source register and
// enables the lane, from memory for a memory operand, and from the register
// file otherwise.
module tb_operand_network;
  import simd_pkg::*;
  vreg_t vs1, vs2, wb_reg;
  logic  mem_src, wb_valid;
  vec_t  rf1, rf2, mem_data, wb_data, opa, opb;
  lane_mask_t wb_en, fwd_a, fwd_b;
  int checks = 0, failures = 0;

  operand_network dut (.*);

  initial begin
    for (int n = 0; n < 5000; n++) begin
      vs1 = vreg_t'($urandom_range(3)); vs2 = vreg_t'($urandom_range(3));
      wb_reg = vreg_t'($urandom_range(3));
      mem_src = ($urandom_range(3) == 0);
      wb_valid = ($urandom_range(3) != 0);
      wb_en = lane_mask_t'($urandom);
      for (int i = 0; i < NUM_LANES; i++) begin
        rf1[i] = $urandom; rf2[i] = $urandom; mem_data[i] = $urandom; wb_data[i] = $urandom;
      end
      #1;
      for (int i = 0; i < NUM_LANES; i++) begin
        elem_t ea, eb;
        ea = (wb_valid && wb_reg == vs1 && wb_en[i]) ? wb_data[i] : rf1[i];
        eb = mem_src ? mem_data[i] : ((wb_valid && wb_reg == vs2 && wb_en[i]) ? wb_data[i] : rf2[i]);
        checks++;
        if (opa[i] !== ea || opb[i] !== eb) begin
          failures++;
          $display("FAIL lane %0d", i);
        end
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
