// tb_vrf: random writes with random element enables to the vector register
// file, checked through both read ports against a model; elements whose
// enable is low must keep their old value, and a read in the cycle of a
// write must still return the old value.
module tb_vrf;
  import simd_pkg::*;
  logic clk = 0;
  vreg_t ra1 = 0, ra2 = 0, wa = 0;
  vec_t  rd1, rd2, wd = '0;
  logic  we = 0;
  lane_mask_t wen = '0;
  int checks = 0, failures = 0;
  vec_t model [NUM_VREGS];

  vrf dut (.*);
  always #5 clk = ~clk;

  bit filled = 0;   // the storage is not reset: nothing to compare before the first fill

  task automatic wr(vreg_t a, lane_mask_t en, vec_t d);
    we = 1; wa = a; wen = en; wd = d;
    ra1 = a;
    #1;
    if (filled) checks++;
    if (filled && rd1 !== model[a]) begin failures++; $display("FAIL read-during-write v%0d", a); end
    @(posedge clk); #1;
    for (int i = 0; i < NUM_LANES; i++) if (en[i]) model[a][i] = d[i];
    we = 0;
  endtask

  function automatic vec_t rv();
    vec_t v;
    for (int i = 0; i < NUM_LANES; i++) v[i] = $urandom;
    return v;
  endfunction

  initial begin
    @(posedge clk); #1;
    for (int r = 0; r < NUM_VREGS; r++) begin
      model[r] = '0;
      wr(vreg_t'(r), '1, rv());
    end
    filled = 1;
    for (int n = 0; n < 3000; n++) begin
      lane_mask_t en;
      en = lane_mask_t'($urandom);
      if (n % 3 == 0) en = lane_mask_t'(1) << $urandom_range(NUM_LANES - 1);
      wr(vreg_t'($urandom_range(NUM_VREGS - 1)), en, rv());
      ra1 = vreg_t'($urandom_range(NUM_VREGS - 1));
      ra2 = vreg_t'($urandom_range(NUM_VREGS - 1));
      #1;
      checks++;
      if (rd1 !== model[ra1] || rd2 !== model[ra2]) begin
        failures++;
        $display("FAIL read v%0d/v%0d", ra1, ra2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
