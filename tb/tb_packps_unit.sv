// tb_packps_unit: random PACKPS operations; checks that the two selected
// source elements land in the two selected destination elements with
// exactly those two write enables, one cycle after the operands (the second
// source wins when both name the same destination element). Half of the
// operations use 64-bit elements (dp), which move whole lane pairs.
module tb_packps_unit;
  import simd_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  vec_t a = '0, b = '0, y;
  logic [15:0] imm = 0;
  logic dp = 0;
  logic out_valid;
  lane_mask_t y_en;
  int checks = 0, failures = 0;

  packps_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 2000; n++) begin
      vec_t       ey;
      lane_mask_t een;
      for (int i = 0; i < NUM_LANES; i++) begin a[i] = $urandom; b[i] = $urandom; end
      imm = 16'($urandom);
      ey = '0; een = '0;
      dp = 1'($urandom);
      if (dp) begin
        for (int h = 0; h < 2; h++) begin
          ey[2 * imm[6:4] + h] = a[2 * imm[2:0] + h];    een[2 * imm[6:4] + h] = 1;
        end
        for (int h = 0; h < 2; h++) begin
          ey[2 * imm[14:12] + h] = b[2 * imm[10:8] + h]; een[2 * imm[14:12] + h] = 1;
        end
      end else begin
        ey[imm[7:4]] = a[imm[3:0]];    een[imm[7:4]] = 1;
        ey[imm[15:12]] = b[imm[11:8]]; een[imm[15:12]] = 1;
      end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid too early"); end
      @(posedge clk); #1;
      checks++;
      if (!out_valid || y_en !== een) begin failures++; $display("FAIL valid/enables %h %h", y_en, een); end
      for (int i = 0; i < NUM_LANES; i++)
        if (een[i] && y[i] !== ey[i]) begin
          failures++;
          $display("FAIL imm=%h elem %0d got %h exp %h", imm, i, y[i], ey[i]);
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
