// tb_issue_ctrl: directed scenarios for the issue logic. For each unit
// class a dependent instruction must issue exactly latency+1 cycles after
// its producer (RAW stall, then forwarding), and the producer's write-back
// descriptor must appear in that cycle. Also checked: a WAW stall behind a
// divide, a write-back slot conflict between a multiply and a later add, the
// busy divider, that independent instructions issue every cycle, and that a
// double-precision instruction enables lane pairs and is marked dp at its
// write-back.
module tb_issue_ctrl;
  import simd_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  instr_t instr = '0;
  logic in_ready, fire;
  fu_e fire_fu;
  lane_mask_t fire_lanes;
  logic wb_meta_valid, wb_meta_scalar, wb_meta_dp, wb_meta_pack;
  vreg_t wb_meta_reg;
  logic [IDX_W-1:0] wb_meta_elem;
  lane_mask_t wb_meta_lanes;
  logic stall_raw, stall_waw, stall_struct;
  int checks = 0, failures = 0;
  int cyc = 0;
  int wb_cycle [NUM_VREGS];
  logic wb_dp [NUM_VREGS];
  int n_raw = 0, n_waw = 0, n_struct = 0;

  issue_ctrl dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial forever begin
    @(posedge clk); #4;
    if (stall_raw) n_raw++;
    if (stall_waw) n_waw++;
    if (stall_struct) n_struct++;
    if (wb_meta_valid) wb_cycle[wb_meta_reg] = cyc;
    if (wb_meta_valid) wb_dp[wb_meta_reg] = wb_meta_dp;
  end

  function automatic instr_t mk(op_e op, int vd, int vs1, int vs2, int vl);
    instr_t i;
    i = '0; i.op = op; i.vd = vreg_t'(vd); i.vs1 = vreg_t'(vs1); i.vs2 = vreg_t'(vs2);
    i.vl = VL_W'(vl);
    return i;
  endfunction

  // Offer an instruction until it issues; return the issue cycle.
  task automatic send(instr_t i, output int c);
    instr = i; in_valid = 1;
    forever begin
      #2;
      if (in_ready) begin c = cyc; @(posedge clk); #1; break; end
      @(posedge clk); #1;
    end
    in_valid = 0;
  endtask

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d, expected %0d", what, got, exp); end
  endtask

  initial begin
    op_e ops [6] = '{OP_IADD, OP_IMUL, OP_IDIV, OP_FADD, OP_FMUL, OP_FDIV};
    int c0, c1, c2;
    foreach (wb_cycle[r]) wb_cycle[r] = -1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // RAW distance per unit
    foreach (ops[k]) begin
      send(mk(ops[k], 10 + k, 1, 2, 16), c0);
      send(mk(OP_IADD, 20 + k, 10 + k, 3, 16), c1);
      expect_eq($sformatf("RAW distance after %s", ops[k].name()), c1 - c0, int'(lat_of(fu_of(ops[k]))) + 1);
      repeat (25) @(posedge clk); #1;
      expect_eq($sformatf("write-back cycle of %s", ops[k].name()), wb_cycle[10 + k], c0 + int'(lat_of(fu_of(ops[k]))) + 1);
    end
    // independent instructions issue back to back
    send(mk(OP_IADD, 30, 1, 2, 16), c0);
    send(mk(OP_IXOR, 31, 1, 2, 16), c1);
    send(mk(OP_FADD, 32, 1, 2, 16), c2);
    expect_eq("back-to-back", c2 - c0, 2);
    repeat (25) @(posedge clk); #1;
    // WAW behind a divide
    send(mk(OP_FDIV, 40, 1, 2, 16), c0);
    send(mk(OP_IADD, 40, 3, 4, 16), c1);
    expect_eq("WAW distance", c1 - c0, LAT_FDIV + 1);
    repeat (25) @(posedge clk); #1;
    // write-back slot conflict: FMUL writes back at +5, an IADD issued at +3 would too
    send(mk(OP_FMUL, 41, 1, 2, 16), c0);
    repeat (2) @(posedge clk); #1;
    send(mk(OP_IADD, 42, 1, 2, 16), c1);
    expect_eq("slot conflict delay", c1 - c0, 4);
    repeat (25) @(posedge clk); #1;
    // busy divider: two independent integer divides
    send(mk(OP_IDIV, 43, 1, 2, 16), c0);
    send(mk(OP_IDIV, 44, 3, 4, 16), c1);
    expect_eq("divider occupancy", c1 - c0, LAT_IDIV);
    repeat (25) @(posedge clk); #1;
    // dependence through the second source
    send(mk(OP_FADD, 46, 1, 2, 16), c0);
    send(mk(OP_IADD, 47, 3, 46, 16), c1);
    expect_eq("RAW distance through vs2", c1 - c0, LAT_FADD + 1);
    repeat (25) @(posedge clk); #1;
    // a store does not write back and reads its source after the producer
    send(mk(OP_FMUL, 45, 1, 2, 16), c0);
    send(mk(OP_STORE, 0, 45, 0, 16), c1);
    expect_eq("store RAW distance", c1 - c0, LAT_FMUL + 1);
    repeat (25) @(posedge clk); #1;
    // double precision: 3 elements = 6 lanes, FP multiply latency unchanged
    begin
      instr_t d;
      d = mk(OP_FMUL, 40, 1, 2, 3); d.dp = 1;
      instr = d; in_valid = 1; #2;
      expect_eq("dp lanes", int'(fire_lanes), 'h3F);
      @(posedge clk); #1; in_valid = 0;
      c0 = cyc - 1;
      repeat (10) @(posedge clk); #1;
      expect_eq("dp write-back cycle", wb_cycle[40], c0 + int'(LAT_FMUL) + 1);
      expect_eq("dp write-back marked", int'(wb_dp[40]), 1);
    end
    checks++;
    if (n_raw == 0 || n_waw == 0 || n_struct == 0) begin
      failures++;
      $display("FAIL stall events raw=%0d waw=%0d struct=%0d", n_raw, n_waw, n_struct);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
