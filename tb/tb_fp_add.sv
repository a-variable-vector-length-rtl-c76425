// tb_fp_add: streams random and special operand pairs into the FP adder,
// one per cycle, and checks every result against the reference arithmetic
// and that it arrives exactly 2 cycles after its operands. The unit is
// tested in single precision (default parameters) and, as a second
// instance, in double precision against the simulator's real arithmetic.
module tb_fp_add;
  import fp_ref_pkg::*;
  localparam int LAT = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, sub = 0;
  logic [31:0] a = 0, b = 0, y;
  logic out_valid;
  int checks = 0, failures = 0;

  fp_add dut (.*);
  always #5 clk = ~clk;

  logic in_valid_d = 0, sub_d = 0, out_valid_d;
  logic [63:0] a_d = 0, b_d = 0, y_d;
  fp_add #(.EXP_W(11), .MAN_W(52)) dut_d (.clk, .rst_n, .in_valid(in_valid_d), .sub(sub_d), .a(a_d), .b(b_d), .out_valid(out_valid_d), .y(y_d));
  logic [63:0] exp_dq [$];
  int          t_dq [$];
  always @(posedge clk) if (rst_n && out_valid_d) begin
    checks++;
    if (exp_dq.size() == 0) begin failures++; $display("unexpected DP result"); end
    else begin
      logic [63:0] e; int t;
      e = exp_dq.pop_front(); t = t_dq.pop_front();
      if (y_d !== e || cyc - t != LAT) begin
        failures++;
        $display("FAIL DP y=%h exp=%h lat=%0d", y_d, e, cyc - t);
      end
    end
  end

  task automatic drive_d(logic [63:0] x, logic [63:0] z, logic s);
    a_d = x; b_d = z; sub_d = s; in_valid_d = 1;
    exp_dq.push_back(d_add(x, z, s));
    t_dq.push_back(cyc);
    @(posedge clk); #1;
    in_valid_d = 0;
  endtask

  logic [31:0] exp_q [$];
  int          t_q [$];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected result"); end
    else begin
      logic [31:0] e; int t;
      e = exp_q.pop_front(); t = t_q.pop_front();
      if (y !== e || cyc - t != LAT) begin
        failures++;
        $display("FAIL y=%h exp=%h lat=%0d", y, e, cyc - t);
      end
    end
  end

  task automatic drive(logic [31:0] x, logic [31:0] z, logic s);
    a = x; b = z; sub = s; in_valid = 1;
    exp_q.push_back(s ? f_sub(x, z) : f_add(x, z));
    t_q.push_back(cyc);
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // directed: 1 + 1, 1 - 1, cancellation, infinities, NaN, huge exponent gap
    drive(32'h3F80_0000, 32'h3F80_0000, 0);
    drive(32'h3F80_0000, 32'h3F80_0000, 1);
    drive(32'h3F80_0001, 32'h3F80_0000, 1);
    drive(32'h7F80_0000, 32'h3F80_0000, 0);
    drive(32'h7F80_0000, 32'h7F80_0000, 1);
    drive(32'h7FC0_0001, 32'h3F80_0000, 0);
    drive(32'h4B80_0000, 32'h3F80_0000, 0);   // 2^24 + 1: ties to even
    drive(32'h4B80_0000, 32'h3F80_0001, 0);
    drive(32'h7F7F_FFFF, 32'h7F7F_FFFF, 0);   // overflow
    drive(32'h0080_0001, 32'h0080_0000, 1);   // underflow flushes
    drive(32'h0000_0000, 32'h3F80_0000, 0);
    for (int i = 0; i < 3000; i++) begin
      logic [31:0] x, z;
      x = rand_f(100, 150);
      z = (i % 3 == 0) ? rand_f(100, 150) : {$urandom_range(1), x[30:23], 23'($urandom)};
      drive(x, z, 1'($urandom));
    end
    // double precision: directed, then random
    drive_d(64'h3FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000, 0);
    drive_d(64'h3FF0_0000_0000_0001, 64'h3FF0_0000_0000_0000, 1);
    drive_d(64'h4340_0000_0000_0000, 64'h3FF0_0000_0000_0000, 0);   // 2^53 + 1: ties to even
    drive_d(64'h7FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000, 0);
    drive_d(64'h7FEF_FFFF_FFFF_FFFF, 64'h7FEF_FFFF_FFFF_FFFF, 0);
    drive_d(64'h0000_0000_0000_0000, 64'hC000_0000_0000_0000, 0);
    for (int i = 0; i < 3000; i++) begin
      logic [63:0] x, z;
      x = rand_d(990, 1060);
      z = (i % 3 == 0) ? rand_d(990, 1060) : {1'($urandom), x[62:52], 20'($urandom), $urandom};
      drive_d(x, z, 1'($urandom));
    end
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (exp_dq.size() != 0) begin failures++; $display("missing DP results"); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
