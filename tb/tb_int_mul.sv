// tb_int_mul: streams random operand pairs into the pipelined integer
// multiplier, one per cycle, and checks each low-32-bit product and that it
// arrives exactly 3 cycles later.
module tb_int_mul;
  localparam int LAT = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [31:0] a = 0, b = 0, y;
  logic out_valid;
  int checks = 0, failures = 0;
  int cyc = 0;
  logic [31:0] exp_q [$];
  int          t_q [$];

  int_mul dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [31:0] e; int t;
    checks++;
    e = exp_q.pop_front(); t = t_q.pop_front();
    if (y !== e || cyc - t != LAT) begin
      failures++;
      $display("FAIL y=%h exp=%h lat=%0d", y, e, cyc - t);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int i = 0; i < 2000; i++) begin
      a = $urandom; b = (i % 4 == 0) ? 32'($urandom_range(20)) : $urandom;
      in_valid = (i % 7 != 3);
      if (in_valid) begin exp_q.push_back(a * b); t_q.push_back(cyc); end
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("missing results"); end
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
