// tb_int_div: issues signed divisions one after another to the iterative
// integer divider and checks quotient, the divide-by-zero convention (all
// ones, dz set), busy during the iteration and the 10-cycle latency.
module tb_int_div;
  localparam int LAT = 10;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [31:0] a = 0, b = 0, y;
  logic busy, out_valid, dz;
  int checks = 0, failures = 0;

  int_div #(.LAT(LAT)) dut (.*);
  always #5 clk = ~clk;

  task automatic check_one(int x, int z);
    logic [31:0] e;
    int          n;
    if (z == 0) e = 32'hFFFF_FFFF;
    else if (x == 32'h8000_0000 && z == -1) e = 32'h8000_0000;
    else e = x / z;
    a = x; b = z; in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
    n = 1;
    while (!out_valid && n < 100) begin
      if (!busy) begin failures++; $display("FAIL busy low"); end
      @(posedge clk); #1;
      n++;
    end
    checks++;
    if (y !== e || n != LAT || dz !== (z == 0)) begin
      failures++;
      $display("FAIL %0d / %0d = %0d exp %0d lat %0d", x, z, $signed(y), $signed(e), n);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check_one(100, 7);
    check_one(-100, 7);
    check_one(100, -7);
    check_one(-100, -7);
    check_one(5, 0);
    check_one(32'h8000_0000, -1);
    check_one(32'h7FFF_FFFF, 1);
    check_one(3, 5);
    for (int i = 0; i < 500; i++)
      check_one($urandom, (i % 2) ? int'($urandom) : int'($urandom_range(1000)) - 500);
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
