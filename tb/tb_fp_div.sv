// tb_fp_div: issues divisions one after another to the iterative FP
// divider and checks each quotient against the reference arithmetic, that
// it arrives exactly 20 cycles after the operands, that busy covers the
// iteration and that division of a finite number by zero raises dz. A
// second instance is checked the same way in double precision (4 quotient
// bits per cycle) against the simulator's real arithmetic.
module tb_fp_div;
  import fp_ref_pkg::*;
  localparam int LAT = 20;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [31:0] a = 0, b = 0, y;
  logic busy, out_valid, dz;
  int checks = 0, failures = 0;

  fp_div #(.LAT(LAT)) dut (.*);
  always #5 clk = ~clk;

  logic in_valid_d = 0, busy_d, out_valid_d, dz_d;
  logic [63:0] a_d = 0, b_d = 0, y_d;
  fp_div #(.EXP_W(11), .MAN_W(52), .STEP_BITS(4), .LAT(LAT)) dut_d (
    .clk, .rst_n, .in_valid(in_valid_d), .a(a_d), .b(b_d),
    .busy(busy_d), .out_valid(out_valid_d), .y(y_d), .dz(dz_d));

  task automatic check_d(logic [63:0] x, logic [63:0] z);
    logic [63:0] e;
    logic        edz;
    int          n;
    e   = d_div(x, z);
    edz = (z[62:52] == 0) && (x[62:52] != 0) && (x[62:52] != 11'h7FF);
    a_d = x; b_d = z; in_valid_d = 1;
    @(posedge clk); #1;
    in_valid_d = 0;
    n = 1;
    while (!out_valid_d && n < 100) begin
      if (!busy_d) begin failures++; $display("FAIL DP busy low at %0d", n); end
      @(posedge clk); #1;
      n++;
    end
    checks++;
    if (y_d !== e || n != LAT || dz_d !== edz) begin
      failures++;
      $display("FAIL DP %h / %h = %h exp %h lat %0d dz %b", x, z, y_d, e, n, dz_d);
    end
  endtask

  task automatic check_one(logic [31:0] x, logic [31:0] z);
    logic [31:0] e;
    logic        edz;
    int          n;
    e   = f_div(x, z);
    edz = (z[30:23] == 0) && (x[30:23] != 0) && (x[30:23] != 8'hFF);
    a = x; b = z; in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
    n = 1;
    while (!out_valid && n < 100) begin
      if (!busy) begin failures++; $display("FAIL busy low at %0d", n); end
      @(posedge clk); #1;
      n++;
    end
    checks++;
    if (y !== e || n != LAT || dz !== edz) begin
      failures++;
      $display("FAIL %h / %h = %h exp %h lat %0d dz %b", x, z, y, e, n, dz);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    check_one(32'h3F80_0000, 32'h4040_0000);   // 1/3
    check_one(32'h4120_0000, 32'h4000_0000);   // 10/2
    check_one(32'h3F80_0000, 32'h0000_0000);   // 1/0
    check_one(32'h0000_0000, 32'h0000_0000);   // 0/0
    check_one(32'h7F80_0000, 32'h3F80_0000);   // inf/1
    check_one(32'h3F80_0000, 32'h7F80_0000);   // 1/inf
    check_one(32'h7F00_0000, 32'h0100_0000);   // overflow
    check_one(32'h0100_0000, 32'h7F00_0000);   // underflow
    for (int i = 0; i < 400; i++) check_one(rand_f(60, 190), rand_f(60, 190));
    check_d(64'h3FF0_0000_0000_0000, 64'h4008_0000_0000_0000);   // 1/3
    check_d(64'h3FF0_0000_0000_0000, 64'h0000_0000_0000_0000);   // 1/0
    check_d(64'h0000_0000_0000_0000, 64'h0000_0000_0000_0000);   // 0/0
    check_d(64'h7FE0_0000_0000_0000, 64'h0010_0000_0000_0000);   // overflow
    for (int i = 0; i < 400; i++) check_d(rand_d(900, 1150), rand_d(900, 1150));
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
