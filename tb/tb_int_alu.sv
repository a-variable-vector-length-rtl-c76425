// tb_int_alu: applies random operations of the simple-integer lane and
// checks each result and its 1-cycle latency.
module tb_int_alu;
  import simd_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  op_e  op = OP_IADD;
  logic [31:0] a = 0, b = 0, y;
  logic out_valid;
  int checks = 0, failures = 0;

  int_alu dut (.*);
  always #5 clk = ~clk;

  initial begin
    op_e ops [6] = '{OP_IADD, OP_ISUB, OP_IAND, OP_IOR, OP_IXOR, OP_MOV};
    logic [31:0] e;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("FAIL valid without input"); end
    for (int i = 0; i < 1000; i++) begin
      op = ops[$urandom_range(5)];
      a = $urandom; b = $urandom;
      case (op)
        OP_IADD: e = a + b;
        OP_ISUB: e = a - b;
        OP_IAND: e = a & b;
        OP_IOR:  e = a | b;
        OP_IXOR: e = a ^ b;
        default: e = b;
      endcase
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid || y !== e) begin
        failures++;
        $display("FAIL op=%s a=%h b=%h y=%h exp=%h", op.name(), a, b, y, e);
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
