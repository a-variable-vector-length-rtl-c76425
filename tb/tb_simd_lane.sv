// tb_simd_lane: issues single operations of every class to one lane and
// checks the result value and that it is valid exactly latency+1 cycles
// after the issue cycle (one cycle in the operand register, then the unit);
// also checks that a lane that is not issued produces nothing, and that
// pipelined units accept back-to-back operations.
module tb_simd_lane;
  import simd_pkg::*;
  import fp_ref_pkg::*;
  logic  clk = 0, rst_n = 0, issue = 0;
  fu_e   fu = FU_INT;
  op_e   op = OP_IADD;
  elem_t a = 0, b = 0, res;
  logic  res_valid, res_dz;
  int checks = 0, failures = 0;

  simd_lane dut (.*);
  always #5 clk = ~clk;

  function automatic elem_t ref_op(op_e o, elem_t x, elem_t z);
    case (o)
      OP_IADD: return x + z;
      OP_ISUB: return x - z;
      OP_IXOR: return x ^ z;
      OP_IMUL: return x * z;
      OP_IDIV: return (z == 0) ? 32'hFFFF_FFFF : elem_t'($signed(x) / $signed(z));
      OP_FADD: return f_add(x, z);
      OP_FSUB: return f_sub(x, z);
      OP_FMUL: return f_mul(x, z);
      OP_FDIV: return f_div(x, z);
      default: return z;
    endcase
  endfunction

  task automatic one(op_e o, elem_t x, elem_t z, logic en);
    int n;
    elem_t e;
    e  = ref_op(o, x, z);
    op = o; fu = fu_of(o); a = x; b = z; issue = en;
    @(posedge clk); #1;
    issue = 0;
    n = 1;
    while (!res_valid && n < 40) begin @(posedge clk); #1; n++; end
    checks++;
    if (!en) begin
      if (res_valid) begin failures++; $display("FAIL disabled lane produced a result"); end
    end else if (res !== e || n != int'(lat_of(fu_of(o))) + 1) begin
      failures++;
      $display("FAIL %s %h %h -> %h exp %h after %0d", o.name(), x, z, res, e, n);
    end
    repeat (2) @(posedge clk); #1;
  endtask

  initial begin
    op_e ops [10] = '{OP_IADD, OP_ISUB, OP_IXOR, OP_MOV, OP_IMUL, OP_IDIV,
                      OP_FADD, OP_FSUB, OP_FMUL, OP_FDIV};
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      op_e o;
      o = ops[$urandom_range(9)];
      if (o inside {OP_FADD, OP_FSUB, OP_FMUL, OP_FDIV}) one(o, rand_f(100, 150), rand_f(100, 150), 1);
      else one(o, $urandom, (n % 5 == 0) ? 32'd0 : $urandom, 1);
    end
    one(OP_FDIV, 32'h3F80_0000, 32'h0, 0);
    // back-to-back FP multiplies: one result per cycle
    begin
      elem_t e [4];
      int n;
      for (int k = 0; k < 4; k++) begin
        a = rand_f(100, 150); b = rand_f(100, 150);
        e[k] = f_mul(a, b);
        op = OP_FMUL; fu = FU_FMUL; issue = 1;
        @(posedge clk); #1;
      end
      issue = 0;
      n = 0;
      while (!res_valid) begin @(posedge clk); #1; end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (!res_valid || res !== e[k]) begin failures++; $display("FAIL stream %0d", k); end
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
