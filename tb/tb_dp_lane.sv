// tb_dp_lane: issues double-precision add, subtract, multiply and divide
// operations to one lane-pair slice and checks each result against the
// simulator's real arithmetic, that it is valid exactly latency+1 cycles
// after issue (operand register plus unit latency), the divide-by-zero flag,
// and that add/multiply can be issued back to back.
module tb_dp_lane;
  import simd_pkg::*;
  import fp_ref_pkg::*;
  logic        clk = 0, rst_n = 0, issue = 0;
  fu_e         fu = FU_FADD;
  op_e         op = OP_FADD;
  logic [63:0] a = 0, b = 0, res;
  logic        res_valid, res_dz;
  int checks = 0, failures = 0;
  int cyc = 0;

  dp_lane dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int cycle; logic [63:0] y; logic dz; } exp_t;
  exp_t exp_q [$];

  initial forever begin
    @(posedge clk); #4;
    if (rst_n && res_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected result"); end
      else begin
        exp_t e;
        int   k;
        k = 0;
        foreach (exp_q[j]) if (exp_q[j].cycle < exp_q[k].cycle) k = j;
        e = exp_q[k];
        exp_q.delete(k);
        if (res !== e.y || res_dz !== e.dz || cyc != e.cycle) begin
          failures++;
          $display("FAIL res=%h dz=%b at %0d, exp %h dz=%b at %0d", res, res_dz, cyc, e.y, e.dz, e.cycle);
        end
      end
    end
  end

  function automatic bit slot_taken(int c);
    foreach (exp_q[k]) if (exp_q[k].cycle == c) return 1;
    return 0;
  endfunction

  // Issue one operation in the current cycle (inputs already set up).
  task automatic go(op_e o, logic [63:0] x, logic [63:0] z);
    logic [63:0] y;
    logic        dz;
    op = o; fu = fu_of(o); a = x; b = z; issue = 1;
    dz = 0;
    case (o)
      OP_FADD: y = d_add(x, z, 1'b0);
      OP_FSUB: y = d_add(x, z, 1'b1);
      OP_FMUL: y = d_mul(x, z);
      default: begin
        y  = d_div(x, z);
        dz = z[62:52] == 0 && x[62:52] != 0 && x[62:52] != 11'h7FF;
      end
    endcase
    exp_q.push_back('{cyc + int'(lat_of(fu_of(o))) + 1, y, dz});
    @(posedge clk); #1;
    issue = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    go(OP_FDIV, 64'h3FF0_0000_0000_0000, 64'h0000_0000_0000_0000);   // 1/0
    repeat (25) @(posedge clk); #1;
    for (int n = 0; n < 300; n++) begin
      op_e o;
      o = op_e'(int'(OP_FADD) + $urandom_range(3));
      // like the issue logic, never let two results meet in one cycle
      while (slot_taken(cyc + int'(lat_of(fu_of(o))) + 1)) begin @(posedge clk); #1; end
      go(o, rand_d(950, 1100), rand_d(950, 1100));
      if (o == OP_FDIV) begin repeat (LAT_FDIV + 2) @(posedge clk); #1; end
      else if ($urandom_range(1) == 0) begin repeat (LAT_FMUL + 1) @(posedge clk); #1; end
    end
    // back to back: an add and a multiply (their results land in different cycles)
    go(OP_FMUL, rand_d(1000, 1040), rand_d(1000, 1040));
    go(OP_FADD, rand_d(1000, 1040), rand_d(1000, 1040));
    repeat (LAT_FDIV + 4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
