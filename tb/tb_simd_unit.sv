// tb_simd_unit: end-to-end test of the SIMD unit at its default size
// (16 lanes x 32 bits, 128 registers).
//
// The registers are first filled through loads (MOV with a memory operand).
// Then a long random instruction stream, drawn from a small register window
// so that dependences are frequent, mixes every operation, vector lengths
// 1..16, scalar instructions writing random elements, PACKPS, memory operands
// and stores. The testbench keeps its own architectural model, updated in
// program order as each instruction issues; every write-back is checked
// against it (register, element enables, the written elements, the
// divide-by-zero flag) and must come exactly latency+1 cycles after issue.
// Instructions with 64-bit elements (dp) are mixed in: FP operations on
// them are checked against double-precision reference arithmetic, other
// operations act on the two 32-bit halves. Stores are checked one cycle after issue and at the end every register is
// read back through stores. Each mechanism of the design (masked lanes,
// selective writing, PACKPS, memory operands, forwarding, the three stall
// kinds, every functional unit, a division by zero hidden in a masked-off
// lane) is counted and must have happened at least once.
module tb_simd_unit;
  import simd_pkg::*;
  import fp_ref_pkg::*;

  localparam int NINSTR = 4000;
  localparam int WIN    = 12;      // registers used by the random stream

  logic       clk = 0, rst_n = 0;
  logic       in_valid = 0;
  instr_t     instr = '0;
  vec_t       mem_data = '0;
  logic       in_ready;
  logic       st_valid;
  vec_t       st_data;
  lane_mask_t st_mask;
  logic       wb_valid, wb_dz;
  vreg_t      wb_reg;
  lane_mask_t wb_en;
  vec_t       wb_data;
  logic ev_issue, ev_masked, ev_swr, ev_pack, ev_mem_operand, ev_forward;
  logic ev_stall_raw, ev_stall_waw, ev_stall_struct;

  simd_unit dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- reference model ----------------
  vec_t model [NUM_VREGS];

  typedef struct {
    int         cycle;
    vreg_t      rd;
    lane_mask_t en;
    vec_t       data;
    logic       dz;
  } exp_wb_t;
  exp_wb_t    exp_wb [$];
  typedef struct {
    int         cycle;
    vec_t       data;
    lane_mask_t mask;
  } exp_st_t;
  exp_st_t    exp_st [$];

  int n_dp, n_dp_fp, n_masked, n_swr, n_pack, n_mem, n_fwd, n_raw, n_waw, n_struct, n_dz, n_masked_dz_hidden;
  int n_fu [8];

  function automatic elem_t lane_op(op_e op, elem_t x, elem_t z);
    case (op)
      OP_IADD: return x + z;
      OP_ISUB: return x - z;
      OP_IAND: return x & z;
      OP_IOR:  return x | z;
      OP_IXOR: return x ^ z;
      OP_MOV:  return z;
      OP_IMUL: return x * z;
      OP_IDIV: begin
        if (z == 0) return 32'hFFFF_FFFF;
        if (x == 32'h8000_0000 && z == 32'hFFFF_FFFF) return 32'h8000_0000;
        return elem_t'($signed(x) / $signed(z));
      end
      OP_FADD: return f_add(x, z);
      OP_FSUB: return f_sub(x, z);
      OP_FMUL: return f_mul(x, z);
      OP_FDIV: return f_div(x, z);
      default: return '0;
    endcase
  endfunction

  function automatic logic lane_dz(op_e op, elem_t x, elem_t z);
    if (op == OP_IDIV) return z == 0;
    if (op == OP_FDIV) return z[30:23] == 0 && x[30:23] != 0 && x[30:23] != 8'hFF;
    return 1'b0;
  endfunction

  function automatic logic dp_fp_op(op_e op);
    return op == OP_FADD || op == OP_FSUB || op == OP_FMUL || op == OP_FDIV;
  endfunction

  // One 64-bit element (lane pair) of a dp instruction: FP operations use
  // double precision, the others work on each 32-bit half.
  task automatic pair_op(op_e op, elem_t a0, elem_t a1, elem_t b0, elem_t b1,
                         output elem_t r0, output elem_t r1, output logic dz);
    logic [63:0] x, z, r;
    x = {a1, a0};
    z = {b1, b0};
    if (dp_fp_op(op)) begin
      case (op)
        OP_FADD: r = d_add(x, z, 1'b0);
        OP_FSUB: r = d_add(x, z, 1'b1);
        OP_FMUL: r = d_mul(x, z);
        default: r = d_div(x, z);
      endcase
      r0 = r[31:0];
      r1 = r[63:32];
      dz = op == OP_FDIV && z[62:52] == 0 && x[62:52] != 0 && x[62:52] != 11'h7FF;
    end else begin
      r0 = lane_op(op, a0, b0);
      r1 = lane_op(op, a1, b1);
      dz = lane_dz(op, a0, b0) | lane_dz(op, a1, b1);
    end
  endtask

  // Apply an instruction to the model at issue and record what to expect.
  task automatic model_issue(instr_t in, vec_t mem, int c);
    vec_t       a, b, d;
    lane_mask_t en;
    logic       dz;
    fu_e        fu;
    a  = model[in.vs1];
    b  = in.mem_src ? mem : model[in.vs2];
    d  = model[in.vd];
    en = '0;
    dz = 0;
    fu = fu_of(in.op);
    n_fu[fu]++;
    if (in.op == OP_STORE) begin
      exp_st.push_back('{c + 1, a, lanes_of(in.scalar, in.dp, in.vl)});
      return;
    end
    if (in.dp) n_dp++;
    if (in.op == OP_PACK && in.dp) begin
      for (int h = 0; h < 2; h++) begin
        d[2 * in.imm[6:4] + h]   = a[2 * in.imm[2:0] + h];
        d[2 * in.imm[14:12] + h] = b[2 * in.imm[10:8] + h];
        en[2 * in.imm[6:4] + h] = 1; en[2 * in.imm[14:12] + h] = 1;
      end
    end else if (in.op == OP_PACK) begin
      d[in.imm[7:4]]   = a[in.imm[3:0]];
      d[in.imm[15:12]] = b[in.imm[11:8]];
      en[in.imm[7:4]] = 1; en[in.imm[15:12]] = 1;
    end else if (in.scalar && in.dp) begin
      elem_t r0, r1;
      pair_op(in.op, a[0], a[1], b[0], b[1], r0, r1, dz);
      d[2 * in.imm[2:0]] = r0; d[2 * in.imm[2:0] + 1] = r1;
      en[2 * in.imm[2:0]] = 1; en[2 * in.imm[2:0] + 1] = 1;
    end else if (in.scalar) begin
      d[in.imm[3:0]] = lane_op(in.op, a[0], b[0]);
      en[in.imm[3:0]] = 1;
      dz = lane_dz(in.op, a[0], b[0]);
    end else if (in.dp) begin
      logic hidden;
      hidden = 0;
      for (int k = 0; k < NUM_LANES / 2; k++) begin
        elem_t r0, r1;
        logic  kdz;
        pair_op(in.op, a[2*k], a[2*k+1], b[2*k], b[2*k+1], r0, r1, kdz);
        if (k < int'(in.vl)) begin
          d[2*k] = r0; d[2*k+1] = r1;
          en[2*k] = 1; en[2*k+1] = 1;
          dz = dz | kdz;
        end else if (kdz) hidden = 1;
      end
      if (hidden && !dz) n_masked_dz_hidden++;
    end else begin
      logic hidden;
      hidden = 0;
      for (int i = 0; i < NUM_LANES; i++) begin
        if (i < int'(in.vl)) begin
          d[i]  = lane_op(in.op, a[i], b[i]);
          en[i] = 1;
          dz    = dz | lane_dz(in.op, a[i], b[i]);
        end else if (lane_dz(in.op, a[i], b[i])) hidden = 1;
      end
      if (hidden && !dz) n_masked_dz_hidden++;
    end
    if (in.dp && dp_fp_op(in.op)) n_dp_fp++;
    if (dz) n_dz++;
    model[in.vd] = d;
    exp_wb.push_back('{c + int'(lat_of(fu)) + 1, in.vd, en, d, dz});
  endtask

  // ---------------- write-back and store checks ----------------
  // Sampled in the middle of the clock-high phase, when the outputs of the
  // cycle have settled.
  initial forever begin
    @(posedge clk);
    #4;
    if (!rst_n) continue;
    if (ev_masked) n_masked++;
    if (ev_swr) n_swr++;
    if (ev_pack) n_pack++;
    if (ev_mem_operand) n_mem++;
    if (ev_forward) n_fwd++;
    if (ev_stall_raw) n_raw++;
    if (ev_stall_waw) n_waw++;
    if (ev_stall_struct) n_struct++;
    if (wb_valid) begin
      int k;
      k = -1;
      foreach (exp_wb[j]) if (k < 0 && exp_wb[j].cycle == cyc) k = j;
      checks++;
      if (k < 0) begin
        failures++;
        $display("FAIL unexpected write-back of v%0d at %0d", wb_reg, cyc);
      end else begin
        logic bad;
        bad = (wb_reg != exp_wb[k].rd) || (wb_en != exp_wb[k].en) || (wb_dz != exp_wb[k].dz);
        for (int i = 0; i < NUM_LANES; i++)
          if (exp_wb[k].en[i] && wb_data[i] != exp_wb[k].data[i]) bad = 1;
        if (bad) begin
          failures++;
          $display("FAIL write-back v%0d en=%h dz=%b (exp v%0d en=%h dz=%b) at %0d",
                   wb_reg, wb_en, wb_dz, exp_wb[k].rd, exp_wb[k].en, exp_wb[k].dz, cyc);
          for (int i = 0; i < NUM_LANES; i++)
            if (exp_wb[k].en[i] && wb_data[i] != exp_wb[k].data[i])
              $display("   elem %0d got %h exp %h", i, wb_data[i], exp_wb[k].data[i]);
        end
        exp_wb.delete(k);
      end
    end
    foreach (exp_wb[j]) if (exp_wb[j].cycle < cyc) begin
      failures++;
      $display("FAIL missing write-back of v%0d due at %0d", exp_wb[j].rd, exp_wb[j].cycle);
      exp_wb.delete(j);
      break;
    end
    if (st_valid) begin
      checks++;
      if (exp_st.size() == 0 || exp_st[0].cycle != cyc || st_mask != exp_st[0].mask) begin
        failures++;
        $display("FAIL store at %0d", cyc);
      end else begin
        for (int i = 0; i < NUM_LANES; i++)
          if (st_mask[i] && st_data[i] != exp_st[0].data[i]) begin
            failures++;
            $display("FAIL store elem %0d got %h exp %h", i, st_data[i], exp_st[0].data[i]);
            break;
          end
      end
      if (exp_st.size() != 0) void'(exp_st.pop_front());
    end
  end

  // ---------------- driver ----------------
  task automatic send(instr_t in, vec_t mem);
    int c;
    instr = in; mem_data = mem; in_valid = 1;
    forever begin
      #2;
      c = cyc;
      if (in_ready) begin
        model_issue(in, mem, c);
        @(posedge clk); #1;
        break;
      end
      @(posedge clk); #1;
    end
    in_valid = 0;
  endtask

  function automatic vec_t rand_vec(bit fp);
    vec_t v;
    for (int i = 0; i < NUM_LANES; i++) v[i] = fp ? rand_f(100, 150) : $urandom;
    return v;
  endfunction

  function automatic vec_t rand_vec_d();
    vec_t v;
    for (int k = 0; k < NUM_LANES / 2; k++) {v[2*k+1], v[2*k]} = rand_d(1000, 1050);
    return v;
  endfunction

  function automatic instr_t rand_instr();
    instr_t in;
    int     r;
    op_e    ops [14] = '{OP_IADD, OP_ISUB, OP_IAND, OP_IOR, OP_IXOR, OP_MOV, OP_IMUL,
                         OP_IDIV, OP_FADD, OP_FSUB, OP_FMUL, OP_FDIV, OP_PACK, OP_STORE};
    in = '0;
    r  = $urandom_range(99);
    // dividers are rare so that the stream is not dominated by their stalls
    if (r < 3) in.op = OP_IDIV;
    else if (r < 6) in.op = OP_FDIV;
    else begin
      in.op = ops[$urandom_range(13)];
      if (in.op == OP_IDIV || in.op == OP_FDIV) in.op = OP_FADD;
    end
    in.scalar  = (in.op != OP_PACK) && ($urandom_range(3) == 0);
    in.dp      = ($urandom_range(2) == 0);
    in.vl      = VL_W'(in.dp ? $urandom_range(1, NUM_LANES / 2 + 1) : $urandom_range(1, NUM_LANES));
    if ($urandom_range(40) == 0) in.vl = '0;
    in.vd      = vreg_t'($urandom_range(WIN - 1));
    in.vs1     = vreg_t'($urandom_range(WIN - 1));
    in.vs2     = vreg_t'($urandom_range(WIN - 1));
    in.mem_src = ($urandom_range(5) == 0) && in.op != OP_STORE;
    in.imm     = 16'($urandom);
    return in;
  endfunction

  initial begin
    instr_t in;
    for (int i = 0; i < NUM_VREGS; i++) model[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // fill every register with a full-width load
    for (int r = 0; r < NUM_VREGS; r++) begin
      in = '0;
      in.op = OP_MOV; in.mem_src = 1; in.vl = VL_W'(NUM_LANES); in.vd = vreg_t'(r);
      send(in, (r % 3 == 2) ? rand_vec_d() : rand_vec(r % 3 == 0));
    end
    // directed: a masked integer division whose masked-off lanes divide by zero
    begin
      vec_t z;
      z = rand_vec(0);
      for (int i = 0; i < NUM_LANES; i++) z[i] = (i < 4) ? 32'd3 : 32'd0;
      in = '0; in.op = OP_MOV; in.mem_src = 1; in.vl = VL_W'(NUM_LANES); in.vd = vreg_t'(WIN);
      send(in, z);
      in = '0; in.op = OP_IDIV; in.vl = VL_W'(4); in.vd = vreg_t'(WIN + 1);
      in.vs1 = vreg_t'(1); in.vs2 = vreg_t'(WIN);
      send(in, '0);
      // the Selective Writing example: four scalar results written to elements
      // 0..3 of one register and consumed at once by a vector instruction
      for (int e = 0; e < 4; e++) begin
        in = '0; in.op = (e < 2) ? OP_FADD : OP_FMUL; in.scalar = 1;
        in.vd = vreg_t'(4); in.vs1 = vreg_t'(e); in.vs2 = vreg_t'(6 + e / 2); in.imm = 16'(e);
        send(in, '0);
      end
      in = '0; in.op = OP_FADD; in.vl = VL_W'(4); in.vd = vreg_t'(5); in.vs1 = vreg_t'(4);
      in.mem_src = 1;
      send(in, rand_vec(1));
    end
    for (int n = 0; n < NINSTR; n++) begin
      in = rand_instr();
      send(in, in.dp ? rand_vec_d() : rand_vec(1'($urandom_range(1))));
      if ($urandom_range(9) == 0) begin
        repeat ($urandom_range(3)) @(posedge clk);
        #1;
      end
    end
    // read back every register
    for (int r = 0; r < NUM_VREGS; r++) begin
      in = '0; in.op = OP_STORE; in.vl = VL_W'(NUM_LANES); in.vs1 = vreg_t'(r);
      send(in, '0);
    end
    repeat (LAT_MAX + 4) @(posedge clk);
    checks++;
    if (exp_wb.size() != 0 || exp_st.size() != 0) begin
      failures++;
      $display("FAIL %0d write-backs and %0d stores never came", exp_wb.size(), exp_st.size());
    end
    $display("events: masked=%0d swr=%0d pack=%0d mem=%0d forward=%0d stall_raw=%0d stall_waw=%0d stall_struct=%0d dz=%0d masked_dz_hidden=%0d",
             n_masked, n_swr, n_pack, n_mem, n_fwd, n_raw, n_waw, n_struct, n_dz, n_masked_dz_hidden);
    $display("units: int=%0d imul=%0d idiv=%0d fadd=%0d fmul=%0d fdiv=%0d pack=%0d store=%0d",
             n_fu[FU_INT], n_fu[FU_IMUL], n_fu[FU_IDIV], n_fu[FU_FADD], n_fu[FU_FMUL],
             n_fu[FU_FDIV], n_fu[FU_PACK], n_fu[FU_NONE]);
    foreach (n_fu[f]) if (f != 7) begin
      checks++;
      if (n_fu[f] == 0 && f != int'(FU_NONE)) begin failures++; $display("FAIL unit %0d never used", f); end
    end
    checks++; if (n_fu[FU_NONE] == 0) begin failures++; $display("FAIL no store"); end
    checks++; if (n_masked == 0) begin failures++; $display("FAIL no masked instruction"); end
    checks++; if (n_swr == 0) begin failures++; $display("FAIL no selective write"); end
    checks++; if (n_pack == 0) begin failures++; $display("FAIL no PACKPS"); end
    checks++; if (n_mem == 0) begin failures++; $display("FAIL no memory operand"); end
    checks++; if (n_fwd == 0) begin failures++; $display("FAIL no forwarding"); end
    checks++; if (n_raw == 0) begin failures++; $display("FAIL no RAW stall"); end
    checks++; if (n_waw == 0) begin failures++; $display("FAIL no WAW stall"); end
    checks++; if (n_struct == 0) begin failures++; $display("FAIL no structural stall"); end
    $display("dp: instructions=%0d fp=%0d", n_dp, n_dp_fp);
    checks++; if (n_dp_fp == 0) begin failures++; $display("FAIL no double-precision FP"); end
    checks++; if (n_dz == 0) begin failures++; $display("FAIL no division by zero"); end
    checks++; if (n_masked_dz_hidden == 0) begin failures++; $display("FAIL no masked-off division by zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
