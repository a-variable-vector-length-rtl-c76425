// simd_unit: a variable-vector-length SIMD unit for a co-designed processor
// whose translation software emits the instructions (top of this design).
//
// Each instruction names the number of low-order lanes it operates on, so a
// vector instruction can use any 1..16 of the 16 lanes: the others neither
// compute nor get written. Scalar instructions execute in lane 0 and write
// their result to any element of the destination register, selected by the
// immediate (Selective Writing). PACKPS gathers two elements from two
// registers into chosen elements of the destination. Together these let
// translated code fill a 512-bit datapath with fewer than 16 independent
// operations and assemble operands without long shuffle sequences.
//
// Structure: in-order issue control -> vector register file read ->
// per-lane operand multiplexers with forwarding and a memory-operand input
// -> 16 lanes, each with a simple-int, int-mul, int-div, simple-FP, FP-mul
// and FP-div unit behind operand pipeline registers, plus one double-
// precision FP add/mul/div slice per lane pair for instructions with 64-bit
// elements (dp: 8 elements of 64 bits per register); a PACKPS unit -> shuffle
// network and element write-enable generation -> one write-back port.
//
// Interface: an instruction (instr_t) is offered with in_valid together with
// the memory operand (mem_data) it may use and is taken in the cycle in which
// in_ready is high. A store drives st_valid/st_data/st_mask one cycle after
// issue; loads are instructions with a memory operand. The write-back port is
// visible at the wb_* outputs. The ev_* outputs pulse once for each event of
// the mechanisms above (for performance counting).
// Timing: an instruction of a unit of latency L writes back L+1 cycles after
// it issues, and a dependent instruction can issue in that cycle.
module simd_unit
  import simd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // instruction input
  input  logic       in_valid,
  input  instr_t     instr,
  input  vec_t       mem_data,
  output logic       in_ready,
  // store port
  output logic       st_valid,
  output vec_t       st_data,
  output lane_mask_t st_mask,
  // write-back port
  output logic       wb_valid,
  output vreg_t      wb_reg,
  output lane_mask_t wb_en,
  output vec_t       wb_data,
  output logic       wb_dz,
  // event pulses
  output logic       ev_issue,
  output logic       ev_masked,      // vector instruction with lanes disabled
  output logic       ev_swr,         // scalar instruction writing an element other than 0
  output logic       ev_pack,
  output logic       ev_mem_operand,
  output logic       ev_forward,
  output logic       ev_stall_raw,
  output logic       ev_stall_waw,
  output logic       ev_stall_struct
);
  logic       fire;
  fu_e        fire_fu;
  lane_mask_t fire_lanes;

  logic             meta_valid, meta_scalar, meta_dp, meta_pack;
  vreg_t            meta_reg;
  logic [IDX_W-1:0] meta_elem;
  lane_mask_t       meta_lanes;

  issue_ctrl u_issue (
    .clk, .rst_n, .in_valid, .instr, .in_ready, .fire, .fire_fu, .fire_lanes,
    .wb_meta_valid(meta_valid), .wb_meta_reg(meta_reg), .wb_meta_scalar(meta_scalar),
    .wb_meta_dp(meta_dp),
    .wb_meta_elem(meta_elem), .wb_meta_lanes(meta_lanes), .wb_meta_pack(meta_pack),
    .stall_raw(ev_stall_raw), .stall_waw(ev_stall_waw), .stall_struct(ev_stall_struct));

  vec_t rf1, rf2;
  vrf u_vrf (
    .clk, .ra1(instr.vs1), .rd1(rf1), .ra2(instr.vs2), .rd2(rf2),
    .we(wb_valid), .wa(wb_reg), .wen(wb_en), .wd(wb_data));

  vec_t       opa, opb;
  lane_mask_t fwd_a, fwd_b;
  operand_network u_opnd (
    .vs1(instr.vs1), .vs2(instr.vs2), .mem_src(instr.mem_src),
    .rf1, .rf2, .mem_data,
    .wb_valid, .wb_reg, .wb_en, .wb_data,
    .opa, .opb, .fwd_a, .fwd_b);

  // FP instructions with 64-bit elements run on the lane-pair slices; all
  // other instructions run on the 32-bit lanes.
  logic dp_fp;
  assign dp_fp = instr.dp && (fire_fu == FU_FADD || fire_fu == FU_FMUL || fire_fu == FU_FDIV);

  vec_t       sp_res, lane_res;
  lane_mask_t sp_valid, sp_dz, lane_valid, lane_dz;
  for (genvar i = 0; i < NUM_LANES; i++) begin : g_lane
    simd_lane u_lane (
      .clk, .rst_n,
      .issue(fire && fire_lanes[i] && !dp_fp && fire_fu != FU_PACK && fire_fu != FU_NONE),
      .fu(fire_fu), .op(instr.op), .a(opa[i]), .b(opb[i]),
      .res_valid(sp_valid[i]), .res(sp_res[i]), .res_dz(sp_dz[i]));
  end

  for (genvar k = 0; k < NUM_LANES / 2; k++) begin : g_dp
    logic        dv, ddz;
    logic [63:0] dres;
    dp_lane u_dp (
      .clk, .rst_n,
      .issue(fire && fire_lanes[2*k] && dp_fp),
      .fu(fire_fu), .op(instr.op), .a({opa[2*k+1], opa[2*k]}), .b({opb[2*k+1], opb[2*k]}),
      .res_valid(dv), .res(dres), .res_dz(ddz));
    always_comb begin
      lane_valid[2*k]   = sp_valid[2*k]   | dv;
      lane_valid[2*k+1] = sp_valid[2*k+1] | dv;
      lane_res[2*k]     = dv ? dres[31:0]  : sp_res[2*k];
      lane_res[2*k+1]   = dv ? dres[63:32] : sp_res[2*k+1];
      lane_dz[2*k]      = dv ? ddz  : sp_dz[2*k];
      lane_dz[2*k+1]    = dv ? 1'b0 : sp_dz[2*k+1];
    end
  end

  vec_t       pack_res;
  lane_mask_t pack_en;
  logic       pack_valid;
  packps_unit u_pack (
    .clk, .rst_n, .in_valid(fire && fire_fu == FU_PACK),
    .a(opa), .b(opb), .imm(instr.imm), .dp(instr.dp),
    .out_valid(pack_valid), .y(pack_res), .y_en(pack_en));

  wb_shuffle u_shuffle (
    .meta_valid, .meta_reg, .meta_scalar, .meta_dp, .meta_elem, .meta_lanes, .meta_pack,
    .lane_res, .lane_dz, .pack_res, .pack_en,
    .wb_valid, .wb_reg, .wb_en, .wb_data, .wb_dz);

  // Store port: the first operand, masked by the active lanes.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_valid <= 1'b0;
    else        st_valid <= fire && instr.op == OP_STORE;
  end

  always_ff @(posedge clk) begin
    if (fire && instr.op == OP_STORE) begin
      st_data <= opa;
      st_mask <= fire_lanes;
    end
  end

  always_comb begin
    ev_issue       = fire;
    ev_masked      = fire && !instr.scalar && fire_lanes != '1;
    ev_swr         = fire && instr.scalar && instr.op != OP_STORE &&
                     (instr.dp ? instr.imm[IDX_W-2:0] != '0 : instr.imm[IDX_W-1:0] != '0);
    ev_pack        = fire && fire_fu == FU_PACK;
    ev_mem_operand = fire && instr.mem_src;
    ev_forward     = fire && (((fwd_a & fire_lanes) != '0) || ((fwd_b & fire_lanes) != '0) ||
                              (fire_fu == FU_PACK && (fwd_a != '0 || fwd_b != '0)));
  end

  // Results arrive exactly when the write-back queue expects them.
  a_lane_result: assert property (@(posedge clk) disable iff (!rst_n)
    meta_valid && !meta_pack |-> lane_valid[0] || meta_lanes == '0 && !meta_scalar);
  a_pack_result: assert property (@(posedge clk) disable iff (!rst_n)
    meta_valid && meta_pack |-> pack_valid);
  a_lanes_result: assert property (@(posedge clk) disable iff (!rst_n)
    meta_valid && !meta_pack && !meta_scalar |-> (lane_valid & meta_lanes) == meta_lanes);
endmodule
