// issue_ctrl: in-order, one-instruction-per-cycle issue logic of the SIMD
// unit.
//
// An instruction offered with in_valid issues (fire) in the cycle in which
// none of these holds, otherwise it stalls with in_ready low:
//  * RAW: a source register has a write outstanding that is not being
//    written back this cycle (a write-back this cycle is forwarded);
//  * WAW: the destination has a write outstanding (so at most one write per
//    register is ever in flight and results retire in program order per
//    register);
//  * structure: the write-back slot the result would need is already taken
//    by an earlier, longer-latency instruction, or the non-pipelined divider
//    of the requested kind is still busy.
// Timing: operands are selected in the issue cycle t and captured in the
// lanes' pipeline registers; a unit of latency L has its result registered
// in cycle t+L+1, which is the write-back cycle. A dependent instruction can
// therefore issue in cycle t+L+1 and takes the value from the forwarding
// path. The write-back queue holds the destination and element-enable
// information of every instruction in flight, indexed by cycles to
// write-back; entry 0 is the write-back of the current cycle.
module issue_ctrl
  import simd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  instr_t     instr,
  output logic       in_ready,
  output logic       fire,
  output fu_e        fire_fu,
  output lane_mask_t fire_lanes,
  // write-back of the current cycle
  output logic             wb_meta_valid,
  output vreg_t            wb_meta_reg,
  output logic             wb_meta_scalar,
  output logic             wb_meta_dp,
  output logic [IDX_W-1:0] wb_meta_elem,
  output lane_mask_t       wb_meta_lanes,
  output logic             wb_meta_pack,
  // stall events of the current cycle
  output logic       stall_raw,
  output logic       stall_waw,
  output logic       stall_struct
);
  typedef struct packed {
    logic             valid;
    vreg_t            rd;
    logic             scalar;
    logic             dp;
    logic [IDX_W-1:0] elem;
    lane_mask_t       lanes;
    logic             pack;
  } wbq_t;

  localparam int unsigned QDEPTH = LAT_MAX + 2;

  wbq_t wbq [QDEPTH];
  logic [NUM_VREGS-1:0] pending;
  logic [4:0] idiv_cnt, fdiv_cnt;

  fu_e         fu;
  int unsigned lat;
  logic        uses_a, uses_b, writes;
  logic        wb_now_a, wb_now_b, wb_now_d;

  always_comb begin
    fu     = fu_of(instr.op);
    lat    = lat_of(fu);
    uses_a = instr.op != OP_MOV;
    uses_b = !instr.mem_src && instr.op != OP_STORE;
    writes = instr.op != OP_STORE;
    wb_now_a = wbq[0].valid && wbq[0].rd == instr.vs1;
    wb_now_b = wbq[0].valid && wbq[0].rd == instr.vs2;
    wb_now_d = wbq[0].valid && wbq[0].rd == instr.vd;

    stall_raw = in_valid && ((uses_a && pending[instr.vs1] && !wb_now_a) ||
                             (uses_b && pending[instr.vs2] && !wb_now_b));
    stall_waw = in_valid && writes && pending[instr.vd] && !wb_now_d;
    stall_struct = in_valid && ((writes && wbq[lat + 1].valid) ||
                                (fu == FU_IDIV && idiv_cnt != 0) ||
                                (fu == FU_FDIV && fdiv_cnt != 0));
    in_ready   = !(stall_raw || stall_waw || stall_struct);
    fire       = in_valid && in_ready;
    fire_fu    = fu;
    fire_lanes = lanes_of(instr.scalar, instr.dp, instr.vl);

    wb_meta_valid  = wbq[0].valid;
    wb_meta_reg    = wbq[0].rd;
    wb_meta_scalar = wbq[0].scalar;
    wb_meta_dp     = wbq[0].dp;
    wb_meta_elem   = wbq[0].elem;
    wb_meta_lanes  = wbq[0].lanes;
    wb_meta_pack   = wbq[0].pack;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < QDEPTH; k++) wbq[k] <= '0;
      pending  <= '0;
      idiv_cnt <= '0;
      fdiv_cnt <= '0;
    end else begin
      for (int k = 0; k < QDEPTH - 1; k++) wbq[k] <= wbq[k + 1];
      wbq[QDEPTH - 1] <= '0;
      if (wbq[0].valid) pending[wbq[0].rd] <= 1'b0;
      if (idiv_cnt != 0) idiv_cnt <= idiv_cnt - 5'd1;
      if (fdiv_cnt != 0) fdiv_cnt <= fdiv_cnt - 5'd1;
      if (fire && writes) begin
        wbq[lat] <= '{valid: 1'b1, rd: instr.vd, scalar: instr.scalar, dp: instr.dp,
                      elem: instr.imm[IDX_W-1:0], lanes: fire_lanes,
                      pack: fu == FU_PACK};
        pending[instr.vd] <= 1'b1;
      end
      if (fire && fu == FU_IDIV) idiv_cnt <= 5'(LAT_IDIV - 1);
      if (fire && fu == FU_FDIV) fdiv_cnt <= 5'(LAT_FDIV - 1);
    end
  end

  // A write-back slot is never claimed twice.
  a_slot_free: assert property (@(posedge clk) disable iff (!rst_n)
    fire && writes |-> !wbq[lat + 1].valid);
endmodule
