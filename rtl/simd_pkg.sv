// simd_pkg: types and constants shared by the variable-vector-length SIMD unit.
//
// The unit is 512 bits wide and split into 16 lanes of 32-bit elements
// (single-precision "PS"/"SS" instructions, 16 elements addressable by the
// 4-bit element fields of PACKPS). There are 128 vector registers and one
// functional unit of each kind, with the latencies of the evaluated machine:
// simple int 1, int mul 3, int div 10, simple FP 2, FP mul 4, FP div 20.
//
// Instruction format (this design's own encoding; the paper only says that
// the lane count and, for scalar instructions, the destination element are
// carried in the instruction):
//   op      operation
//   scalar  1 = scalar form (lane 0 only, result written to element imm[3:0])
//   dp      1 = 64-bit elements (double precision): each element occupies a
//           pair of adjacent lanes, vl counts elements (1..8), a scalar
//           result goes to 64-bit element imm[2:0], FP operations use the
//           double-precision units and PACKPS moves 64-bit elements
//   vl      number of active low-order elements of a vector instruction
//   vd/vs1/vs2 register numbers
//   mem_src 1 = the second operand comes from the memory port, not vs2
//   imm     16-bit immediate (SWR element index or PACKPS selectors)
package simd_pkg;

  parameter int unsigned VLEN      = 512;
  parameter int unsigned ELEM_W    = 32;
  parameter int unsigned NUM_LANES = VLEN / ELEM_W;
  parameter int unsigned NUM_VREGS = 128;
  parameter int unsigned REG_W     = $clog2(NUM_VREGS);
  parameter int unsigned VL_W      = $clog2(NUM_LANES + 1);
  parameter int unsigned IDX_W     = $clog2(NUM_LANES);

  // Functional-unit latencies in execute cycles.
  parameter int unsigned LAT_INT  = 1;
  parameter int unsigned LAT_IMUL = 3;
  parameter int unsigned LAT_IDIV = 10;
  parameter int unsigned LAT_FADD = 2;
  parameter int unsigned LAT_FMUL = 4;
  parameter int unsigned LAT_FDIV = 20;
  parameter int unsigned LAT_PACK = 1;
  parameter int unsigned LAT_MAX  = 20;

  typedef logic [ELEM_W-1:0] elem_t;
  typedef elem_t [NUM_LANES-1:0] vec_t;
  typedef logic [NUM_LANES-1:0] lane_mask_t;
  typedef logic [REG_W-1:0] vreg_t;

  typedef enum logic [4:0] {
    OP_IADD  = 5'd0,
    OP_ISUB  = 5'd1,
    OP_IAND  = 5'd2,
    OP_IOR   = 5'd3,
    OP_IXOR  = 5'd4,
    OP_MOV   = 5'd5,   // copy of the second operand (a load when mem_src = 1)
    OP_IMUL  = 5'd6,
    OP_IDIV  = 5'd7,
    OP_FADD  = 5'd8,
    OP_FSUB  = 5'd9,
    OP_FMUL  = 5'd10,
    OP_FDIV  = 5'd11,
    OP_PACK  = 5'd12,  // PACKPS
    OP_STORE = 5'd13   // masked store of vs1 to the memory port
  } op_e;

  // Functional unit classes, one of each in the SIMD unit.
  typedef enum logic [2:0] {
    FU_INT  = 3'd0,
    FU_IMUL = 3'd1,
    FU_IDIV = 3'd2,
    FU_FADD = 3'd3,
    FU_FMUL = 3'd4,
    FU_FDIV = 3'd5,
    FU_PACK = 3'd6,
    FU_NONE = 3'd7
  } fu_e;

  typedef struct packed {
    op_e              op;
    logic             scalar;
    logic             dp;      // 64-bit elements: each uses a pair of lanes
    logic [VL_W-1:0]  vl;
    vreg_t            vd;
    vreg_t            vs1;
    vreg_t            vs2;
    logic             mem_src;
    logic [15:0]      imm;
  } instr_t;

  function automatic fu_e fu_of(op_e op);
    case (op)
      OP_IMUL: return FU_IMUL;
      OP_IDIV: return FU_IDIV;
      OP_FADD, OP_FSUB: return FU_FADD;
      OP_FMUL: return FU_FMUL;
      OP_FDIV: return FU_FDIV;
      OP_PACK: return FU_PACK;
      OP_STORE: return FU_NONE;
      default: return FU_INT;
    endcase
  endfunction

  function automatic int unsigned lat_of(fu_e fu);
    case (fu)
      FU_IMUL: return LAT_IMUL;
      FU_IDIV: return LAT_IDIV;
      FU_FADD: return LAT_FADD;
      FU_FMUL: return LAT_FMUL;
      FU_FDIV: return LAT_FDIV;
      FU_PACK: return LAT_PACK;
      default: return LAT_INT;
    endcase
  endfunction

  // Lanes enabled by an instruction: the vl lowest lanes of a vector
  // instruction, lane 0 alone for a scalar one. vl = 0 enables no lane.
  // With 64-bit elements (dp) vl counts element pairs (1..NUM_LANES/2, larger
  // values enable all lanes) and a scalar instruction enables lanes 0 and 1.
  function automatic lane_mask_t lanes_of(logic scalar, logic dp, logic [VL_W-1:0] vl);
    lane_mask_t m;
    for (int i = 0; i < NUM_LANES; i++)
      if (dp) m[i] = scalar ? (i < 2) : (i / 2 < int'(vl));
      else    m[i] = scalar ? (i == 0) : (i < int'(vl));
    return m;
  endfunction

  // Element write enables of a scalar result written to element e (SWR).
  function automatic lane_mask_t scalar_en(logic dp, logic [IDX_W-1:0] e);
    if (dp) return lane_mask_t'(3) << (2 * e[IDX_W-2:0]);
    return lane_mask_t'(1) << e;
  endfunction

endpackage
