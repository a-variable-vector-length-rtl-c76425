// fp_mul: IEEE-754 binary floating-point multiplier, parameterised by format
// (EXP_W = 8, MAN_W = 23: single; 11/52: double). One lane of the FP
// multiply/divide vector unit.
//
// Four pipeline stages, so the result is valid LAT_FMUL = 4 cycles after
// in_valid (the FP multiply latency of the evaluated machine). Stage 1 forms
// the significand product and the biased exponent sum, stage 2 normalises
// and rounds to nearest-even, stages 3 and 4 carry the packed result (they
// stand for the deeper multiplier array of a real implementation).
// Subnormals are flushed to zero and NaN results are the canonical quiet
// NaN; these are this design's choices. Fully pipelined.
module fp_mul #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 23
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [EXP_W+MAN_W:0] a,
  input  logic [EXP_W+MAN_W:0] b,
  output logic                 out_valid,
  output logic [EXP_W+MAN_W:0] y
);
  localparam int unsigned W  = 1 + EXP_W + MAN_W;
  localparam int unsigned M  = MAN_W + 1;
  localparam int unsigned EI = EXP_W + 2;
  localparam logic [EXP_W-1:0] EMAX = '1;
  localparam logic [EI-1:0]    BIAS = EI'((1 << (EXP_W - 1)) - 1);
  localparam logic [W-1:0] QNAN = {1'b0, EMAX, 1'b1, {(MAN_W-1){1'b0}}};

  logic [3:0]     v;
  logic           s1_sign, s1_special;
  logic [EI-1:0]  s1_exp;
  logic [2*M-1:0] s1_prod;
  logic [W-1:0]   s1_special_y, s2_y, s3_y, s4_y;

  logic [EXP_W-1:0] ea, eb;
  logic a_zero, b_zero, a_nan, b_nan, a_inf, b_inf, sgn;
  always_comb begin
    ea = a[W-2 -: EXP_W];
    eb = b[W-2 -: EXP_W];
    sgn    = a[W-1] ^ b[W-1];
    a_zero = (ea == '0);
    b_zero = (eb == '0);
    a_nan  = (ea == EMAX) && (a[MAN_W-1:0] != '0);
    b_nan  = (eb == EMAX) && (b[MAN_W-1:0] != '0);
    a_inf  = (ea == EMAX) && (a[MAN_W-1:0] == '0);
    b_inf  = (eb == EMAX) && (b[MAN_W-1:0] == '0);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_sign    <= sgn;
      s1_exp     <= EI'(ea) + EI'(eb) - BIAS;
      s1_prod    <= {1'b1, a[MAN_W-1:0]} * {1'b1, b[MAN_W-1:0]};
      s1_special <= a_nan | b_nan | a_inf | b_inf | a_zero | b_zero;
      if (a_nan || b_nan || ((a_inf || b_inf) && (a_zero || b_zero))) s1_special_y <= QNAN;
      else if (a_inf || b_inf) s1_special_y <= {sgn, EMAX, {MAN_W{1'b0}}};
      else                     s1_special_y <= {sgn, {(W-1){1'b0}}};
    end
  end

  logic [M-1:0]  m;
  logic          g, st;
  logic [M:0]    mr;
  logic [EI-1:0] e;
  logic [W-1:0]  res;
  always_comb begin
    if (s1_prod[2*M-1]) begin
      m  = s1_prod[2*M-1 -: M];
      g  = s1_prod[M-1];
      st = s1_prod[M-2:0] != '0;
      e  = s1_exp + EI'(1);
    end else begin
      m  = s1_prod[2*M-2 -: M];
      g  = s1_prod[M-2];
      st = s1_prod[M-3:0] != '0;
      e  = s1_exp;
    end
    mr = {1'b0, m} + {{M{1'b0}}, g & (st | m[0])};
    if (mr[M]) begin
      mr = mr >> 1;
      e  = e + EI'(1);
    end
    if (s1_special)                res = s1_special_y;
    else if (e[EI-1] || e == '0)   res = {s1_sign, {(W-1){1'b0}}};
    else if (e >= EI'(EMAX))       res = {s1_sign, EMAX, {MAN_W{1'b0}}};
    else                           res = {s1_sign, e[EXP_W-1:0], mr[MAN_W-1:0]};
  end

  always_ff @(posedge clk) begin
    s2_y <= res;
    s3_y <= s2_y;
    s4_y <= s3_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
  end

  assign out_valid = v[3];
  assign y = s4_y;
endmodule
