// fp_add: IEEE-754 binary floating-point adder/subtracter, parameterised by
// format (EXP_W = 8, MAN_W = 23: single precision; 11/52: double). One lane
// of the simple-FP vector unit.
//
// Two pipeline stages, so the result register is valid LAT_FADD = 2 cycles
// after in_valid (the latency of the simple FP unit of the evaluated machine).
// Stage 1 unpacks both operands, orders them by magnitude and aligns the
// smaller significand with guard, round and sticky bits. Stage 2 adds or
// subtracts, normalises, rounds to nearest-even and packs the result.
// Arithmetic choices of this design: subnormal inputs and results are flushed
// to zero, every NaN result is the canonical quiet NaN (sign 0, exponent all
// ones, top fraction bit 1), and an exact zero difference is +0 (round to
// nearest). Fully pipelined: a new operation may start every cycle.
module fp_add #(
  parameter int unsigned EXP_W = 8,
  parameter int unsigned MAN_W = 23
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     sub,        // 1: a - b
  input  logic [EXP_W+MAN_W:0]     a,
  input  logic [EXP_W+MAN_W:0]     b,
  output logic                     out_valid,
  output logic [EXP_W+MAN_W:0]     y
);
  localparam int unsigned W  = 1 + EXP_W + MAN_W;
  localparam int unsigned M  = MAN_W + 1;        // significand with hidden bit
  localparam int unsigned X  = M + 3;            // plus guard, round, sticky
  localparam int unsigned EI = EXP_W + 2;        // internal exponent width
  localparam int unsigned LZW = $clog2(X + 1);
  localparam logic [EXP_W-1:0] EMAX = '1;
  localparam logic [W-1:0] QNAN = {1'b0, EMAX, 1'b1, {(MAN_W-1){1'b0}}};

  typedef logic [EXP_W-1:0] exp_t;
  typedef logic [M-1:0]     sig_t;
  typedef logic [X-1:0]     ext_t;
  typedef logic [EI-1:0]    iexp_t;

  // ---------------- stage 1: unpack, order, align ----------------
  logic  s1_valid, s1_sign, s1_effsub, s1_special;
  exp_t  s1_exp;
  ext_t  s1_ma, s1_mb;
  logic [W-1:0] s1_special_y;

  logic  sa, sb, a_nan, b_nan, a_inf, b_inf, swap, sticky;
  exp_t  ea, eb, e_big, e_small, diff;
  sig_t  ma, mb, m_big, m_small;
  ext_t  m_small_sh;

  always_comb begin
    sa = a[W-1];
    sb = b[W-1] ^ sub;
    ea = a[W-2 -: EXP_W];
    eb = b[W-2 -: EXP_W];
    ma = (ea == '0) ? '0 : {1'b1, a[MAN_W-1:0]};
    mb = (eb == '0) ? '0 : {1'b1, b[MAN_W-1:0]};
    a_nan = (ea == EMAX) && (a[MAN_W-1:0] != '0);
    b_nan = (eb == EMAX) && (b[MAN_W-1:0] != '0);
    a_inf = (ea == EMAX) && (a[MAN_W-1:0] == '0);
    b_inf = (eb == EMAX) && (b[MAN_W-1:0] == '0);
    swap  = {eb, mb} > {ea, ma};
    e_big   = swap ? eb : ea;
    e_small = swap ? ea : eb;
    m_big   = swap ? mb : ma;
    m_small = swap ? ma : mb;
    diff    = e_big - e_small;
    if (diff >= exp_t'(X)) begin
      m_small_sh = '0;
      sticky     = (m_small != '0);
    end else begin
      m_small_sh = {m_small, 3'b000} >> diff;
      sticky     = ({m_small, 3'b000} & ~({X{1'b1}} << diff)) != '0;
    end
    m_small_sh[0] = m_small_sh[0] | sticky;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_sign    <= swap ? sb : sa;
      s1_effsub  <= sa ^ sb;
      s1_exp     <= e_big;
      s1_ma      <= {m_big, 3'b000};
      s1_mb      <= m_small_sh;
      s1_special <= a_nan | b_nan | a_inf | b_inf;
      if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) s1_special_y <= QNAN;
      else if (a_inf) s1_special_y <= {sa, EMAX, {MAN_W{1'b0}}};
      else            s1_special_y <= {sb, EMAX, {MAN_W{1'b0}}};
    end
  end

  // ---------------- stage 2: add, normalise, round, pack ----------------
  logic [X:0]   sum;
  ext_t         norm;
  iexp_t        exp_n, exp_r;
  logic [LZW-1:0] lz;
  logic         rnd_up;
  logic [M:0]   mant_r;
  logic [W-1:0] res;

  always_comb begin
    sum = s1_effsub ? ({1'b0, s1_ma} - {1'b0, s1_mb}) : ({1'b0, s1_ma} + {1'b0, s1_mb});
    lz  = '0;
    for (int i = 0; i < X; i++) if (sum[i]) lz = LZW'(X - 1 - i);
    if (sum[X]) begin
      norm  = {sum[X:2], sum[1] | sum[0]};
      exp_n = iexp_t'(s1_exp) + iexp_t'(1);
    end else begin
      norm  = sum[X-1:0] << lz;
      exp_n = iexp_t'(s1_exp) - iexp_t'(lz);
    end
    rnd_up = norm[2] & (norm[1] | norm[0] | norm[3]);
    mant_r = {1'b0, norm[X-1:3]} + {{M{1'b0}}, rnd_up};
    exp_r  = exp_n;
    if (mant_r[M]) begin
      mant_r = mant_r >> 1;
      exp_r  = exp_n + iexp_t'(1);
    end
    if (s1_special)                        res = s1_special_y;
    else if (sum == '0)                    res = {s1_effsub ? 1'b0 : s1_sign, {(W-1){1'b0}}};
    else if (exp_r[EI-1] || exp_r == '0)   res = {s1_sign, {(W-1){1'b0}}};           // underflow: flush
    else if (exp_r >= iexp_t'(EMAX))       res = {s1_sign, EMAX, {MAN_W{1'b0}}};     // overflow
    else                                   res = {s1_sign, exp_r[EXP_W-1:0], mant_r[MAN_W-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    if (s1_valid) y <= res;
  end
endmodule
