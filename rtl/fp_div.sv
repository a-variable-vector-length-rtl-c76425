// fp_div: IEEE-754 binary floating-point divider, parameterised by format
// (EXP_W = 8, MAN_W = 23: single; 11/52: double). One lane of the FP
// multiply/divide vector unit.
//
// Iterative and not pipelined: an operation accepted with in_valid gives its
// result LAT = 20 cycles later (the FP divide latency of the evaluated
// machine) and busy is high in between; the issue logic must not start
// another division meanwhile. The significand quotient is formed by restoring
// division, STEP_BITS quotient bits per cycle (2 for single, 4 for double
// precision fit the 20 cycles), with at least three bits beyond the result
// precision; the remainder joins the sticky bit and the result is rounded to
// nearest-even. dz flags a finite non-zero dividend divided by zero.
// Subnormals are flushed to zero and NaN results are the canonical quiet NaN
// (this design's choices).
module fp_div #(
  parameter int unsigned EXP_W     = 8,
  parameter int unsigned MAN_W     = 23,
  parameter int unsigned STEP_BITS = 2,
  parameter int unsigned LAT       = 20
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [EXP_W+MAN_W:0] a,
  input  logic [EXP_W+MAN_W:0] b,
  output logic                 busy,
  output logic                 out_valid,
  output logic [EXP_W+MAN_W:0] y,
  output logic                 dz
);
  localparam int unsigned W     = 1 + EXP_W + MAN_W;
  localparam int unsigned M     = MAN_W + 1;
  localparam int unsigned EI    = EXP_W + 2;
  localparam int unsigned STEPS = (M + 4 + STEP_BITS - 1) / STEP_BITS;
  localparam int unsigned QB    = STEPS * STEP_BITS;     // quotient bits, >= M + 4
  localparam logic [EXP_W-1:0] EMAX = '1;
  localparam logic [EI-1:0]    BIAS = EI'((1 << (EXP_W - 1)) - 1);
  localparam logic [W-1:0] QNAN = {1'b0, EMAX, 1'b1, {(MAN_W-1){1'b0}}};

  logic [4:0]     cnt;
  logic           sign, special, sp_dz;
  logic [EI-1:0]  exp;
  logic [M-1:0]   divisor;
  logic [M+1:0]   rem;
  logic [QB-1:0]  q;
  logic [W-1:0]   special_y;

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

  // STEP_BITS restoring-division steps: quotient bit = (rem >= divisor),
  // then the (reduced) remainder is doubled.
  logic [M+1:0]         r_n;
  logic [STEP_BITS-1:0] q_n;
  always_comb begin
    r_n = rem;
    for (int k = STEP_BITS - 1; k >= 0; k--) begin
      q_n[k] = r_n >= {2'b00, divisor};
      r_n    = (q_n[k] ? r_n - {2'b00, divisor} : r_n) << 1;
    end
  end

  // Normalise and round the finished quotient (q[QB-1] has weight 1).
  logic [M-1:0]  m;
  logic          g, st;
  logic [M:0]    mr;
  logic [EI-1:0] e;
  logic [W-1:0]  res;
  always_comb begin
    if (q[QB-1]) begin
      m  = q[QB-1 -: M];
      g  = q[QB-1-M];
      st = (q[QB-2-M:0] != '0) || (rem != '0);
      e  = exp;
    end else begin
      m  = q[QB-2 -: M];
      g  = q[QB-2-M];
      st = (q[QB-3-M:0] != '0) || (rem != '0);
      e  = exp - EI'(1);
    end
    mr = {1'b0, m} + {{M{1'b0}}, g & (st | m[0])};
    if (mr[M]) begin
      mr = mr >> 1;
      e  = e + EI'(1);
    end
    if (special)                   res = special_y;
    else if (e[EI-1] || e == '0)   res = {sign, {(W-1){1'b0}}};
    else if (e >= EI'(EMAX))       res = {sign, EMAX, {MAN_W{1'b0}}};
    else                           res = {sign, e[EXP_W-1:0], mr[MAN_W-1:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      cnt       <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid && !busy) begin
        busy <= 1'b1;
        cnt  <= '0;
      end else if (busy) begin
        cnt <= cnt + 5'd1;
        if (cnt == 5'(LAT - 2)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !busy) begin
      sign    <= sgn;
      exp     <= EI'(ea) - EI'(eb) + BIAS;
      divisor <= {1'b1, b[MAN_W-1:0]};
      rem     <= {2'b00, 1'b1, a[MAN_W-1:0]};
      q       <= '0;
      special <= a_nan | b_nan | a_inf | b_inf | a_zero | b_zero;
      sp_dz   <= b_zero && !a_zero && !a_nan && !a_inf;
      if (a_nan || b_nan || (a_inf && b_inf) || (a_zero && b_zero)) special_y <= QNAN;
      else if (a_inf || b_zero) special_y <= {sgn, EMAX, {MAN_W{1'b0}}};
      else                      special_y <= {sgn, {(W-1){1'b0}}};
    end else if (busy && cnt < 5'(STEPS)) begin
      rem <= r_n;
      q   <= {q[QB-STEP_BITS-1:0], q_n};
    end
    if (busy && cnt == 5'(LAT - 2)) begin
      y  <= res;
      dz <= sp_dz;
    end
  end
endmodule
