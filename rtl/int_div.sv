// int_div: signed 32-bit integer divider, one lane of the integer
// multiply/divide vector unit.
//
// Iterative and not pipelined: the quotient is valid LAT = 10 cycles after
// in_valid (the integer divide latency of the evaluated machine), busy is
// high meanwhile. Restoring division on magnitudes, four quotient bits per
// cycle for eight cycles, then the sign is applied. The quotient truncates
// toward zero. Division by zero returns all ones and raises dz; the
// overflow case -2^31 / -1 returns -2^31. These conventions are this
// design's choices.
module int_div #(
  parameter int unsigned LAT = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        busy,
  output logic        out_valid,
  output logic [31:0] y,
  output logic        dz
);
  logic [3:0]  cnt;
  logic        neg, zero_div;
  logic [31:0] n, d, q, r;

  logic [31:0] rn;
  logic [31:0] qn, nn;
  always_comb begin
    rn = r;
    qn = q;
    nn = n;
    for (int k = 0; k < 4; k++) begin
      logic [32:0] t;
      t  = {rn, nn[31]};
      nn = nn << 1;
      if (t >= {1'b0, d}) begin
        t  = t - {1'b0, d};
        qn = {qn[30:0], 1'b1};
      end else begin
        qn = {qn[30:0], 1'b0};
      end
      rn = t[31:0];
    end
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
        cnt <= cnt + 4'd1;
        if (cnt == 4'(LAT - 2)) begin
          busy      <= 1'b0;
          out_valid <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !busy) begin
      neg      <= a[31] ^ b[31];
      zero_div <= (b == 32'd0);
      n        <= a[31] ? -a : a;
      d        <= b[31] ? -b : b;
      q        <= '0;
      r        <= '0;
    end else if (busy && cnt < 4'd8) begin
      q <= qn;
      r <= rn;
      n <= nn;
    end
    if (busy && cnt == 4'(LAT - 2)) begin
      y  <= zero_div ? 32'hFFFF_FFFF : (neg ? -q : q);
      dz <= zero_div;
    end
  end
endmodule
