// fp32_add: combinational IEEE-754 single-precision adder.
//
// The operand with the larger magnitude is kept, the other is shifted right
// into three extra bits (guard, round, sticky), the significands are added
// or subtracted, the sum is normalised and rounded to nearest, ties to even.
// As in fp32_mul, subnormal inputs count as zero and results below the
// smallest normal number are flushed to zero (this design's choice).  An
// exact cancellation gives +0.  Infinities propagate; NaN or inf-inf give
// 0x7FC00000.  Purely combinational.
//
// Paper vs. choice: the paper asks only for single-precision arithmetic; the
// flush-to-zero of subnormals and the rounding mode are this design's choice.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] x, z;            // |x| >= |z|
  logic [7:0]  ex, ez, d;
  logic [26:0] mx, mz, mz_sh;   // 1.23 + 3 extra bits
  logic        stk;
  logic [27:0] s;
  logic [26:0] sn;
  logic [4:0]  lz;
  logic signed [9:0] ey;
  logic        rnd;
  logic [24:0] mr;

  always_comb begin
    stk = 1'b0;
    lz  = 5'd0;
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    ex = x[30:23]; ez = z[30:23];
    mx = (ex == 8'd0) ? 27'd0 : {1'b1, x[22:0], 3'b000};
    mz = (ez == 8'd0) ? 27'd0 : {1'b1, z[22:0], 3'b000};
    d  = ex - ez;
    if (d >= 8'd27) begin
      mz_sh = {26'd0, |mz};
    end else begin
      mz_sh = mz >> d;
      stk   = |(mz & ((27'd1 << d) - 27'd1));
      mz_sh[0] = mz_sh[0] | stk;
    end
    if (x[31] == z[31]) s = {1'b0, mx} + {1'b0, mz_sh};
    else                s = {1'b0, mx} - {1'b0, mz_sh};
    ey = 10'(signed'({2'b00, ex}));
    if (s[27]) begin
      sn = s[27:1];
      sn[0] = sn[0] | s[0];
      ey = ey + 10'sd1;
    end else begin
      lz = 5'd0;
      for (int i = 0; i <= 26; i++) begin
        if (s[i]) lz = 5'(26 - i);    // the highest set bit wins
      end
      sn = s[26:0] << lz;
      ey = ey - 10'(signed'({5'b00000, lz}));
    end
    rnd = sn[2] & (sn[1] | sn[0] | sn[3]);
    mr  = {1'b0, sn[26:3]} + {24'd0, rnd};
    if (mr[24]) begin
      mr = mr >> 1;
      ey = ey + 10'sd1;
    end
    if (ex == 8'hFF || ez == 8'hFF) begin
      if ((ex == 8'hFF && x[22:0] != 0) || (ez == 8'hFF && z[22:0] != 0) ||
          (ex == 8'hFF && ez == 8'hFF && x[31] != z[31]))
        y = 32'h7FC0_0000;
      else
        y = {x[31], 8'hFF, 23'd0};
    end else if (s == 28'd0 || ex == 8'd0) begin
      y = 32'd0;
    end else if (ey >= 10'sd255) begin
      y = {x[31], 8'hFF, 23'd0};
    end else if (ey <= 10'sd0) begin
      y = {x[31], 31'd0};
    end else begin
      y = {x[31], ey[7:0], mr[22:0]};
    end
  end
endmodule
