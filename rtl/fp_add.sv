// fp_add: pipelined IEEE-754 single-precision adder.
//
// Computes y = a + b and delivers it LAT clock cycles after a, b and
// in_valid are presented (out_valid follows in_valid with the same delay).
// A new operation may start every cycle. The sum is formed in one
// combinational stage (align, add or subtract, normalise, round to nearest
// even) and then passed through LAT registers, so the latency is a parameter
// a synthesis tool can retime.
//
// The paper builds its SOR datapath on a vendor's pipelined floating-point
// library and names its adder latency FPAddCycles without giving a value or
// the unit's insides; this adder is this design's own. Simplifications, all
// this design's choice: subnormal inputs are read as zero and results that
// would be subnormal are flushed to signed zero; an exponent overflow gives
// infinity; NaN and infinity inputs are not treated specially.
module fp_add
  import sor_pkg::*;
#(
  parameter int unsigned LAT = 3   // pipeline depth, >= 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t y
);

  // ---------------- combinational sum ----------------
  fp32_t sum;

  always_comb begin
    logic        sa, sb, sx, sy;
    logic [7:0]  ea, eb, ex, ey;
    logic [23:0] ma, mb, mx, my;
    logic [7:0]  d;
    logic [26:0] ax, ay;        // mantissa with guard, round, sticky bits
    logic [27:0] s;             // sum with carry bit
    logic [4:0]  lz;
    logic signed [9:0] e;
    logic [23:0] mr;
    logic        rnd;
    logic [24:0] mround;

    sa = a[31]; ea = a[30:23]; ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    if (ea == 8'd0) sa = 1'b0;
    if (eb == 8'd0) sb = 1'b0;

    // x is the operand of larger magnitude
    if ({ea, ma} >= {eb, mb}) begin
      sx = sa; ex = ea; mx = ma; sy = sb; ey = eb; my = mb;
    end else begin
      sx = sb; ex = eb; mx = mb; sy = sa; ey = ea; my = ma;
    end

    d  = ex - ey;
    ax = {mx, 3'b000};
    if (d >= 8'd27) begin
      ay = {26'd0, |my};
    end else begin
      ay = {my, 3'b000} >> d;
      // sticky: any bit shifted out
      if ((({my, 3'b000} & ((27'd1 << d) - 27'd1))) != 27'd0) ay[0] = 1'b1;
    end

    if (sx == sy) s = {1'b0, ax} + {1'b0, ay};
    else          s = {1'b0, ax} - {1'b0, ay};

    e  = {2'b00, ex};
    lz = 5'd0;
    if (s[27]) begin
      s = {1'b0, s[27:2], s[1] | s[0]};
      e = e + 10'sd1;
    end else begin
      for (int k = 26; k >= 0; k--) begin
        if (s[k]) begin
          lz = 5'(26 - k);
          break;
        end
      end
      s = s << lz;
      e = e - 10'(lz);
    end

    // s[26] is now the leading one; s[2] guard, s[1:0] round and sticky
    mr     = s[26:3];
    rnd    = s[2] & (s[1] | s[0] | s[3]);
    mround = {1'b0, mr} + 25'(rnd);
    if (mround[24]) begin
      mround = mround >> 1;
      e      = e + 10'sd1;
    end

    if (s == 28'd0 || ex == 8'd0) begin
      // exact cancellation (or both operands zero): +0, -0 only for -0 + -0
      sum = (ex == 8'd0) ? {sa & sb, 31'd0} : FP_ZERO;
    end else if (e <= 10'sd0) begin
      sum = {sx, 31'd0};                     // flush to zero
    end else if (e >= 10'sd255) begin
      sum = {sx, 8'hff, 23'd0};              // infinity
    end else begin
      sum = {sx, e[7:0], mround[22:0]};
    end
  end

  // ---------------- output pipeline ----------------
  fp32_t pipe_d [LAT];
  logic  pipe_v [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LAT; k++) begin
        pipe_d[k] <= FP_ZERO;
        pipe_v[k] <= 1'b0;
      end
    end else begin
      pipe_d[0] <= sum;
      pipe_v[0] <= in_valid;
      for (int k = 1; k < LAT; k++) begin
        pipe_d[k] <= pipe_d[k-1];
        pipe_v[k] <= pipe_v[k-1];
      end
    end
  end

  assign y         = pipe_d[LAT-1];
  assign out_valid = pipe_v[LAT-1];

endmodule
