// fp_mul: pipelined IEEE-754 single-precision multiplier.
//
// Computes y = a * b and delivers it LAT clock cycles after the operands and
// in_valid are presented; out_valid follows in_valid with the same delay and
// a new product may start every cycle. The product is formed in one
// combinational stage (24x24-bit mantissa product, exponent sum, one-bit
// normalisation, round to nearest even) followed by LAT registers.
//
// The paper takes its multiplier from a vendor's pipelined floating-point
// library and gives neither its latency nor its insides: this unit is this
// design's own. As in fp_add, subnormals are flushed to signed zero, an
// exponent overflow gives infinity and NaN/infinity inputs are not treated
// specially.
module fp_mul
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

  fp32_t prod;

  always_comb begin
    logic        sy;
    logic [7:0]  ea, eb;
    logic [47:0] p;
    logic signed [9:0] e;
    logic [23:0] mr;
    logic        g, st, rnd;
    logic [24:0] mround;

    ea = a[30:23];
    eb = b[30:23];
    sy = a[31] ^ b[31];
    p  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e  = 10'(ea) + 10'(eb) - 10'sd127;

    // p is in [1,4): bit 47 or bit 46 holds the leading one
    if (p[47]) begin
      mr = p[47:24]; g = p[23]; st = |p[22:0];
      e  = e + 10'sd1;
    end else begin
      mr = p[46:23]; g = p[22]; st = |p[21:0];
    end
    rnd    = g & (st | mr[0]);
    mround = {1'b0, mr} + 25'(rnd);
    if (mround[24]) begin
      mround = mround >> 1;
      e      = e + 10'sd1;
    end

    if (ea == 8'd0 || eb == 8'd0 || e <= 10'sd0) prod = {sy, 31'd0};
    else if (e >= 10'sd255)                      prod = {sy, 8'hff, 23'd0};
    else                                         prod = {sy, e[7:0], mround[22:0]};
  end

  fp32_t pipe_d [LAT];
  logic  pipe_v [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LAT; k++) begin
        pipe_d[k] <= FP_ZERO;
        pipe_v[k] <= 1'b0;
      end
    end else begin
      pipe_d[0] <= prod;
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
