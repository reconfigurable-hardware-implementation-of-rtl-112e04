// tb_fp_add: self-checking test of the pipelined single-precision adder.
//
// Drives one operand pair per cycle (directed cases, then random pairs whose
// exponents lie close enough that neither overflow nor subnormal results
// occur) and compares each sum, LAT cycles later, with the sum computed by
// double-precision real arithmetic rounded to single precision (tb_fp_pkg). The
// latency is checked through out_valid, which must rise exactly LAT cycles
// after the first in_valid.
module tb_fp_add;
  import sor_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned LAT = 3;
  localparam int N = 3000;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  fp32_t a = '0, b = '0, y;
  int checks = 0, failures = 0;

  fp_add #(.LAT(LAT)) dut (.*);

  always #5 clk = ~clk;


  function automatic fp32_t rnd_fp();
    logic [7:0] e;
    e = 8'(100 + $urandom_range(0, 50));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  fp32_t qa [$], qb [$];
  int unsigned cyc = 0, first_in = 0, first_out = 0;
  bit seen_out = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && first_in == 0) first_in = cyc;
    if (rst_n && out_valid) begin
      fp32_t ea, eb, exp_y;
      if (!seen_out) begin
        seen_out = 1;
        first_out = cyc;
        checks++;
        if (first_out - first_in != LAT) begin
          failures++;
          $display("latency %0d, expected %0d", first_out - first_in, LAT);
        end
      end
      ea = qa.pop_front();
      eb = qb.pop_front();
      exp_y = fadd(ea, eb);
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("MISMATCH %h + %h: got %h exp %h", ea, eb, y, exp_y);
      end
    end
  end

  task automatic drive(fp32_t x, fp32_t z);
    a <= x; b <= z; in_valid <= 1'b1;
    qa.push_back(x); qb.push_back(z);
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    drive(32'h3f800000, 32'h3f800000);   // 1 + 1
    drive(32'h3fc00000, 32'hbf800000);   // 1.5 - 1
    drive(32'h3f800000, 32'hbf800000);   // exact cancellation
    drive(32'h00000000, 32'h40490fdb);   // 0 + pi
    drive(32'h4b800000, 32'h3f800000);   // 2^24 + 1 (tie, round to even)
    drive(32'h4b800000, 32'h3fc00000);   // 2^24 + 1.5 (round up)
    drive(32'h3f800001, 32'hbf800000);   // tiny difference
    drive(32'h7f000000, 32'h33000000);   // huge + tiny
    for (int k = 0; k < N; k++) drive(rnd_fp(), rnd_fp());
    in_valid <= 1'b0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (qa.size() != 0) begin
      failures++;
      $display("%0d results missing", qa.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
