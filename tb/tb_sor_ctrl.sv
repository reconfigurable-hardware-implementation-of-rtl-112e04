// tb_sor_ctrl: self-checking test of the SOR iteration sequencer.
//
// A testbench model of the row processes answers each proc_start by raising
// busy in the next cycle and holding it for a random number of cycles. For
// runs of 0, 1 and 3 iterations the test checks that the half-sweeps
// alternate odd, even, odd, ... starting with odd, that there are exactly
// 2*num_iter starts, that no start is issued while the processes are busy,
// that done pulses once with iter == num_iter, and that the cycle counter
// equals num_iter*(1 + sum over both half-sweeps of (3 + B)) + 1, B being the
// busy length of each half-sweep.
module tb_sor_ctrl;
  import sor_pkg::*;

  localparam int unsigned ITER_W = 8, CYCLE_W = 24;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, proc_start, proc_busy = 1'b0;
  logic [ITER_W-1:0] num_iter = '0, iter;
  logic [CYCLE_W-1:0] cycles;
  phase_e phase;
  int checks = 0, failures = 0;

  sor_ctrl #(.ITER_W(ITER_W), .CYCLE_W(CYCLE_W)) dut (.*);

  always #5 clk = ~clk;

  int n_start, n_done, busy_left, exp_cycles;
  phase_e last_phase;
  bit order_ok, overlap;

  always @(posedge clk) begin
    if (rst_n) begin
      if (proc_start) begin
        int b;
        if (proc_busy) overlap = 1;
        if (phase != ((n_start % 2 == 0) ? PH_ODD : PH_EVEN)) order_ok = 0;
        n_start++;
        b = $urandom_range(1, 12);
        busy_left = b;
        exp_cycles += 3 + b + ((n_start % 2 == 1) ? 1 : 0);
        proc_busy <= 1'b1;
      end else if (busy_left > 0) begin
        busy_left--;
        if (busy_left == 0) proc_busy <= 1'b0;
      end
      if (done) n_done++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("MISMATCH %s: got %0d exp %0d", what, got, exp_v);
    end
  endtask

  task automatic run(int ni);
    n_start = 0; n_done = 0; exp_cycles = 1; order_ok = 1; overlap = 0;
    @(negedge clk);
    num_iter = ITER_W'(ni); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    chk("busy after start", busy, 1);
    while (!done) @(negedge clk);
    chk("iter at done", iter, ni);
    chk("cycles", cycles, exp_cycles);
    @(negedge clk);
    chk("busy after done", busy, 0);
    chk("starts", n_start, 2 * ni);
    chk("done pulses", n_done, 1);
    chk("phase order", order_ok, 1);
    chk("start while busy", overlap, 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(0);
    run(1);
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
