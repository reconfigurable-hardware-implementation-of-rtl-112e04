// tb_sor_workloads: the solver on a real boundary-value problem at several
// of the evaluated mesh sizes.
//
// One build (L = 32, three row processes) solves Laplace's equation
// (rho = 0) on n x n meshes for n = 8, 16 and 32, the smaller evaluated
// sizes, with omega = 1.5. The top boundary row is held at 1.0, the other
// three sides at 0, and the interior starts at 0. After each run every word
// of phi is compared bit for bit with a red-black SOR computed by the
// testbench's own floating-point model, and the largest change made by the
// last iteration of the reference must be under a tenth of that of the
// first, showing the run converges. The cycle count is checked against the
// per-iteration timing of the controller and row process headers.
module tb_sor_workloads;
  import sor_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned L = 32, NP = 3, A = 3, M = 3;
  localparam int unsigned W = L + 2, IW = $clog2(L + 2);
  localparam int unsigned SITE = 1 + (A+1) + ((A > M ? A : M)+1) + (M+1) + (A+1) + (A+1)
                                 + (M+1) + (M+1) + 1 + (A+1) + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, phase_odd, sweep_start;
  logic [IW-1:0] n = '0;
  fp32_t omega = FP_OMEGA_1P5, h = 32'h3d00_0000;
  logic [15:0] num_iter = '0, iter;
  logic [47:0] cycles;
  logic host_we = 1'b0, host_sel_rho = 1'b0;
  logic [IW-1:0] host_row = '0, host_col = '0;
  fp32_t host_wdata = '0, host_rdata;
  logic [NP-1:0] ev_update, ev_pass;

  fp32_t ref_phi [W][W];
  int checks = 0, failures = 0;

  sor_top #(.L(L), .NP(NP), .ADD_LAT(A), .MUL_LAT(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int proc_busy_cycles(int p, int nn, bit odd);
    int c = 1;
    for (int i = p + 1; i <= nn; i += NP) begin
      c += 2;
      for (int j = 1; j <= nn; j++)
        c += (((((i + j) % 2) != 0) == odd) ? SITE : 1);
    end
    return c;
  endfunction

  task automatic run(int nn, int ni);
    longint exp_cyc;
    real first_chg, last_chg;
    // Laplace problem: top ring row at 1.0, everything else 0
    for (int i = 0; i < W; i++)
      for (int j = 0; j < W; j++)
        ref_phi[i][j] = (i == 0 && j >= 1 && j <= nn) ? FP_ONE : FP_ZERO;
    @(negedge clk);
    host_we = 1'b1;
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < W; i++)
        for (int j = 0; j < W; j++) begin
          host_sel_rho = 1'(s); host_row = IW'(i); host_col = IW'(j);
          host_wdata = s ? FP_ZERO : ref_phi[i][j];
          @(negedge clk);
        end
    host_we = 1'b0; host_sel_rho = 1'b0;
    exp_cyc = 1; first_chg = 0.0; last_chg = 0.0;
    for (int k = 0; k < ni; k++) begin
      real chg = 0.0;
      exp_cyc += 1;
      for (int ph = 1; ph >= 0; ph--) begin
        int b = 0;
        for (int i = 1; i <= nn; i++)
          for (int j = 1; j <= nn; j++)
            if ((((i + j) % 2) != 0) == (ph == 1)) begin
              fp32_t v;
              real d;
              v = sor_site(ref_phi[i-1][j], ref_phi[i+1][j], ref_phi[i][j-1],
                           ref_phi[i][j+1], ref_phi[i][j], FP_ZERO, omega, h);
              d = f2r(v) - f2r(ref_phi[i][j]);
              if (d < 0.0) d = -d;
              if (d > chg) chg = d;
              ref_phi[i][j] = v;
            end
        for (int p = 0; p < NP; p++)
          if (proc_busy_cycles(p, nn, 1'(ph)) > b) b = proc_busy_cycles(p, nn, 1'(ph));
        exp_cyc += 3 + b;
      end
      if (k == 0) first_chg = chg;
      last_chg = chg;
    end
    n = IW'(nn); num_iter = 16'(ni); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    checks += 2;
    if (cycles != 48'(exp_cyc)) begin
      failures++;
      $display("n=%0d cycles %0d exp %0d", nn, cycles, exp_cyc);
    end
    if (!(last_chg < first_chg / 10.0)) begin
      failures++;
      $display("n=%0d not converging: first change %f last change %f", nn, first_chg, last_chg);
    end
    for (int i = 0; i < W; i++)
      for (int j = 0; j < W; j++) begin
        host_row = IW'(i); host_col = IW'(j);
        #1;
        checks++;
        if (host_rdata !== ref_phi[i][j]) begin
          failures++;
          if (failures < 10) $display("MISMATCH n=%0d phi[%0d][%0d] got %h exp %h", nn, i, j, host_rdata, ref_phi[i][j]);
        end
      end
    host_row = IW'(nn / 2); host_col = IW'(nn / 2);
    #1;
    $display("mesh %0dx%0d, %0d iterations: %0d cycles, centre value %f, last change %g",
             nn, nn, ni, cycles, f2r(host_rdata), last_chg);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(8, 20);
    run(16, 30);
    run(32, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
