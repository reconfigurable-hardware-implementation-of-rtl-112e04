// tb_sor_top: end-to-end test of the red-black SOR solver.
//
// Builds the solver with a small mesh (L = 8) and three row processes, loads
// a random initial guess, boundary ring and source term through the host
// port, runs it and reads phi back through the host port. The result is
// compared bit for bit with a red-black SOR computed by the testbench's own
// floating-point model (tb_fp_pkg). Two runs: n = 7 < L with omega = 1.5
// (the paper's value) for three iterations, then n = 8 = L with omega = 1
// (plain Gauss-Seidel) for two. The run length reported in `cycles` is
// compared with the timing of the controller and row process headers.
// Mechanisms counted, each must occur: odd and even half-sweeps, site
// updates, passes over sites of the other colour, half-sweeps in which more
// than one row process updated sites, and the mesh size in use smaller than
// the built size.
module tb_sor_top;
  import sor_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned L = 8, NP = 3, A = 3, M = 3;
  localparam int unsigned W = L + 2, IW = $clog2(L + 2);
  localparam int unsigned SITE = 1 + (A+1) + ((A > M ? A : M)+1) + (M+1) + (A+1) + (A+1)
                                 + (M+1) + (M+1) + 1 + (A+1) + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done, phase_odd, sweep_start;
  logic [IW-1:0] n = '0;
  fp32_t omega = FP_OMEGA_1P5, h = 32'h3e00_0000;
  logic [15:0] num_iter = '0, iter;
  logic [47:0] cycles;
  logic host_we = 1'b0, host_sel_rho = 1'b0;
  logic [IW-1:0] host_row = '0, host_col = '0;
  fp32_t host_wdata = '0, host_rdata;
  logic [NP-1:0] ev_update, ev_pass;

  fp32_t ref_phi [W][W], rho [W][W];
  int checks = 0, failures = 0;

  sor_top #(.L(L), .NP(NP), .ADD_LAT(A), .MUL_LAT(M)) dut (.*);

  always #5 clk = ~clk;

  // mechanism counters
  int n_odd = 0, n_even = 0, n_upd = 0, n_pass = 0, n_par = 0, n_small = 0;
  logic [NP-1:0] upd_seen = '0;
  always @(posedge clk) begin
    if (sweep_start) begin
      if (phase_odd) n_odd++; else n_even++;
      if ($countones(upd_seen) > 1) n_par++;
      upd_seen = '0;
      if (n < IW'(L)) n_small++;
    end
    upd_seen = upd_seen | ev_update;
    n_upd += $countones(ev_update);
    n_pass += $countones(ev_pass);
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic run(int nn, fp32_t w, int ni);
    longint exp_cyc;
    // load the mesh, keeping host_we high for the whole burst
    for (int i = 0; i < W; i++)
      for (int j = 0; j < W; j++) begin
        ref_phi[i][j] = rnd_val(-2, 3);
        rho[i][j]     = rnd_val(-2, 4);
      end
    @(negedge clk);
    host_we = 1'b1;
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < W; i++)
        for (int j = 0; j < W; j++) begin
          host_sel_rho = 1'(s); host_row = IW'(i); host_col = IW'(j);
          host_wdata = s ? rho[i][j] : ref_phi[i][j];
          @(negedge clk);
        end
    host_we = 1'b0; host_sel_rho = 1'b0;
    // reference red-black SOR and expected run length
    exp_cyc = 1;
    for (int k = 0; k < ni; k++) begin
      exp_cyc += 1;
      for (int ph = 1; ph >= 0; ph--) begin
        int b = 0;
        for (int i = 1; i <= nn; i++)
          for (int j = 1; j <= nn; j++)
            if ((((i + j) % 2) != 0) == (ph == 1))
              ref_phi[i][j] = sor_site(ref_phi[i-1][j], ref_phi[i+1][j], ref_phi[i][j-1],
                                       ref_phi[i][j+1], ref_phi[i][j], rho[i][j], w, h);
        for (int p = 0; p < NP; p++)
          if (proc_busy_cycles(p, nn, 1'(ph)) > b) b = proc_busy_cycles(p, nn, 1'(ph));
        exp_cyc += 3 + b;
      end
    end
    n = IW'(nn); omega = w; num_iter = 16'(ni); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    checks += 2;
    if (iter != 16'(ni)) begin failures++; $display("iter %0d exp %0d", iter, ni); end
    if (cycles != 48'(exp_cyc)) begin
      failures++;
      $display("cycles %0d exp %0d", cycles, exp_cyc);
    end
    for (int i = 0; i < W; i++)
      for (int j = 0; j < W; j++) begin
        host_row = IW'(i); host_col = IW'(j);
        #1;
        checks++;
        if (host_rdata !== ref_phi[i][j]) begin
          failures++;
          if (failures < 10) $display("MISMATCH phi[%0d][%0d] got %h exp %h", i, j, host_rdata, ref_phi[i][j]);
        end
      end
    $display("run n=%0d iters=%0d: %0d cycles", nn, ni, cycles);
  endtask

  task automatic mech(string name, int cnt);
    checks++;
    $display("mechanism %-22s %0d", name, cnt);
    if (cnt == 0) begin
      failures++;
      $display("mechanism %s never happened", name);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(7, FP_OMEGA_1P5, 3);
    run(8, FP_ONE, 2);
    mech("odd half-sweep", n_odd);
    mech("even half-sweep", n_even);
    mech("site update", n_upd);
    mech("other-colour pass", n_pass);
    mech("parallel processes", n_par);
    mech("mesh smaller than L", n_small);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
