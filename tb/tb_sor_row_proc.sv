// tb_sor_row_proc: self-checking test of one SOR row process.
//
// The process (second of two, so it owns rows 2, 4, 6, ...) is connected to
// a behavioural mesh held in testbench arrays. Three half-sweeps are run:
// odd sites at n = 5, even sites at n = 5, then odd sites at n = 6. After
// each, every mesh word is compared bit for bit with a reference computed
// with the testbench's own floating-point model (tb_fp_pkg), which also
// checks that rows owned by the other process and the boundary ring are left
// alone. The number of busy cycles of each half-sweep is compared with the
// timing stated in the module header, and the update and pass-over strobes
// are counted against the number of sites of each colour.
module tb_sor_row_proc;
  import sor_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned L = 6, NP = 2, ROW0 = 1, A = 3, M = 3;
  localparam int unsigned W = L + 2, IW = $clog2(L + 2);
  localparam int unsigned SITE = 1 + (A+1) + ((A > M ? A : M)+1) + (M+1) + (A+1) + (A+1)
                                 + (M+1) + (M+1) + 1 + (A+1) + 1;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy;
  phase_e phase = PH_ODD;
  logic [IW-1:0] n = '0, req_row, req_col, wr_row, wr_col;
  fp32_t omega = FP_OMEGA_1P5, h = 32'h3e00_0000;   // h = 0.125
  fp32_t nbr_up, nbr_down, nbr_left, nbr_right, nbr_ctr, nbr_rho, wr_data;
  logic wr_en, ev_update, ev_pass;

  fp32_t phi [W][W], rho [W][W], ref_phi [W][W];
  int checks = 0, failures = 0;
  int busy_cyc, n_upd, n_pass;

  sor_row_proc #(.L(L), .NP(NP), .ROW0(ROW0), .ADD_LAT(A), .MUL_LAT(M)) dut (.*);

  always #5 clk = ~clk;

  // behavioural mesh memory
  always_comb begin
    nbr_up    = phi[req_row - 1][req_col];
    nbr_down  = phi[req_row + 1][req_col];
    nbr_left  = phi[req_row][req_col - 1];
    nbr_right = phi[req_row][req_col + 1];
    nbr_ctr   = phi[req_row][req_col];
    nbr_rho   = rho[req_row][req_col];
  end
  always @(posedge clk) begin
    if (wr_en) phi[wr_row][wr_col] <= wr_data;
    if (busy) busy_cyc <= busy_cyc + 1;
    if (ev_update) n_upd <= n_upd + 1;
    if (ev_pass) n_pass <= n_pass + 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic half_sweep(phase_e ph, int nn);
    int exp_cyc, exp_upd, exp_pass;
    // reference: owned rows, active colour, from the current mesh
    ref_phi = phi;
    exp_cyc = 1; exp_upd = 0; exp_pass = 0;
    for (int i = ROW0 + 1; i <= nn; i += NP) begin
      exp_cyc += 2;
      for (int j = 1; j <= nn; j++) begin
        if ((((i + j) % 2) != 0) == (ph == PH_ODD)) begin
          ref_phi[i][j] = sor_site(phi[i-1][j], phi[i+1][j], phi[i][j-1], phi[i][j+1],
                                   phi[i][j], rho[i][j], omega, h);
          exp_cyc += SITE; exp_upd++;
        end else begin
          exp_cyc += 1; exp_pass++;
        end
      end
    end
    busy_cyc = 0; n_upd = 0; n_pass = 0;
    @(negedge clk);
    phase = ph; n = IW'(nn); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
    @(negedge clk);
    for (int i = 0; i < W; i++)
      for (int j = 0; j < W; j++) begin
        checks++;
        if (phi[i][j] !== ref_phi[i][j]) begin
          failures++;
          if (failures < 10) $display("MISMATCH phi[%0d][%0d] got %h exp %h", i, j, phi[i][j], ref_phi[i][j]);
        end
      end
    checks += 3;
    if (busy_cyc != exp_cyc) begin
      failures++;
      $display("busy cycles %0d, expected %0d", busy_cyc, exp_cyc);
    end
    if (n_upd != exp_upd) begin failures++; $display("updates %0d exp %0d", n_upd, exp_upd); end
    if (n_pass != exp_pass) begin failures++; $display("passes %0d exp %0d", n_pass, exp_pass); end
  endtask

  initial begin
    for (int i = 0; i < W; i++)
      for (int j = 0; j < W; j++) begin
        phi[i][j] = rnd_val(-2, 3);
        rho[i][j] = rnd_val(-2, 4);
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    half_sweep(PH_ODD, 5);
    half_sweep(PH_EVEN, 5);
    half_sweep(PH_ODD, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
