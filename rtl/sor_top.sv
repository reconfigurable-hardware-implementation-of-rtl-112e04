// sor_top: parallel red-black successive over-relaxation solver.
//
// Solves the five-point discretised Poisson problem on an n x n interior
// mesh (n <= L) with fixed boundary values, by SOR with a run-time
// relaxation factor omega and mesh spacing h. The host first writes the
// initial guess and boundary ring into phi and the source term into rho
// through the host port, sets n, omega, h and num_iter, and pulses start.
// The controller then runs num_iter iterations, each an odd-site half-sweep
// followed by an even-site half-sweep, on NP row processes working in
// parallel on interleaved rows of one shared mesh memory. done pulses at the
// end, `cycles` then holds the run's length in clock cycles, and phi can be
// read back through the host port. The host port must only be used while
// busy is low.
//
// Structure (the paper's Fig. 3): an initialisation, an odd-site branch of
// replicated row instances, an even-site branch built the same way. The
// floating-point format (IEEE single), the number of row processes, the
// unit latencies, the host port and the iteration count input are this
// design's choices where the paper gives no value.
module sor_top
  import sor_pkg::*;
#(
  parameter int unsigned L       = 2048,  // largest mesh size evaluated in the paper
  parameter int unsigned NP      = 3,     // row processes (instances printed in Fig. 3)
  parameter int unsigned ADD_LAT = 3,
  parameter int unsigned MUL_LAT = 3,
  parameter int unsigned ITER_W  = 16,
  parameter int unsigned CYCLE_W = 48,
  localparam int unsigned IW = $clog2(L + 2)
) (
  input  logic               clk,
  input  logic               rst_n,
  // run control
  input  logic               start,
  input  logic [IW-1:0]      n,
  input  fp32_t              omega,
  input  fp32_t              h,
  input  logic [ITER_W-1:0]  num_iter,
  output logic               busy,
  output logic               done,
  output logic [ITER_W-1:0]  iter,
  output logic [CYCLE_W-1:0] cycles,
  // host access to the mesh memory
  input  logic               host_we,
  input  logic               host_sel_rho,
  input  logic [IW-1:0]      host_row,
  input  logic [IW-1:0]      host_col,
  input  fp32_t              host_wdata,
  output fp32_t              host_rdata,
  // monitoring: per row process, site written / site passed over this cycle
  output logic [NP-1:0]      ev_update,
  output logic [NP-1:0]      ev_pass,
  output logic               sweep_start,   // a half-sweep starts this cycle
  output logic               phase_odd      // colour of the current half-sweep
);

  logic   proc_start;
  phase_e phase;
  logic [NP-1:0] proc_busy;

  logic [IW-1:0] req_row [NP], req_col [NP], wr_row [NP], wr_col [NP];
  fp32_t nbr_up [NP], nbr_down [NP], nbr_left [NP], nbr_right [NP];
  fp32_t nbr_ctr [NP], nbr_rho [NP], wr_data [NP];
  logic  wr_en [NP];

  sor_ctrl #(.ITER_W(ITER_W), .CYCLE_W(CYCLE_W)) u_ctrl (
    .clk, .rst_n, .start, .num_iter, .busy, .done, .iter, .cycles,
    .proc_start, .phase, .proc_busy(|proc_busy)
  );

  for (genvar p = 0; p < NP; p++) begin : g_proc
    sor_row_proc #(.L(L), .NP(NP), .ROW0(p), .ADD_LAT(ADD_LAT), .MUL_LAT(MUL_LAT)) u_proc (
      .clk, .rst_n, .start(proc_start), .phase, .n, .omega, .h,
      .busy(proc_busy[p]),
      .req_row(req_row[p]), .req_col(req_col[p]),
      .nbr_up(nbr_up[p]), .nbr_down(nbr_down[p]), .nbr_left(nbr_left[p]),
      .nbr_right(nbr_right[p]), .nbr_ctr(nbr_ctr[p]), .nbr_rho(nbr_rho[p]),
      .wr_en(wr_en[p]), .wr_row(wr_row[p]), .wr_col(wr_col[p]), .wr_data(wr_data[p]),
      .ev_update(ev_update[p]), .ev_pass(ev_pass[p])
    );
  end

  mesh_mem #(.L(L), .NP(NP)) u_mem (
    .clk, .host_we, .host_sel_rho, .host_row, .host_col, .host_wdata, .host_rdata,
    .req_row, .req_col, .nbr_up, .nbr_down, .nbr_left, .nbr_right, .nbr_ctr, .nbr_rho,
    .wr_en, .wr_row, .wr_col, .wr_data
  );

  assign sweep_start = proc_start;
  assign phase_odd   = (phase == PH_ODD);

endmodule
