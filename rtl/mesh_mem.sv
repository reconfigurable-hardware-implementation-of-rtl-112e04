// mesh_mem: storage for the SOR mesh phi and the source term rho.
//
// Both arrays hold (L+2) x (L+2) single-precision words: the L x L interior
// plus the ring of fixed boundary values around it (row/column 0 and L+1),
// which the five-point stencil reads but never writes. Word (i,j) sits at
// address i*(L+2)+j.
//
// Each of the NP row processes has a neighbourhood read port: for the site
// (req_row, req_col) it returns, combinationally, the four neighbours, the
// site's old value and rho at the site. Each row process also has one write
// port into phi, written on the clock edge. Red-black ordering guarantees
// that in a half-sweep no process writes a word another process reads, and
// processes work on different rows, so the write ports never collide. A host
// port loads phi or rho (host_sel_rho) on a clock edge and reads either array
// back combinationally; it is meant to be used while the solver is idle, and
// a host write takes precedence over a process write to the same word.
//
// The paper names the arrays (a, b and rho in its flowcharts) but not how
// they are stored. Keeping one in-place phi array, so a half-sweep sees the
// other colour's newest values, and the asynchronous read ports are this
// design's choices.
module mesh_mem
  import sor_pkg::*;
#(
  parameter int unsigned L  = 2048,   // interior mesh size (largest in the paper)
  parameter int unsigned NP = 3,      // number of row processes
  localparam int unsigned IW = $clog2(L + 2)
) (
  input  logic           clk,
  // host port
  input  logic           host_we,
  input  logic           host_sel_rho,
  input  logic [IW-1:0]  host_row,
  input  logic [IW-1:0]  host_col,
  input  fp32_t          host_wdata,
  output fp32_t          host_rdata,
  // neighbourhood read ports, one per row process
  input  logic [IW-1:0]  req_row  [NP],
  input  logic [IW-1:0]  req_col  [NP],
  output fp32_t          nbr_up   [NP],   // phi[i-1][j]
  output fp32_t          nbr_down [NP],   // phi[i+1][j]
  output fp32_t          nbr_left [NP],   // phi[i][j-1]
  output fp32_t          nbr_right[NP],   // phi[i][j+1]
  output fp32_t          nbr_ctr  [NP],   // phi[i][j]
  output fp32_t          nbr_rho  [NP],   // rho[i][j]
  // write ports into phi, one per row process
  input  logic           wr_en    [NP],
  input  logic [IW-1:0]  wr_row   [NP],
  input  logic [IW-1:0]  wr_col   [NP],
  input  fp32_t          wr_data  [NP]
);

  localparam int unsigned W     = L + 2;
  localparam int unsigned DEPTH = W * W;
  localparam int unsigned AW    = $clog2(DEPTH);

  fp32_t phi [DEPTH];
  fp32_t rho [DEPTH];

  function automatic logic [AW-1:0] addr(logic [IW-1:0] r, logic [IW-1:0] c);
    return AW'(r) * AW'(W) + AW'(c);
  endfunction

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (wr_en[p]) phi[addr(wr_row[p], wr_col[p])] <= wr_data[p];
    end
    if (host_we) begin
      if (host_sel_rho) rho[addr(host_row, host_col)] <= host_wdata;
      else              phi[addr(host_row, host_col)] <= host_wdata;
    end
  end

  assign host_rdata = host_sel_rho ? rho[addr(host_row, host_col)]
                                   : phi[addr(host_row, host_col)];

  for (genvar p = 0; p < NP; p++) begin : g_port
    assign nbr_up[p]    = phi[addr(req_row[p] - IW'(1), req_col[p])];
    assign nbr_down[p]  = phi[addr(req_row[p] + IW'(1), req_col[p])];
    assign nbr_left[p]  = phi[addr(req_row[p], req_col[p] - IW'(1))];
    assign nbr_right[p] = phi[addr(req_row[p], req_col[p] + IW'(1))];
    assign nbr_ctr[p]   = phi[addr(req_row[p], req_col[p])];
    assign nbr_rho[p]   = rho[addr(req_row[p], req_col[p])];
  end

endmodule
