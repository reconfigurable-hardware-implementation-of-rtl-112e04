// tb_mesh_mem: self-checking test of the SOR mesh memory.
//
// Fills phi and rho of a small mesh through the host port, mirroring every
// write in a testbench array, then checks: host readback of both arrays at
// every address; all six neighbourhood outputs of every read port at random
// interior sites; writes through the row-process ports (several in one
// cycle); and that a host write wins over a process write to the same word.
module tb_mesh_mem;
  import sor_pkg::*;

  localparam int unsigned L  = 5;
  localparam int unsigned NP = 2;
  localparam int unsigned W  = L + 2;
  localparam int unsigned IW = $clog2(L + 2);

  logic clk = 1'b0;
  logic host_we = 1'b0, host_sel_rho = 1'b0;
  logic [IW-1:0] host_row = '0, host_col = '0;
  fp32_t host_wdata = '0, host_rdata;
  logic [IW-1:0] req_row [NP], req_col [NP], wr_row [NP], wr_col [NP];
  fp32_t nbr_up [NP], nbr_down [NP], nbr_left [NP], nbr_right [NP], nbr_ctr [NP], nbr_rho [NP];
  fp32_t wr_data [NP];
  logic  wr_en [NP];

  fp32_t m_phi [W][W];
  fp32_t m_rho [W][W];
  int checks = 0, failures = 0;

  mesh_mem #(.L(L), .NP(NP)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(string what, fp32_t got, fp32_t exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s: got %h exp %h", what, got, exp_v);
    end
  endtask

  task automatic host_write(bit sel, int r, int c, fp32_t d);
    host_we <= 1'b1; host_sel_rho <= sel; host_row <= IW'(r); host_col <= IW'(c);
    host_wdata <= d;
    @(posedge clk);
    if (sel) m_rho[r][c] = d; else m_phi[r][c] = d;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      req_row[p] = IW'(1); req_col[p] = IW'(1); wr_en[p] = 1'b0;
      wr_row[p] = '0; wr_col[p] = '0; wr_data[p] = '0;
    end
    @(negedge clk);
    for (int r = 0; r < W; r++)
      for (int c = 0; c < W; c++) begin
        host_write(1'b0, r, c, $urandom);
        host_write(1'b1, r, c, $urandom);
      end
    host_we <= 1'b0;
    @(negedge clk);
    // host readback
    for (int r = 0; r < W; r++)
      for (int c = 0; c < W; c++)
        for (int s = 0; s < 2; s++) begin
          host_sel_rho = 1'(s); host_row = IW'(r); host_col = IW'(c);
          #1;
          chk("host read", host_rdata, s ? m_rho[r][c] : m_phi[r][c]);
        end
    // neighbourhood ports
    for (int k = 0; k < 40; k++) begin
      int r [NP], c [NP];
      for (int p = 0; p < NP; p++) begin
        r[p] = $urandom_range(1, L); c[p] = $urandom_range(1, L);
        req_row[p] = IW'(r[p]); req_col[p] = IW'(c[p]);
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        chk("up",    nbr_up[p],    m_phi[r[p]-1][c[p]]);
        chk("down",  nbr_down[p],  m_phi[r[p]+1][c[p]]);
        chk("left",  nbr_left[p],  m_phi[r[p]][c[p]-1]);
        chk("right", nbr_right[p], m_phi[r[p]][c[p]+1]);
        chk("ctr",   nbr_ctr[p],   m_phi[r[p]][c[p]]);
        chk("rho",   nbr_rho[p],   m_rho[r[p]][c[p]]);
      end
    end
    // process writes, all ports in the same cycle, distinct rows
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        wr_en[p] = 1'b1; wr_row[p] = IW'(1 + p + NP * (k % 2)); wr_col[p] = IW'($urandom_range(1, L));
        wr_data[p] = $urandom;
      end
      @(posedge clk);
      for (int p = 0; p < NP; p++) m_phi[wr_row[p]][wr_col[p]] = wr_data[p];
    end
    @(negedge clk);
    for (int p = 0; p < NP; p++) wr_en[p] = 1'b0;
    // host write wins over a process write to the same word
    wr_en[0] = 1'b1; wr_row[0] = IW'(2); wr_col[0] = IW'(3); wr_data[0] = 32'h1111_1111;
    host_we = 1'b1; host_sel_rho = 1'b0; host_row = IW'(2); host_col = IW'(3);
    host_wdata = 32'h2222_2222;
    @(posedge clk);
    @(negedge clk);
    wr_en[0] = 1'b0; host_we = 1'b0;
    m_phi[2][3] = 32'h2222_2222;
    for (int r = 0; r < W; r++)
      for (int c = 0; c < W; c++) begin
        host_sel_rho = 1'b0; host_row = IW'(r); host_col = IW'(c);
        #1;
        chk("phi after writes", host_rdata, m_phi[r][c]);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
