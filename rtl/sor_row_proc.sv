// sor_row_proc: one row process of the parallel red-black SOR sweep.
//
// The solver runs NP copies of this module side by side. Copy ROW0 owns the
// mesh rows i = ROW0+1, ROW0+1+NP, ROW0+1+2*NP, ... up to n. On a start
// pulse it sweeps its rows for the colour given by `phase`: for each row it
// walks j = 1..n, tests the site colour ((i+j)%2 != 0 is an odd site),
// passes over sites of the other colour in one cycle, and for each site of
// the active colour computes the over-relaxed value and writes it back:
//
//   op1  = phi[i-1][j] + phi[i+1][j]        op2 = phi[i][j-1] + phi[i][j+1]
//   oRes = op1 + op2                        sq_h = h * h
//   tmp1 = sq_h * rho[i][j]
//   tmp2 = oRes + tmp1                      (waited for with addCycles)
//   op3  = 1 - omega
//   op4  = op3 * phi[i][j]
//   op5  = omega * tmp2
//   op6  = op5 / 4                          (exponent minus 2, integer op)
//   phi[i][j] = op4 + op6
//
// that is phi_new = (1-omega)*phi_old + omega*(sum of 4 neighbours +
// h^2*rho)/4, the SOR step for the five-point Laplacian with the source term
// added as the paper's flowchart adds it.
//
// Each step occupies one state. A step that uses a floating-point unit
// issues its operands, loads a wait counter with the unit's latency and
// counts it down to zero before taking the result, as the flowchart's
// addCycles loop does for tmp2, so a floating-point step lasts LAT+1 cycles.
// op1/op2 run together on two adders and oRes/sq_h together on an adder and
// the multiplier, following the parallel boxes of the paper's Fig. 3.
// Timing per row: 1 cycle to set j = 1, 1 cycle per passed-over site, and
// for each updated site 1 (test) + (A+1) + (max(A,M)+1) + (M+1) + (A+1) +
// (A+1) + (M+1) + (M+1) + 1 + (A+1) + 1 cycles, A and M being the adder and
// multiplier latencies; a final cycle finds no row left and drops busy.
//
// What follows the paper: the op1..op4, oRes, sq_h, tmp1, tmp2 sequence, the
// parity test, the addCycles wait, the division by 4 done as integer
// arithmetic on the unpacked float. This design's own choices: the last
// three steps (the printed flowchart has op5 = op4 + w, op6 = op5/4,
// b = tmp2*op6, which is not the SOR step of the paper's equation (3); this
// module computes op5 = w*tmp2, op6 = op5/4, phi = op4 + op6 instead), the
// row interleaving between processes, the one-cycle pass over a site of the
// other colour and all latencies.
module sor_row_proc
  import sor_pkg::*;
#(
  parameter int unsigned L       = 2048,  // largest interior mesh size
  parameter int unsigned NP      = 3,     // number of row processes
  parameter int unsigned ROW0    = 0,     // index of this process, 0..NP-1
  parameter int unsigned ADD_LAT = 3,     // adder latency (FPAddCycles)
  parameter int unsigned MUL_LAT = 3,     // multiplier latency
  localparam int unsigned IW = $clog2(L + 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  // control
  input  logic          start,     // pulse: sweep own rows for `phase`
  input  phase_e        phase,
  input  logic [IW-1:0] n,         // interior mesh size in use, 1..L
  input  fp32_t         omega,     // relaxation factor
  input  fp32_t         h,         // mesh spacing (myh)
  output logic          busy,
  // memory neighbourhood port
  output logic [IW-1:0] req_row,
  output logic [IW-1:0] req_col,
  input  fp32_t         nbr_up,
  input  fp32_t         nbr_down,
  input  fp32_t         nbr_left,
  input  fp32_t         nbr_right,
  input  fp32_t         nbr_ctr,
  input  fp32_t         nbr_rho,
  // memory write port
  output logic          wr_en,
  output logic [IW-1:0] wr_row,
  output logic [IW-1:0] wr_col,
  output fp32_t         wr_data,
  // event strobes for monitoring
  output logic          ev_update, // a site of the active colour was written
  output logic          ev_pass    // a site of the other colour was passed over
);

  typedef enum logic [3:0] {
    S_IDLE, S_ROW, S_JTEST, S_OP12, S_ORES, S_TMP1, S_TMP2,
    S_OP3, S_OP4, S_OP5, S_OP6, S_NEW, S_WR
  } state_e;

  localparam int unsigned CW = $clog2((ADD_LAT > MUL_LAT ? ADD_LAT : MUL_LAT) + 1);
  localparam logic [CW-1:0] A_CYC = CW'(ADD_LAT);
  localparam logic [CW-1:0] M_CYC = CW'(MUL_LAT);
  localparam logic [CW-1:0] AM_CYC = CW'(ADD_LAT > MUL_LAT ? ADD_LAT : MUL_LAT);

  state_e        st;
  logic          waiting;       // operands issued, counting the latency
  logic [CW-1:0] cnt;           // addCycles-style wait counter
  logic [IW:0]   i, j;          // one spare bit so i+NP and j+1 cannot wrap
  phase_e        ph;
  fp32_t         op1, op2, ores, sq_h, tmp1, tmp2, op3, op4, op5, op6, wr_data_q;

  // floating-point units
  logic  a0_v, a1_v, m_v, a0_ov, a1_ov, m_ov;
  fp32_t a0_x, a0_y, a0_r, a1_r, m_x, m_y, m_r;

  fp_add #(.LAT(ADD_LAT)) u_add0 (.clk, .rst_n, .in_valid(a0_v), .a(a0_x), .b(a0_y),
                                  .out_valid(a0_ov), .y(a0_r));
  fp_add #(.LAT(ADD_LAT)) u_add1 (.clk, .rst_n, .in_valid(a1_v), .a(nbr_left), .b(nbr_right),
                                  .out_valid(a1_ov), .y(a1_r));
  fp_mul #(.LAT(MUL_LAT)) u_mul  (.clk, .rst_n, .in_valid(m_v), .a(m_x), .b(m_y),
                                  .out_valid(m_ov), .y(m_r));

  wire issue = (st inside {S_OP12, S_ORES, S_TMP1, S_TMP2, S_OP3, S_OP4, S_OP5, S_NEW})
               && !waiting;
  wire last  = waiting && (cnt == CW'(1));   // result is at the unit output

  // operand selection for the shared adder and multiplier
  always_comb begin
    a0_v = 1'b0; a1_v = 1'b0; m_v = 1'b0;
    a0_x = nbr_up; a0_y = nbr_down;
    m_x  = h;      m_y  = h;
    unique case (st)
      S_OP12: begin a0_v = issue; a1_v = issue; end
      S_ORES: begin a0_v = issue; m_v = issue; a0_x = op1; a0_y = op2; end
      S_TMP1: begin m_v = issue; m_x = sq_h; m_y = nbr_rho; end
      S_TMP2: begin a0_v = issue; a0_x = ores; a0_y = tmp1; end
      S_OP3:  begin a0_v = issue; a0_x = FP_ONE; a0_y = {~omega[31], omega[30:0]}; end
      S_OP4:  begin m_v = issue; m_x = op3; m_y = nbr_ctr; end
      S_OP5:  begin m_v = issue; m_x = omega; m_y = tmp2; end
      S_NEW:  begin a0_v = issue; a0_x = op4; a0_y = op6; end
      default: ;
    endcase
  end

  // op6 = op5 / 4 on the unpacked float: subtract 2 from the exponent
  fp32_t div4;
  always_comb begin
    if (op5[30:23] > 8'd2) div4 = {op5[31], op5[30:23] - 8'd2, op5[22:0]};
    else                   div4 = {op5[31], 31'd0};
  end

  wire odd_site  = i[0] ^ j[0];
  wire active    = (ph == PH_ODD) ? odd_site : !odd_site;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; waiting <= 1'b0; cnt <= '0;
      i <= '0; j <= '0; ph <= PH_ODD;
      op1 <= FP_ZERO; op2 <= FP_ZERO; ores <= FP_ZERO; sq_h <= FP_ZERO;
      tmp1 <= FP_ZERO; tmp2 <= FP_ZERO; op3 <= FP_ZERO; op4 <= FP_ZERO;
      op5 <= FP_ZERO; op6 <= FP_ZERO; wr_data_q <= FP_ZERO;
    end else begin
      if (issue) begin
        waiting <= 1'b1;
        cnt     <= (st == S_ORES) ? AM_CYC :
                   (st inside {S_TMP1, S_OP4, S_OP5}) ? M_CYC : A_CYC;
      end else if (waiting) begin
        cnt <= cnt - CW'(1);
        if (cnt == CW'(1)) waiting <= 1'b0;
      end

      unique case (st)
        S_IDLE: if (start) begin
          ph <= phase;
          i  <= (IW+1)'(ROW0 + 1);
          st <= S_ROW;
        end
        S_ROW: begin
          j  <= (IW+1)'(1);
          st <= (i > {1'b0, n}) ? S_IDLE : S_JTEST;
        end
        S_JTEST: begin
          if (j > {1'b0, n}) begin
            i  <= i + (IW+1)'(NP);
            st <= S_ROW;
          end else if (active) begin
            st <= S_OP12;
          end else begin
            j <= j + (IW+1)'(1);
          end
        end
        S_OP12: if (last) begin op1 <= a0_r; op2 <= a1_r; st <= S_ORES; end
        S_ORES: if (last) begin ores <= a0_r; sq_h <= m_r; st <= S_TMP1; end
        S_TMP1: if (last) begin tmp1 <= m_r; st <= S_TMP2; end
        S_TMP2: if (last) begin tmp2 <= a0_r; st <= S_OP3; end
        S_OP3:  if (last) begin op3 <= a0_r; st <= S_OP4; end
        S_OP4:  if (last) begin op4 <= m_r; st <= S_OP5; end
        S_OP5:  if (last) begin op5 <= m_r; st <= S_OP6; end
        S_OP6:  begin op6 <= div4; st <= S_NEW; end
        S_NEW:  if (last) begin wr_data_q <= a0_r; st <= S_WR; end
        S_WR:   begin j <= j + (IW+1)'(1); st <= S_JTEST; end
        default: st <= S_IDLE;
      endcase
    end
  end



  assign busy      = (st != S_IDLE);
  assign req_row   = i[IW-1:0];
  assign req_col   = j[IW-1:0];
  assign wr_en     = (st == S_WR);
  assign wr_row    = i[IW-1:0];
  assign wr_col    = j[IW-1:0];
  assign wr_data   = wr_data_q;
  assign ev_update = (st == S_WR);
  assign ev_pass   = (st == S_JTEST) && (j <= {1'b0, n}) && !active;

  // The result taken at the end of a wait must be a valid unit output.
  a_add_valid : assert property (@(posedge clk) disable iff (!rst_n)
      last && (st inside {S_OP12, S_ORES, S_TMP2, S_OP3, S_NEW}) |-> a0_ov);
  a_mul_valid : assert property (@(posedge clk) disable iff (!rst_n)
      last && (st inside {S_ORES, S_TMP1, S_OP4, S_OP5}) |-> m_ov);
  a_add1_valid : assert property (@(posedge clk) disable iff (!rst_n)
      last && (st == S_OP12) |-> a1_ov);

endmodule
