// sor_ctrl: iteration sequencer of the red-black SOR solver.
//
// On a start pulse it runs num_iter SOR iterations. One iteration is two
// half-sweeps: first every row process is started on the odd sites
// ((i+j)%2 != 0), and when all of them have dropped busy, on the even sites.
// Because a half-sweep only reads sites of the other colour, the even
// half-sweep already sees the odd sites' new values, which is what makes the
// sweep successive over-relaxation rather than a Jacobi step.
//
// Interface: `proc_start` is a one-cycle pulse to all row processes with
// `phase` valid in the same cycle; `proc_busy` is their OR. `busy` is high
// from the cycle after `start` until `done`, a one-cycle pulse after the last
// half-sweep. `iter` counts completed iterations and `cycles` counts the
// clock cycles of the run (cleared on start), the figure the paper uses to
// measure speed. num_iter = 0 finishes at once.
//
// The paper's Fig. 3 shows the odd-site branch and an even-site branch
// "similar to odd sites"; running them one after the other, and a fixed
// iteration count in place of a convergence test (the paper gives none), are
// this design's choices.
module sor_ctrl
  import sor_pkg::*;
#(
  parameter int unsigned ITER_W  = 16,  // width of the iteration count
  parameter int unsigned CYCLE_W = 48   // width of the cycle counter
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [ITER_W-1:0]  num_iter,
  output logic               busy,
  output logic               done,
  output logic [ITER_W-1:0]  iter,
  output logic [CYCLE_W-1:0] cycles,
  output logic               proc_start,
  output phase_e             phase,
  input  logic               proc_busy
);

  typedef enum logic [2:0] { C_IDLE, C_CHECK, C_GO, C_WAIT, C_NEXT } cstate_e;

  cstate_e st;
  phase_e  ph;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; ph <= PH_ODD; iter <= '0; cycles <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st != C_IDLE) cycles <= cycles + CYCLE_W'(1);
      unique case (st)
        C_IDLE: if (start) begin
          iter   <= '0;
          cycles <= '0;
          ph     <= PH_ODD;
          st     <= C_CHECK;
        end
        C_CHECK: if (iter == num_iter) begin
          done <= 1'b1;
          st   <= C_IDLE;
        end else begin
          st <= C_GO;
        end
        C_GO:   st <= C_WAIT;
        C_WAIT: if (!proc_busy) st <= C_NEXT;
        C_NEXT: begin
          if (ph == PH_ODD) begin
            ph <= PH_EVEN;
            st <= C_GO;
          end else begin
            ph   <= PH_ODD;
            iter <= iter + ITER_W'(1);
            st   <= C_CHECK;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  assign busy       = (st != C_IDLE);
  assign proc_start = (st == C_GO);
  assign phase      = ph;

  // The row processes must answer a start with busy in the next cycle.
  a_busy_follows_start : assert property (@(posedge clk) disable iff (!rst_n)
      proc_start |=> proc_busy || st != C_WAIT);

endmodule
