// sor_pkg: types and constants shared by the red-black SOR solver.
//
// Numbers are IEEE-754 single precision (fp32_t). A mesh site is named by
// its row i and column j, both counted from 0 at the fixed boundary ring, so
// interior sites run from 1 to n. The row processes ask the mesh memory for
// the five-point neighbourhood of one site (site_req_t) and get the four
// neighbours, the old centre value and the source term back (site_nbr_t).
// Site colour follows the parity of i+j: a site is "odd" when (i+j)%2 != 0,
// as in the flowchart test of the paper; odd sites are swept first.
package sor_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;
  // Relaxation factor used in the paper's experiments: omega = 1.5.
  localparam fp32_t FP_OMEGA_1P5 = 32'h3fc0_0000;

  // Colour of the half-sweep being run.
  typedef enum logic {
    PH_EVEN = 1'b0,   // sites with (i+j)%2 == 0
    PH_ODD  = 1'b1    // sites with (i+j)%2 != 0
  } phase_e;

  // Index width large enough for a mesh of L interior sites plus the ring.
  function automatic int unsigned idx_w(input int unsigned l);
    return $clog2(l + 2);
  endfunction

endpackage
