// dirac_pkg: number format, data types and spin-structure tables shared by the
// Wilson-Dirac stencil datapath.
//
// All arithmetic is IEEE-754 floating point of width 1+EXP_W+MAN_W; the
// defaults give binary64 (double precision), the precision in which the stage
// latencies of the stencil pipeline are specified (an addition takes 14 clock
// cycles). Changing EXP_W/MAN_W to 8/23 gives the single precision variant.
//
// Field layout (all packed, lowest index in the least significant bits):
//   cplx_t        {re, im}                    one complex number
//   colvec_t      cplx_t [3]                  colour vector, index A = 0..2
//   halfspinor_t  colvec_t [2]                two spin components after projection
//   spinor_t      colvec_t [4]                Dirac spinor, spin index 0..3
//   su3_t         colvec_t [3]                3x3 colour matrix, row-major (row r = element [r])
//
// Gamma matrices (own choice, the text only points to the textbook of Gattringer
// and Lang): chiral representation, gamma = [[0, A], [A^dagger, 0]] with 2x2
// blocks A.  Direction mu = 0 is time (A = 1, gamma_4 of the textbook) and
// mu = 1,2,3 are space (A = -i sigma_mu). Every row of A holds one non-zero
// entry, i^c with c = 0..3, so spin projection needs only additions,
// subtractions and swaps of real and imaginary part.
package dirac_pkg;

  localparam int unsigned EXP_W   = 11;   // binary64 exponent
  localparam int unsigned MAN_W   = 52;   // binary64 fraction
  localparam int unsigned FP_W    = 1 + EXP_W + MAN_W;

  localparam int unsigned ADD_LAT = 14;   // cycles of one floating point addition
  localparam int unsigned MUL_LAT = 14;   // cycles of one multiplication (one cascade layer)

  localparam int unsigned NDIR    = 4;    // space-time directions
  localparam int unsigned NHOP    = 8;    // neighbours per stencil: 4 forward, 4 backward

  // Latencies of the four pipeline stages
  localparam int unsigned STAGE1_LAT = 1;                       // copy to local registers
  localparam int unsigned STAGE2_LAT = ADD_LAT;                 // spin projection
  localparam int unsigned STAGE3_LAT = MUL_LAT + 4 * ADD_LAT;   // 5-layer SU(3) cascade
  localparam int unsigned STAGE4_LAT = 4 * ADD_LAT + 1;         // 4-layer sum plus copy
  localparam int unsigned KERNEL_LAT = STAGE1_LAT + STAGE2_LAT + STAGE3_LAT + STAGE4_LAT;

  typedef logic [FP_W-1:0] fp_t;
  typedef struct packed { fp_t re; fp_t im; } cplx_t;
  typedef cplx_t   [2:0] colvec_t;
  typedef colvec_t [1:0] halfspinor_t;
  typedef colvec_t [3:0] spinor_t;
  typedef colvec_t [2:0] su3_t;

  // Everything one stencil evaluation reads: the centre spinor psi(n), the
  // eight neighbour spinors and the eight link matrices.
  //   hop k = 0..3 : forward  in direction k, psi(n+k), U_k(n),        projector 1 - gamma_k
  //   hop k = 4..7 : backward in direction k-4, psi(n-k), U_k^dagger(n-k), projector 1 + gamma_k
  typedef struct packed {
    su3_t    [NHOP-1:0] u;
    spinor_t [NHOP-1:0] psi_hop;
    spinor_t            psi_c;
  } stencil_in_t;


  // Column of the non-zero entry of row s of block A for direction mu.
  function automatic int unsigned a_col(int unsigned mu, int unsigned s);
    return (mu == 1 || mu == 2) ? 1 - s : s;
  endfunction

  // Phase code c of that entry, the entry being i^c.
  function automatic logic [1:0] a_phase(int unsigned mu, int unsigned s);
    case (mu)
      0:       return 2'd0;                     // A = 1
      1:       return 2'd3;                     // A = -i sigma_1 = [[0,-i],[-i,0]]
      2:       return (s == 0) ? 2'd2 : 2'd0;   // A = -i sigma_2 = [[0,-1],[1,0]]
      default: return (s == 0) ? 2'd3 : 2'd1;   // A = -i sigma_3 = [[-i,0],[0,i]]
    endcase
  endfunction

  function automatic fp_t fp_neg(fp_t a);
    return {~a[FP_W-1], a[FP_W-2:0]};
  endfunction

  // Multiply a complex number by i^c: only swaps and sign changes.
  function automatic cplx_t mul_ipow(cplx_t a, logic [1:0] c);
    cplx_t r;
    case (c)
      2'd0:    begin r.re = a.re;         r.im = a.im;         end
      2'd1:    begin r.re = fp_neg(a.im); r.im = a.re;         end
      2'd2:    begin r.re = fp_neg(a.re); r.im = fp_neg(a.im); end
      default: begin r.re = a.im;         r.im = fp_neg(a.re); end
    endcase
    return r;
  endfunction

endpackage
