// dbu_pkg: number formats and shared types of the DBU-OFDM U_data datapath.
//
// The transform works on complex fixed-point samples. Three formats are used,
// written Q(a,b) for an a-bit two's-complement number with b fraction bits:
//   reflection vectors u_k and the phasors of D : Q(12,10)
//   data samples x between stages                : Q(10,6)
//   scalars alpha, rho and the correction terms  : Q(12,6)
// These three formats follow the paper's mixed quantization scheme; the
// widths of the wide accumulators below are this design's own choice.
package dbu_pkg;

  localparam int unsigned U_W = 12;  // reflection vector / phasor word
  localparam int unsigned U_F = 10;
  localparam int unsigned X_W = 10;  // sample word
  localparam int unsigned X_F = 6;
  localparam int unsigned I_W = 12;  // intermediate scalar word
  localparam int unsigned I_F = 6;

  // Full-precision accumulator: 206 products of Q(12,10) x Q(10,6) need
  // 22 + 8 bits; 32 leaves margin.
  localparam int unsigned ACC_W = 32;

  typedef struct packed {
    logic signed [U_W-1:0] re;
    logic signed [U_W-1:0] im;
  } cplx_u_t;

  typedef struct packed {
    logic signed [X_W-1:0] re;
    logic signed [X_W-1:0] im;
  } cplx_x_t;

  typedef struct packed {
    logic signed [I_W-1:0] re;
    logic signed [I_W-1:0] im;
  } cplx_i_t;

  // Pair of reflection-vector elements (u_k[n], u_{k+1}[n]) held by one
  // merged Householder stage.
  typedef struct packed {
    cplx_u_t u1;
    cplx_u_t u2;
  } u_pair_t;

endpackage
