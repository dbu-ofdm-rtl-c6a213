// dbu_udata_transform: trainable data-subcarrier transform U_data of
// DBU-OFDM, and its inverse, as one serial-in serial-out pipeline.
//
// U_data is a product of K Householder reflections and a diagonal phase
// matrix D. The K reflections are realised as K/2 merged Householder stages
// (dbu_hh_merged), each applying two reflections; stage s holds the pair
// (u_{2s+1}, u_{2s+2}). The phase module (dbu_phase_rot) follows the last
// stage.
//
//   inverse = 0 (transmitter):  in -> HH_0 -> HH_1 -> ... -> HH_{K/2-1} -> D   -> out
//   inverse = 1 (receiver):     in -> D^H  -> HH_{K/2-1}' -> ... -> HH_0'  -> out
//
// In inverse mode the same stages are used in the opposite order, each with
// its two reflections swapped (primed above), and D is applied conjugated
// and first, so the receiver output is exactly U_data^H of its input (up to
// rounding). Switch `inverse` only while the pipeline is empty.
//
// Parameters are loaded through one write port: cfg_stage selects merged
// stage 0..K/2-1 (cfg_u1/cfg_u2 = u_{2s+1}[n], u_{2s+2}[n]) or, with
// cfg_stage = K/2, the phase module (cfg_u1 = e^{j d_n}); cfg_addr = n.
// Each stage's elements must be written in ascending n starting at 0.
//
// Vectors of N_DATA Q(10,6) complex samples stream in one per in_en cycle;
// the output rate is one sample per clock. Latency from the first input to
// the first output of a vector: K/2 * (N_DATA + 4) + 2 cycles. `sat_evt`
// pulses when any quantizer in the pipeline clipped a value.
//
// From the paper: the cascade of K/2 merged stages followed by D, the
// defaults N_DATA = 206 (N = 256 configuration) and K = 4, the reuse of the
// same hardware for the inverse with the cascade order reversed, and the
// number formats. The routing multiplexers, parameter port and mode input
// are this design's choice.
module dbu_udata_transform
  import dbu_pkg::*;
#(
  parameter int unsigned N_DATA = 206,
  parameter int unsigned K      = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          inverse,
  input  logic                          cfg_we,
  input  logic [$clog2(K/2+1)-1:0]      cfg_stage,
  input  logic [$clog2(N_DATA)-1:0]     cfg_addr,
  input  cplx_u_t                       cfg_u1,
  input  cplx_u_t                       cfg_u2,
  input  logic                          in_en,
  input  cplx_x_t                       in_x,
  output logic                          out_en,
  output cplx_x_t                       out_x,
  output logic                          sat_evt
);
  localparam int unsigned NS = K / 2;
  localparam int unsigned SW = $clog2(NS + 1);

  logic    st_in_en  [NS];
  cplx_x_t st_in_x   [NS];
  logic    st_out_en [NS];
  cplx_x_t st_out_x  [NS];
  logic    st_sat    [NS];
  logic    d_in_en, d_out_en, d_sat;
  cplx_x_t d_in_x, d_out_x;

  // routing: forward runs the stages upward, inverse downward after D^H
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      if (!inverse) begin
        st_in_en[s] = (s == 0) ? in_en : st_out_en[(s == 0) ? 0 : s - 1];
        st_in_x[s]  = (s == 0) ? in_x  : st_out_x[(s == 0) ? 0 : s - 1];
      end else begin
        st_in_en[s] = (s == NS - 1) ? d_out_en : st_out_en[(s == NS - 1) ? s : s + 1];
        st_in_x[s]  = (s == NS - 1) ? d_out_x  : st_out_x[(s == NS - 1) ? s : s + 1];
      end
    end
    d_in_en = inverse ? in_en : st_out_en[NS-1];
    d_in_x  = inverse ? in_x  : st_out_x[NS-1];
    out_en  = inverse ? st_out_en[0] : d_out_en;
    out_x   = inverse ? st_out_x[0]  : d_out_x;
  end

  for (genvar s = 0; s < NS; s++) begin : g_stage
    dbu_hh_merged #(.N_DATA(N_DATA)) u_hh (
      .clk     (clk),
      .rst_n   (rst_n),
      .reverse (inverse),
      .cfg_we  (cfg_we && cfg_stage == SW'(s)),
      .cfg_addr(cfg_addr),
      .cfg_u1  (cfg_u1),
      .cfg_u2  (cfg_u2),
      .in_en   (st_in_en[s]),
      .in_x    (st_in_x[s]),
      .out_en  (st_out_en[s]),
      .out_x   (st_out_x[s]),
      .sat_evt (st_sat[s])
    );
  end

  dbu_phase_rot #(.N_DATA(N_DATA)) u_phase (
    .clk      (clk),
    .rst_n    (rst_n),
    .conj_mode(inverse),
    .cfg_we   (cfg_we && cfg_stage == SW'(NS)),
    .cfg_addr (cfg_addr),
    .cfg_p    (cfg_u1),
    .in_en    (d_in_en),
    .in_x     (d_in_x),
    .out_en   (d_out_en),
    .out_x    (d_out_x),
    .sat_evt  (d_sat)
  );

  always_comb begin
    sat_evt = d_sat;
    for (int s = 0; s < NS; s++) sat_evt |= st_sat[s];
  end

  initial assert (K >= 2 && K % 2 == 0) else $error("dbu_udata_transform: K must be even");
endmodule
