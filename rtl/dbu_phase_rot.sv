// dbu_phase_rot: diagonal phase module D = diag(e^{j d_1}, ..., e^{j d_N}).
//
// Element n of every N_DATA-sample vector is multiplied by the stored unit
// phasor p_n = cos d_n + j sin d_n, or by conj(p_n) when conj_mode is high
// (the inverse transform uses D^H). The phasors are written through the cfg
// port as Q(12,10) pairs; the exponential itself is evaluated off-line, the
// hardware only keeps its result. Samples arrive one per `in_en` cycle,
// element 0 first, gaps allowed. The product is rounded and saturated back
// to the Q(10,6) sample format.
//
// Timing: out_en follows in_en by 2 cycles (registered product, registered
// rounding); one sample per clock.
//
// From the paper: an element-wise complex multiplication module for D at the
// end of the Householder cascade, and the diagonal unit-modulus definition
// of D. The phasor format, storage and latency are this design's choice.
module dbu_phase_rot
  import dbu_pkg::*;
#(
  parameter int unsigned N_DATA = 206
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      conj_mode,
  input  logic                      cfg_we,
  input  logic [$clog2(N_DATA)-1:0] cfg_addr,
  input  cplx_u_t                   cfg_p,
  input  logic                      in_en,
  input  cplx_x_t                   in_x,
  output logic                      out_en,
  output cplx_x_t                   out_x,
  output logic                      sat_evt
);
  localparam int unsigned AW = $clog2(N_DATA);

  cplx_u_t       ph [N_DATA];
  logic [AW-1:0] idx;
  cplx_u_t       p;

  always_ff @(posedge clk) begin
    if (cfg_we) ph[cfg_addr] <= cfg_p;
  end
  assign p = ph[idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     idx <= '0;
    else if (in_en) idx <= (idx == AW'(N_DATA - 1)) ? '0 : idx + 1'b1;
  end

  logic signed [ACC_W-1:0] m_re, m_im;
  dbu_cmac #(.A_W(U_W), .B_W(X_W), .ACC_W(ACC_W)) u_mac (
    .clk(clk), .rst_n(rst_n), .en(in_en), .clr(1'b1), .conj_a(conj_mode),
    .a_re(p.re), .a_im(p.im), .b_re(in_x.re), .b_im(in_x.im),
    .acc_re(m_re), .acc_im(m_im)
  );

  logic    en_d;
  cplx_x_t y;
  logic    sat_re, sat_im;
  dbu_quant #(.IN_W(ACC_W), .IN_F(U_F+X_F), .OUT_W(X_W), .OUT_F(X_F)) u_q_re (.din(m_re), .dout(y.re), .sat(sat_re));
  dbu_quant #(.IN_W(ACC_W), .IN_F(U_F+X_F), .OUT_W(X_W), .OUT_F(X_F)) u_q_im (.din(m_im), .dout(y.im), .sat(sat_im));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_d    <= 1'b0;
      out_en  <= 1'b0;
      out_x   <= '0;
      sat_evt <= 1'b0;
    end else begin
      en_d    <= in_en;
      out_en  <= en_d;
      sat_evt <= en_d && (sat_re || sat_im);
      if (en_d) out_x <= y;
    end
  end
endmodule
