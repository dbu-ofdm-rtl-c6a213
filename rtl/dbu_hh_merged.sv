// dbu_hh_merged: merged Householder module (two reflections in one stage).
//
// Two consecutive Householder reflections H_k = I - 2 u_k u_k^H and H_{k+1}
// are applied to a vector x0 of N_DATA complex samples without forming the
// intermediate vector x1:
//     alpha1 = u_k^H x0,  alpha2 = u_{k+1}^H x0,  rho = u_{k+1}^H u_k
//     x2     = x0 - [ 2 alpha1 u_k + 2 (alpha2 - 2 alpha1 rho) u_{k+1} ]
// Vectors arrive serially, one element per `in_en` cycle, element 0 first.
// While a vector streams in, two complex MACs form alpha1 and alpha2 and the
// samples wait in the input FIFO. When its last element has arrived the data
// controller turns the two alphas into the coefficients c1 = 2 alpha1 and
// c2 = 2 (alpha2 - 2 alpha1 rho) and queues them. The update side then pops
// the FIFO and emits x0[n] - (c1 u_k[n] + c2 u_{k+1}[n]), one sample per
// cycle, while the next vector is already being accumulated, so the stage
// sustains one sample per clock with gaps in `in_en` allowed.
//
// rho depends only on the parameters: it is accumulated while the pair
// (u_k[n], u_{k+1}[n]) is written, which must be done in ascending n from
// n = 0 (cfg_addr == 0 restarts the sum), before vectors are streamed.
//
// reverse = 1 applies the pair in the opposite order (u_{k+1} first, then
// u_k), as the receiver-side inverse transform needs: alpha1 and alpha2 swap
// roles and rho becomes conj(rho). Change it only while the stage is empty.
//
// Timing: the first output of a vector appears LATENCY = N_DATA + 4 cycles
// after its first input when the input is gap-free; outputs of one vector
// then follow on consecutive cycles. `out_en` is the output-valid strobe
// (En* of the paper), `in_en` the input-valid strobe (En).
//
// From the paper: the merged two-stage formula, the FIFO / parameter RAM /
// MAC / quantization / data-controller structure, and the formats Q(12,10)
// for u, Q(10,6) for samples and Q(12,6) for intermediate scalars. This
// design's own choices: how rho is obtained, the coefficient queue, the
// rounding rules, the pipeline depth (the paper reports N_DATA cycles per
// merged module, this design takes four more) and the reverse control.
module dbu_hh_merged
  import dbu_pkg::*;
#(
  parameter int unsigned N_DATA = 206
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      reverse,
  // parameter load
  input  logic                      cfg_we,
  input  logic [$clog2(N_DATA)-1:0] cfg_addr,
  input  cplx_u_t                   cfg_u1,
  input  cplx_u_t                   cfg_u2,
  // sample stream
  input  logic                      in_en,
  input  cplx_x_t                   in_x,
  output logic                      out_en,
  output cplx_x_t                   out_x,
  // a quantizer clipped a value in this cycle (rounding overflow event)
  output logic                      sat_evt
);
  localparam int unsigned AW       = $clog2(N_DATA);
  localparam int unsigned FIFO_D   = N_DATA + 8;
  localparam int unsigned RHO_W    = 36;
  localparam int unsigned CQ_D     = 4;
  localparam int unsigned P_F      = 2 * I_F;   // fraction bits of alpha*rho
  localparam int unsigned M_F      = U_F + I_F; // fraction bits of c*u

  typedef struct packed {
    cplx_i_t cu1;   // coefficient applied to u_k
    cplx_i_t cu2;   // coefficient applied to u_{k+1}
  } coef_t;

  // ---------------------------------------------------------------- params
  logic [13:0] sat_v;
  u_pair_t pair_a, pair_b;
  logic [AW-1:0] in_idx, out_idx;

  dbu_param_ram #(.DEPTH(N_DATA), .WIDTH($bits(u_pair_t))) u_ram (
    .clk    (clk),
    .we     (cfg_we),
    .waddr  (cfg_addr),
    .wdata  ({cfg_u1, cfg_u2}),
    .raddr_a(in_idx),
    .rdata_a(pair_a),
    .raddr_b(out_idx),
    .rdata_b(pair_b)
  );

  // rho = u_{k+1}^H u_k, accumulated during the parameter load
  logic signed [RHO_W-1:0] rho_acc_re, rho_acc_im;
  cplx_i_t rho_q;

  dbu_cmac #(.A_W(U_W), .B_W(U_W), .ACC_W(RHO_W)) u_mac_rho (
    .clk(clk), .rst_n(rst_n), .en(cfg_we), .clr(cfg_addr == '0), .conj_a(1'b1),
    .a_re(cfg_u2.re), .a_im(cfg_u2.im), .b_re(cfg_u1.re), .b_im(cfg_u1.im),
    .acc_re(rho_acc_re), .acc_im(rho_acc_im)
  );
  dbu_quant #(.IN_W(RHO_W), .IN_F(2*U_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_rho_re (
    .din(rho_acc_re), .dout(rho_q.re), .sat(sat_v[0]));
  dbu_quant #(.IN_W(RHO_W), .IN_F(2*U_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_rho_im (
    .din(rho_acc_im), .dout(rho_q.im), .sat(sat_v[1]));

  // ------------------------------------------------------- input side
  logic signed [ACC_W-1:0] a1_re, a1_im, a2_re, a2_im;
  logic                    last_in;

  assign last_in = in_en && (in_idx == AW'(N_DATA - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      in_idx <= '0;
    else if (in_en)  in_idx <= last_in ? '0 : in_idx + 1'b1;
  end

  dbu_cmac #(.A_W(U_W), .B_W(X_W), .ACC_W(ACC_W)) u_mac_a1 (
    .clk(clk), .rst_n(rst_n), .en(in_en), .clr(in_idx == '0), .conj_a(1'b1),
    .a_re(pair_a.u1.re), .a_im(pair_a.u1.im), .b_re(in_x.re), .b_im(in_x.im),
    .acc_re(a1_re), .acc_im(a1_im)
  );
  dbu_cmac #(.A_W(U_W), .B_W(X_W), .ACC_W(ACC_W)) u_mac_a2 (
    .clk(clk), .rst_n(rst_n), .en(in_en), .clr(in_idx == '0), .conj_a(1'b1),
    .a_re(pair_a.u2.re), .a_im(pair_a.u2.im), .b_re(in_x.re), .b_im(in_x.im),
    .acc_re(a2_re), .acc_im(a2_im)
  );

  // input FIFO
  cplx_x_t dq_dout;
  logic    dq_empty, dq_full, go;
  logic [$clog2(FIFO_D+1)-1:0] dq_count;

  dbu_fifo #(.WIDTH($bits(cplx_x_t)), .DEPTH(FIFO_D)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(in_en), .din(in_x), .pop(go),
    .dout(dq_dout), .count(dq_count), .empty(dq_empty), .full(dq_full)
  );

  // --------------------------------------- data controller: coefficients
  // stage C1 (done_d): quantize alphas, order them, start alpha_first * rho
  logic    done_d, done_d2, rev_r;
  cplx_i_t a1_q, a2_q, a_first, a_second, rho_e, a_first_r, a_second_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_d  <= 1'b0;
      done_d2 <= 1'b0;
    end else begin
      done_d  <= last_in;
      done_d2 <= done_d;
    end
  end

  dbu_quant #(.IN_W(ACC_W), .IN_F(U_F+X_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_a1re (.din(a1_re), .dout(a1_q.re), .sat(sat_v[2]));
  dbu_quant #(.IN_W(ACC_W), .IN_F(U_F+X_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_a1im (.din(a1_im), .dout(a1_q.im), .sat(sat_v[3]));
  dbu_quant #(.IN_W(ACC_W), .IN_F(U_F+X_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_a2re (.din(a2_re), .dout(a2_q.re), .sat(sat_v[4]));
  dbu_quant #(.IN_W(ACC_W), .IN_F(U_F+X_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_a2im (.din(a2_im), .dout(a2_q.im), .sat(sat_v[5]));

  always_comb begin
    a_first  = reverse ? a2_q : a1_q;
    a_second = reverse ? a1_q : a2_q;
    rho_e.re = rho_q.re;
    rho_e.im = reverse ? -rho_q.im : rho_q.im;
  end

  always_ff @(posedge clk) begin
    if (done_d) begin
      a_first_r  <= a_first;
      a_second_r <= a_second;
      rev_r      <= reverse;
    end
  end

  logic signed [ACC_W-1:0] p_re, p_im;   // alpha_first * rho, P_F fraction bits
  dbu_cmac #(.A_W(I_W), .B_W(I_W), .ACC_W(ACC_W)) u_mac_p (
    .clk(clk), .rst_n(rst_n), .en(done_d), .clr(1'b1), .conj_a(1'b0),
    .a_re(a_first.re), .a_im(a_first.im), .b_re(rho_e.re), .b_im(rho_e.im),
    .acc_re(p_re), .acc_im(p_im)
  );

  // stage C2 (done_d2): c_first = 2 a_first, c_second = 2 (a_second - 2 p)
  logic signed [I_W:0]     cf_re_w, cf_im_w;
  logic signed [ACC_W+3:0] cs_re_w, cs_im_w;
  cplx_i_t c_first, c_second;
  coef_t   cq_din, cq_dout;
  logic    cq_empty, cq_full;
  logic [$clog2(CQ_D+1)-1:0] cq_count;

  always_comb begin
    cf_re_w = (I_W+1)'(a_first_r.re) <<< 1;
    cf_im_w = (I_W+1)'(a_first_r.im) <<< 1;
    cs_re_w = ((ACC_W+4)'(a_second_r.re) <<< (P_F - I_F + 1)) - ((ACC_W+4)'(p_re) <<< 2);
    cs_im_w = ((ACC_W+4)'(a_second_r.im) <<< (P_F - I_F + 1)) - ((ACC_W+4)'(p_im) <<< 2);
  end

  dbu_quant #(.IN_W(I_W+1), .IN_F(I_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_cfre (.din(cf_re_w), .dout(c_first.re), .sat(sat_v[6]));
  dbu_quant #(.IN_W(I_W+1), .IN_F(I_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_cfim (.din(cf_im_w), .dout(c_first.im), .sat(sat_v[7]));
  dbu_quant #(.IN_W(ACC_W+4), .IN_F(P_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_csre (.din(cs_re_w), .dout(c_second.re), .sat(sat_v[8]));
  dbu_quant #(.IN_W(ACC_W+4), .IN_F(P_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_csim (.din(cs_im_w), .dout(c_second.im), .sat(sat_v[9]));

  always_comb begin
    cq_din.cu1 = rev_r ? c_second : c_first;
    cq_din.cu2 = rev_r ? c_first  : c_second;
  end

  logic last_out;
  assign go       = !cq_empty && !dq_empty;
  assign last_out = go && (out_idx == AW'(N_DATA - 1));

  dbu_fifo #(.WIDTH($bits(coef_t)), .DEPTH(CQ_D)) u_coef_q (
    .clk(clk), .rst_n(rst_n), .push(done_d2), .din(cq_din), .pop(last_out),
    .dout(cq_dout), .count(cq_count), .empty(cq_empty), .full(cq_full)
  );

  // ------------------------------------------------------- update side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   out_idx <= '0;
    else if (go)  out_idx <= last_out ? '0 : out_idx + 1'b1;
  end

  logic signed [ACC_W-1:0] m1_re, m1_im, m2_re, m2_im;
  dbu_cmac #(.A_W(U_W), .B_W(I_W), .ACC_W(ACC_W)) u_mac_m1 (
    .clk(clk), .rst_n(rst_n), .en(go), .clr(1'b1), .conj_a(1'b0),
    .a_re(pair_b.u1.re), .a_im(pair_b.u1.im), .b_re(cq_dout.cu1.re), .b_im(cq_dout.cu1.im),
    .acc_re(m1_re), .acc_im(m1_im)
  );
  dbu_cmac #(.A_W(U_W), .B_W(I_W), .ACC_W(ACC_W)) u_mac_m2 (
    .clk(clk), .rst_n(rst_n), .en(go), .clr(1'b1), .conj_a(1'b0),
    .a_re(pair_b.u2.re), .a_im(pair_b.u2.im), .b_re(cq_dout.cu2.re), .b_im(cq_dout.cu2.im),
    .acc_re(m2_re), .acc_im(m2_im)
  );

  cplx_x_t x_d;
  logic    go_d;
  always_ff @(posedge clk) begin
    if (go) x_d <= dq_dout;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) go_d <= 1'b0;
    else        go_d <= go;
  end

  // correction term c1 u_k[n] + c2 u_{k+1}[n], rounded to Q(12,6)
  logic signed [ACC_W:0] corr_re_w, corr_im_w;
  cplx_i_t corr;
  logic signed [I_W:0]   y_re_w, y_im_w;
  cplx_x_t y;

  always_comb begin
    corr_re_w = (ACC_W+1)'(m1_re) + (ACC_W+1)'(m2_re);
    corr_im_w = (ACC_W+1)'(m1_im) + (ACC_W+1)'(m2_im);
  end
  dbu_quant #(.IN_W(ACC_W+1), .IN_F(M_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_cre (.din(corr_re_w), .dout(corr.re), .sat(sat_v[10]));
  dbu_quant #(.IN_W(ACC_W+1), .IN_F(M_F), .OUT_W(I_W), .OUT_F(I_F)) u_q_cim (.din(corr_im_w), .dout(corr.im), .sat(sat_v[11]));

  // x_{k+1} = x - correction, saturated to the sample format Q(10,6)
  always_comb begin
    y_re_w = (I_W+1)'(x_d.re) - (I_W+1)'(corr.re);
    y_im_w = (I_W+1)'(x_d.im) - (I_W+1)'(corr.im);
  end
  dbu_quant #(.IN_W(I_W+1), .IN_F(X_F), .OUT_W(X_W), .OUT_F(X_F)) u_q_yre (.din(y_re_w), .dout(y.re), .sat(sat_v[12]));
  dbu_quant #(.IN_W(I_W+1), .IN_F(X_F), .OUT_W(X_W), .OUT_F(X_F)) u_q_yim (.din(y_im_w), .dout(y.im), .sat(sat_v[13]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_en <= 1'b0;
      out_x  <= '0;
    end else begin
      out_en <= go_d;
      if (go_d) out_x <= y;
    end
  end

  // rho and alpha quantizers act only on the cycles their value is used
  logic sat_now;
  assign sat_now = (done_d && |sat_v[5:2]) || (done_d2 && |sat_v[9:6]) ||
                   (go_d && |sat_v[13:10]);
  logic cfg_last_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_last_d <= 1'b0;
      sat_evt    <= 1'b0;
    end else begin
      cfg_last_d <= cfg_we && (cfg_addr == AW'(N_DATA - 1));
      sat_evt    <= sat_now || (cfg_last_d && |sat_v[1:0]);
    end
  end

  // the coefficient queue never fills: at most two vectors are in flight
  // occupancy bounds of the two queues (used by the assertions)
  a_dq_bound: assert property (@(posedge clk) disable iff (!rst_n) 32'(dq_count) <= FIFO_D);
  a_cq_bound: assert property (@(posedge clk) disable iff (!rst_n) 32'(cq_count) <= CQ_D);
  a_cq_room: assert property (@(posedge clk) disable iff (!rst_n) done_d2 |-> !cq_full)
    else $error("dbu_hh_merged: coefficient queue overflow");
  a_dq_room: assert property (@(posedge clk) disable iff (!rst_n) in_en |-> !dq_full)
    else $error("dbu_hh_merged: input FIFO overflow");
  a_no_cfg_while_busy: assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> dq_empty && !in_en)
    else $error("dbu_hh_merged: parameter write while vectors are in flight");
endmodule
