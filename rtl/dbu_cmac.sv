// dbu_cmac: complex multiply-accumulate unit.
//
// On a cycle with `en` high the registered sum becomes
//     acc <= (clr ? 0 : acc) + p,   p = (conj_a ? conj(a) : a) * b
// kept at full precision (fraction bits of a plus those of b). With `clr`
// held high it is a registered complex multiplier; with `clr` high only on
// the first element of a vector it forms an inner product u^H x.
// Latency: the sum including the product presented in cycle t is on `acc`
// in cycle t+1. Reset clears the sum.
//
// The paper lists complex MAC units inside each merged Householder module;
// the four-multiplier structure and single register are this design's.
module dbu_cmac #(
  parameter int unsigned A_W   = 12,
  parameter int unsigned B_W   = 10,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    clr,
  input  logic                    conj_a,
  input  logic signed [A_W-1:0]   a_re,
  input  logic signed [A_W-1:0]   a_im,
  input  logic signed [B_W-1:0]   b_re,
  input  logic signed [B_W-1:0]   b_im,
  output logic signed [ACC_W-1:0] acc_re,
  output logic signed [ACC_W-1:0] acc_im
);
  localparam int unsigned P_W = A_W + B_W + 1;

  logic signed [A_W:0]   ai;      // imaginary part of a, negated on conj
  logic signed [P_W-1:0] p_re, p_im;

  always_comb begin
    ai   = conj_a ? -(A_W+1)'(a_im) : (A_W+1)'(a_im);
    p_re = P_W'(a_re * b_re) - P_W'(ai * b_im);
    p_im = P_W'(a_re * b_im) + P_W'(ai * b_re);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_re <= '0;
      acc_im <= '0;
    end else if (en) begin
      acc_re <= (clr ? ACC_W'(0) : acc_re) + ACC_W'(p_re);
      acc_im <= (clr ? ACC_W'(0) : acc_im) + ACC_W'(p_im);
    end
  end
endmodule
