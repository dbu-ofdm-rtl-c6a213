// tb_dbu_cmac: self-checking testbench of the complex MAC unit.
//
// Forms random inner products sum conj(a_k) b_k of length 1 to 206, plain
// products (clr held high) and products without conjugation, and checks the
// registered sum one cycle after the last operand against a software sum.
// Idle cycles (en low) must hold the sum.
module tb_dbu_cmac;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic en, clr, conj_a;
  logic signed [11:0] a_re, a_im;
  logic signed [9:0]  b_re, b_im;
  logic signed [31:0] acc_re, acc_im;

  dbu_cmac #(.A_W(12), .B_W(10), .ACC_W(32)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .clr(clr), .conj_a(conj_a),
    .a_re(a_re), .a_im(a_im), .b_re(b_re), .b_im(b_im), .acc_re(acc_re), .acc_im(acc_im));

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sr, si;
    int len;
    en = 0; clr = 0; conj_a = 0; a_re = 0; a_im = 0; b_re = 0; b_im = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int t = 0; t < 60; t++) begin
      automatic bit cj = t % 3 != 2;
      len = (t % 4 == 0) ? 1 : 1 + $urandom % 206;
      sr = 0; si = 0;
      for (int k = 0; k < len; k++) begin
        logic signed [11:0] ar, ai;
        logic signed [9:0]  br, bi;
        ar = 12'($urandom); ai = 12'($urandom); br = 10'($urandom); bi = 10'($urandom);
        if (cj) begin
          sr += longint'(ar) * br + longint'(ai) * bi;
          si += longint'(ar) * bi - longint'(ai) * br;
        end else begin
          sr += longint'(ar) * br - longint'(ai) * bi;
          si += longint'(ar) * bi + longint'(ai) * br;
        end
        en <= 1; clr <= (k == 0); conj_a <= cj;
        a_re <= ar; a_im <= ai; b_re <= br; b_im <= bi;
        @(posedge clk);
        // an idle cycle in the middle must not change the sum
        if (k == len / 2 && t % 5 == 1) begin
          en <= 0; a_re <= 12'sd1000;
          @(posedge clk);
        end
      end
      en <= 0;
      @(posedge clk);
      checks++;
      if (longint'(acc_re) != sr || longint'(acc_im) != si) begin
        failures++;
        $display("FAIL: test %0d len %0d got (%0d,%0d) exp (%0d,%0d)", t, len, acc_re, acc_im, sr, si);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
