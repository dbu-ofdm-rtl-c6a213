// tb_dbu_phase_rot: self-checking testbench of the phase module D at its
// default size (N_DATA = 206).
//
// Loads random phasors e^{j d_n} in Q(12,10), streams three vectors (one
// with input gaps) with conj_mode = 0 and two with conj_mode = 1, and
// compares every output with a bit-exact model and the ideal product. The
// output must follow the input by exactly 2 cycles, and D^H applied to the
// output of D must give back the input within rounding.
module tb_dbu_phase_rot;
  import dbu_pkg::*;
  import dbu_ref_pkg::*;
  localparam int N = 206;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic cj, cfg_we, in_en, out_en, sat_evt;
  logic [$clog2(N)-1:0] cfg_addr;
  cplx_u_t cfg_p;
  cplx_x_t in_x, out_x;

  dbu_phase_rot #(.N_DATA(N)) dut (
    .clk(clk), .rst_n(rst_n), .conj_mode(cj), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_p(cfg_p),
    .in_en(in_en), .in_x(in_x), .out_en(out_en), .out_x(out_x), .sat_evt(sat_evt));

  int checks = 0, failures = 0;
  int pr[], pi[], xr[5][], xi[5][], er[], ei[];
  int got_r[$], got_i[$];
  bit en_hist[$];
  real ph[];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s t=%0t", s, $time); end
  endtask

  always @(posedge clk) begin
    en_hist.push_back(in_en);
    if (out_en && rst_n) begin
      got_r.push_back(int'(out_x.re));
      got_i.push_back(int'(out_x.im));
      // output valid exactly two cycles after input valid
      chk(en_hist.size() >= 3 && en_hist[en_hist.size()-3], "out_en without in_en two cycles earlier");
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int v, bit gaps);
    for (int k = 0; k < N; k++) begin
      while (gaps && $urandom % 3 == 0) begin in_en <= 0; @(posedge clk); end
      in_en <= 1; in_x.re <= X_W'(xr[v][k]); in_x.im <= X_W'(xi[v][k]);
      @(posedge clk);
    end
    in_en <= 0;
  endtask

  initial begin
    pr = new[N]; pi = new[N]; er = new[N]; ei = new[N]; ph = new[N];
    for (int k = 0; k < N; k++) begin
      ph[k] = urand_pm1() * 3.14159265;
      pr[k] = $rtoi($cos(ph[k]) * 1024.0 + ($cos(ph[k]) >= 0 ? 0.5 : -0.5));
      pi[k] = $rtoi($sin(ph[k]) * 1024.0 + ($sin(ph[k]) >= 0 ? 0.5 : -0.5));
    end
    for (int v = 0; v < 3; v++) begin
      xr[v] = new[N]; xi[v] = new[N];
      for (int k = 0; k < N; k++) begin xr[v][k] = qam16_q6(); xi[v][k] = qam16_q6(); end
    end
    cj = 0; cfg_we = 0; in_en = 0; cfg_addr = '0; cfg_p = '0; in_x = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int k = 0; k < N; k++) begin
      cfg_we <= 1; cfg_addr <= $clog2(N)'(k); cfg_p.re <= U_W'(pr[k]); cfg_p.im <= U_W'(pi[k]);
      @(posedge clk);
    end
    cfg_we <= 0;
    send(0, 0); send(1, 1); send(2, 0);
    repeat (4) @(posedge clk);
    for (int v = 0; v < 3; v++) begin
      phase_model(N, 0, pr, pi, xr[v], xi[v], er, ei);
      for (int k = 0; k < N; k++) begin
        automatic real ir = (xr[v][k] * $cos(ph[k]) - xi[v][k] * $sin(ph[k])) / 64.0;
        chk(got_r[v*N+k] == er[k] && got_i[v*N+k] == ei[k], $sformatf("D vec %0d elem %0d", v, k));
        chk((got_r[v*N+k] / 64.0 - ir) ** 2 < 0.03 ** 2, "ideal product");
      end
    end
    // conjugate mode on the outputs of vectors 0 and 1
    cj <= 1;
    for (int v = 3; v < 5; v++) begin
      xr[v] = new[N]; xi[v] = new[N];
      for (int k = 0; k < N; k++) begin xr[v][k] = got_r[(v-3)*N+k]; xi[v][k] = got_i[(v-3)*N+k]; end
    end
    @(posedge clk);
    send(3, 0); send(4, 1);
    repeat (4) @(posedge clk);
    for (int v = 3; v < 5; v++) begin
      phase_model(N, 1, pr, pi, xr[v], xi[v], er, ei);
      for (int k = 0; k < N; k++) begin
        automatic int dr = got_r[v*N+k] - xr[v-3][k], di = got_i[v*N+k] - xi[v-3][k];
        chk(got_r[v*N+k] == er[k] && got_i[v*N+k] == ei[k], $sformatf("D^H vec %0d elem %0d", v, k));
        chk(dr >= -2 && dr <= 2 && di >= -2 && di <= 2, "round trip D^H D");
      end
    end
    chk(got_r.size() == 5 * N, "output count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
