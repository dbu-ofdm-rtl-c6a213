// dbu_wl_runner: one workload run of the U_data transform, used by
// tb_dbu_workloads.
//
// Instantiates dbu_udata_transform with the given N_DATA and K, loads K
// random unit reflection vectors and random phasors that act only on the
// first N_USED elements (zero elements / unit phasors elsewhere, so an
// N_USED-point transform runs inside an N_DATA-sample frame), and streams
// NV QAM vectors (QAM = 16 or 64) back to back in transmitter mode, then
// the results back in receiver mode. Checks: bit-exact against the chained
// integer models, error against the ideal double-precision transform
// (bound TOL, in units of the full scale of one sample), padding elements
// stay exactly zero, latency K/2 (N_DATA + 4) + 2 cycles, one sample per
// clock, and the round trip. Raises `done` when finished.
module dbu_wl_runner
  import dbu_pkg::*;
  import dbu_ref_pkg::*;
#(
  parameter int    N_DATA = 206,
  parameter int    K      = 4,
  parameter int    N_USED = 206,
  parameter int    QAM    = 16,
  parameter int    NV     = 3,
  parameter real   TOL    = 0.15,
  parameter int    RT_LSB = 10,
  parameter string NAME   = "run"
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int N   = N_DATA;
  localparam int NS  = K / 2;
  localparam int LAT = NS * (N + 4) + 2;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic inverse, cfg_we, in_en, out_en, sat_evt;
  logic [$clog2(NS+1)-1:0] cfg_stage;
  logic [$clog2(N)-1:0]    cfg_addr;
  cplx_u_t cfg_u1, cfg_u2;
  cplx_x_t in_x, out_x;

  dbu_udata_transform #(.N_DATA(N_DATA), .K(K)) dut (
    .clk(clk), .rst_n(rst_n), .inverse(inverse), .cfg_we(cfg_we), .cfg_stage(cfg_stage),
    .cfg_addr(cfg_addr), .cfg_u1(cfg_u1), .cfg_u2(cfg_u2), .in_en(in_en), .in_x(in_x),
    .out_en(out_en), .out_x(out_x), .sat_evt(sat_evt));

  int ur[K][], ui[K][], pr[], pi[];
  int xr[2*NV][], xi[2*NV][];
  int got_r[$], got_i[$];
  longint cyc = 0, out_cyc[$], in_first = -1;

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (in_en && in_first < 0) in_first = cyc;
    if (out_en) begin
      got_r.push_back(int'(out_x.re));
      got_i.push_back(int'(out_x.im));
      out_cyc.push_back(cyc);
    end
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 6) $display("FAIL [%s]: %s", NAME, s); end
  endtask

  function automatic int qam_q6();
    int m = (QAM == 64) ? 8 : 4;
    real sc = (QAM == 64) ? $sqrt(42.0) : $sqrt(10.0);
    real a = (2.0 * ($urandom % m) - (m - 1)) / sc;
    return $rtoi(a * 64.0 + (a >= 0 ? 0.5 : -0.5));
  endfunction

  task automatic send(int v);
    for (int k = 0; k < N; k++) begin
      in_en <= 1; in_x.re <= X_W'(xr[v][k]); in_x.im <= X_W'(xi[v][k]);
      @(posedge clk);
    end
  endtask

  task automatic model(bit inv, ref int ar[], ref int ai[], ref int yr[], ref int yi[]);
    int tr[], ti[];
    tr = new[N]; ti = new[N];
    for (int k = 0; k < N; k++) begin tr[k] = ar[k]; ti[k] = ai[k]; end
    if (!inv) begin
      for (int s = 0; s < NS; s++) begin
        hh_model(N, 0, ur[2*s], ui[2*s], ur[2*s+1], ui[2*s+1], tr, ti, yr, yi);
        for (int k = 0; k < N; k++) begin tr[k] = yr[k]; ti[k] = yi[k]; end
      end
      phase_model(N, 0, pr, pi, tr, ti, yr, yi);
    end else begin
      phase_model(N, 1, pr, pi, tr, ti, yr, yi);
      for (int s = NS - 1; s >= 0; s--) begin
        for (int k = 0; k < N; k++) begin tr[k] = yr[k]; ti[k] = yi[k]; end
        hh_model(N, 1, ur[2*s], ui[2*s], ur[2*s+1], ui[2*s+1], tr, ti, yr, yi);
      end
    end
  endtask

  initial begin
    int er[], ei[], tur[], tui[];
    real fr[], fi[], fur[], fui[], e2, emax;
    done = 0; checks = 0; failures = 0;
    er = new[N]; ei = new[N]; pr = new[N]; pi = new[N];
    fr = new[N]; fi = new[N]; fur = new[N]; fui = new[N];
    tur = new[N_USED]; tui = new[N_USED];
    for (int i = 0; i < K; i++) begin
      ur[i] = new[N]; ui[i] = new[N];
      rand_unit(N_USED, tur, tui);
      for (int k = 0; k < N; k++) begin
        ur[i][k] = (k < N_USED) ? tur[k] : 0;
        ui[i][k] = (k < N_USED) ? tui[k] : 0;
      end
    end
    for (int k = 0; k < N; k++) begin
      automatic real d = urand_pm1() * 3.14159265;
      pr[k] = (k < N_USED) ? $rtoi($cos(d) * 1024.0 + ($cos(d) >= 0 ? 0.5 : -0.5)) : 1024;
      pi[k] = (k < N_USED) ? $rtoi($sin(d) * 1024.0 + ($sin(d) >= 0 ? 0.5 : -0.5)) : 0;
    end
    for (int v = 0; v < 2 * NV; v++) begin xr[v] = new[N]; xi[v] = new[N]; end
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < N; k++) begin
        xr[v][k] = (k < N_USED) ? qam_q6() : 0;
        xi[v][k] = (k < N_USED) ? qam_q6() : 0;
      end

    inverse = 0; cfg_we = 0; in_en = 0; cfg_stage = '0; cfg_addr = '0;
    cfg_u1 = '0; cfg_u2 = '0; in_x = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int s = 0; s <= NS; s++)
      for (int k = 0; k < N; k++) begin
        cfg_we <= 1; cfg_stage <= $clog2(NS+1)'(s); cfg_addr <= $clog2(N)'(k);
        if (s < NS) begin
          cfg_u1.re <= U_W'(ur[2*s][k]);   cfg_u1.im <= U_W'(ui[2*s][k]);
          cfg_u2.re <= U_W'(ur[2*s+1][k]); cfg_u2.im <= U_W'(ui[2*s+1][k]);
        end else begin
          cfg_u1.re <= U_W'(pr[k]); cfg_u1.im <= U_W'(pi[k]);
          cfg_u2 <= '0;
        end
        @(posedge clk);
      end
    cfg_we <= 0;
    @(posedge clk);

    for (int v = 0; v < NV; v++) send(v);
    in_en <= 0;
    wait (got_r.size() == NV * N);
    repeat (4) @(posedge clk);
    chk(out_cyc[0] - in_first == LAT, $sformatf("latency %0d, expected %0d", out_cyc[0] - in_first, LAT));
    chk(out_cyc[NV*N-1] - out_cyc[0] == NV*N - 1, "not one sample per clock");
    emax = 0.0;
    for (int v = 0; v < NV; v++) begin
      model(0, xr[v], xi[v], er, ei);
      for (int k = 0; k < N; k++) begin
        chk(got_r[v*N+k] == er[k] && got_i[v*N+k] == ei[k], $sformatf("Tx vec %0d elem %0d", v, k));
        if (k >= N_USED) chk(got_r[v*N+k] == 0 && got_i[v*N+k] == 0, "padding element not zero");
      end
      for (int k = 0; k < N; k++) begin fr[k] = xr[v][k] / 64.0; fi[k] = xi[v][k] / 64.0; end
      for (int i = 0; i < K; i++) begin
        for (int k = 0; k < N; k++) begin fur[k] = ur[i][k] / 1024.0; fui[k] = ui[i][k] / 1024.0; end
        hh_ideal(N, fur, fui, fr, fi);
      end
      for (int k = 0; k < N; k++) begin
        automatic real c = pr[k] / 1024.0, s = pi[k] / 1024.0;
        automatic real yr = fr[k] * c - fi[k] * s, yi = fr[k] * s + fi[k] * c;
        e2 = (got_r[v*N+k] / 64.0 - yr) ** 2 + (got_i[v*N+k] / 64.0 - yi) ** 2;
        if (e2 > emax) emax = e2;
      end
    end
    chk($sqrt(emax) < TOL, $sformatf("max error to ideal %f above %f", $sqrt(emax), TOL));

    inverse <= 1;
    @(posedge clk);
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < N; k++) begin xr[NV+v][k] = got_r[v*N+k]; xi[NV+v][k] = got_i[v*N+k]; end
    for (int v = 0; v < NV; v++) send(NV + v);
    in_en <= 0;
    wait (got_r.size() == 2 * NV * N);
    repeat (4) @(posedge clk);
    begin
      automatic int dmax = 0;
      for (int v = 0; v < NV; v++) begin
        model(1, xr[NV+v], xi[NV+v], er, ei);
        for (int k = 0; k < N; k++) begin
          automatic int g = (NV + v) * N + k;
          automatic int dr = got_r[g] - xr[v][k], di = got_i[g] - xi[v][k];
          chk(got_r[g] == er[k] && got_i[g] == ei[k], $sformatf("Rx vec %0d elem %0d", v, k));
          if (dr < 0) dr = -dr;
          if (di < 0) di = -di;
          if (dr > dmax) dmax = dr;
          if (di > dmax) dmax = di;
        end
      end
      chk(dmax <= RT_LSB, $sformatf("round trip error %0d LSB above %0d", dmax, RT_LSB));
      $display("[%s] N_DATA=%0d K=%0d used=%0d %0dQAM: latency %0d cycles = %.2f us at 200 MHz, max error to ideal %.4f, round trip %0d LSB",
               NAME, N_DATA, K, N_USED, QAM, out_cyc[0] - in_first, (out_cyc[0] - in_first) * 0.005,
               $sqrt(emax), dmax);
    end
    done = 1;
  end
endmodule
