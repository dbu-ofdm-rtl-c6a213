// tb_dbu_udata_transform: end-to-end testbench of the U_data transform at
// its default parameters (N_DATA = 206, K = 4).
//
// Loads K random unit reflection vectors and random phasors, then:
//   1. transmitter mode: 4 vectors back to back and 2 with input gaps;
//      every output is compared bit-exactly with the chained integer models
//      and, within a tolerance, with the ideal double-precision D H_K..H_1 x;
//      the latency K/2 (N_DATA + 4) + 2 and one-sample-per-clock throughput
//      are checked;
//   2. a large-amplitude vector that makes the quantizers saturate
//      (sat_evt must pulse, outputs still bit-exact);
//   3. mode switch to receiver mode: the transmitter outputs are sent back
//      and must be bit-exact with the inverse chain and within a few LSB of
//      the original vectors (U_data^H U_data = I).
// Each mechanism (back-to-back streaming, input gaps, saturation, both modes,
// the mode switch) is counted, and one that never happened is a failure.
module tb_dbu_udata_transform;
  import dbu_pkg::*;
  import dbu_ref_pkg::*;

  localparam int N   = 206;
  localparam int K   = 4;
  localparam int NS  = K / 2;
  localparam int LAT = NS * (N + 4) + 2;
  localparam int NF  = 7;    // forward vectors (6 QAM + 1 large)

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic inverse, cfg_we, in_en, out_en, sat_evt;
  logic [$clog2(NS+1)-1:0] cfg_stage;
  logic [$clog2(N)-1:0]    cfg_addr;
  cplx_u_t cfg_u1, cfg_u2;
  cplx_x_t in_x, out_x;

  dbu_udata_transform dut (
    .clk(clk), .rst_n(rst_n), .inverse(inverse), .cfg_we(cfg_we), .cfg_stage(cfg_stage),
    .cfg_addr(cfg_addr), .cfg_u1(cfg_u1), .cfg_u2(cfg_u2), .in_en(in_en), .in_x(in_x),
    .out_en(out_en), .out_x(out_x), .sat_evt(sat_evt));

  int checks = 0, failures = 0;
  int ur[K][], ui[K][], pr[], pi[];
  int xr[2*NF][], xi[2*NF][];
  int got_r[$], got_i[$];
  longint cyc = 0, out_cyc[$], in_first[$];
  bit prev_en = 0;
  int n_in = 0;
  int n_fwd = 0, n_inv = 0, n_b2b = 0, n_gap = 0, n_sat = 0, n_switch = 0;

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (in_en && !prev_en) in_first.push_back(cyc);
    prev_en <= in_en;
    if (sat_evt) n_sat++;
    if (in_en) n_in++;
    if (out_en) begin
      got_r.push_back(int'(out_x.re));
      got_i.push_back(int'(out_x.im));
      out_cyc.push_back(cyc);
    end
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  task automatic send(int v, bit gaps);
    for (int k = 0; k < N; k++) begin
      while (gaps && $urandom % 4 == 0) begin in_en <= 0; @(posedge clk); end
      in_en <= 1; in_x.re <= X_W'(xr[v][k]); in_x.im <= X_W'(xi[v][k]);
      @(posedge clk);
    end
    if (gaps) n_gap++;
  endtask

  task automatic idle();
    in_en <= 0;
    @(posedge clk);
  endtask

  // expected output of the whole cascade, bit-exact
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
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog got=%0d nin=%0d idx %0d %0d %0d %0d", got_r.size(), n_in, dut.g_stage[0].u_hh.in_idx, dut.g_stage[0].u_hh.out_idx, dut.g_stage[1].u_hh.in_idx, dut.g_stage[1].u_hh.out_idx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int er[], ei[];
    real fr[], fi[], fur[], fui[], e2, emax;
    er = new[N]; ei = new[N]; pr = new[N]; pi = new[N];
    fr = new[N]; fi = new[N]; fur = new[N]; fui = new[N];
    for (int i = 0; i < K; i++) begin
      ur[i] = new[N]; ui[i] = new[N];
      rand_unit(N, ur[i], ui[i]);
    end
    for (int k = 0; k < N; k++) begin
      automatic real d = urand_pm1() * 3.14159265;
      pr[k] = $rtoi($cos(d) * 1024.0 + ($cos(d) >= 0 ? 0.5 : -0.5));
      pi[k] = $rtoi($sin(d) * 1024.0 + ($sin(d) >= 0 ? 0.5 : -0.5));
    end
    for (int v = 0; v < 2 * NF; v++) begin xr[v] = new[N]; xi[v] = new[N]; end
    for (int v = 0; v < NF - 1; v++)
      for (int k = 0; k < N; k++) begin xr[v][k] = qam16_q6(); xi[v][k] = qam16_q6(); end
    // large vector: every sample near the top of the Q(10,6) range
    for (int k = 0; k < N; k++) begin xr[NF-1][k] = 500; xi[NF-1][k] = -500; end

    inverse = 0; cfg_we = 0; in_en = 0; cfg_stage = '0; cfg_addr = '0;
    cfg_u1 = '0; cfg_u2 = '0; in_x = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // parameter load: stages 0..NS-1, then the phase module
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

    // ---- transmitter mode
    for (int v = 0; v < 4; v++) send(v, 0);
    send(4, 1); send(5, 1);
    send(NF - 1, 0);
    idle();
    wait (got_r.size() == NF * N);
    repeat (10) @(posedge clk);
    chk(out_cyc[0] - in_first[0] == LAT,
        $sformatf("latency %0d cycles, expected %0d", out_cyc[0] - in_first[0], LAT));
    chk(out_cyc[4*N-1] - out_cyc[0] == 4*N - 1, "back-to-back vectors not one sample per clock");
    if (out_cyc[4*N-1] - out_cyc[0] == 4*N - 1) n_b2b += 4;
    emax = 0.0;
    for (int v = 0; v < NF; v++) begin
      model(0, xr[v], xi[v], er, ei);
      for (int k = 0; k < N; k++)
        chk(got_r[v*N+k] == er[k] && got_i[v*N+k] == ei[k],
            $sformatf("Tx vec %0d elem %0d got (%0d,%0d) exp (%0d,%0d)", v, k,
                      got_r[v*N+k], got_i[v*N+k], er[k], ei[k]));
      n_fwd++;
      if (v < NF - 1) begin
        // ideal: H_1 first ... H_K, then D
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
    end
    chk($sqrt(emax) < 0.15, $sformatf("Tx max error to ideal %f", $sqrt(emax)));
    $display("Tx max error to ideal transform: %f", $sqrt(emax));
    chk(n_sat > 0, "no saturation event on the large vector");

    // ---- receiver mode: feed the Tx outputs of the QAM vectors back
    inverse <= 1;
    n_switch++;
    @(posedge clk);
    for (int v = 0; v < NF - 1; v++)
      for (int k = 0; k < N; k++) begin
        xr[NF+v][k] = got_r[v*N+k];
        xi[NF+v][k] = got_i[v*N+k];
      end
    for (int v = 0; v < 3; v++) send(NF + v, 0);
    for (int v = 3; v < NF - 1; v++) send(NF + v, 1);
    idle();
    wait (got_r.size() == (2 * NF - 1) * N);
    repeat (10) @(posedge clk);
    for (int v = 0; v < NF - 1; v++) begin
      automatic int dmax = 0;
      model(1, xr[NF+v], xi[NF+v], er, ei);
      for (int k = 0; k < N; k++) begin
        automatic int g = (NF + v) * N + k;
        automatic int dr = got_r[g] - xr[v][k], di = got_i[g] - xi[v][k];
        chk(got_r[g] == er[k] && got_i[g] == ei[k], $sformatf("Rx vec %0d elem %0d", v, k));
        if (dr < 0) dr = -dr;
        if (di < 0) di = -di;
        if (dr > dmax) dmax = dr;
        if (di > dmax) dmax = di;
      end
      chk(dmax <= 10, $sformatf("round trip vec %0d max error %0d LSB", v, dmax));
      n_inv++;
    end
    chk(got_r.size() == (2 * NF - 1) * N, "output count");

    $display("mechanisms: tx_vectors=%0d rx_vectors=%0d back_to_back=%0d gapped_inputs=%0d saturation_events=%0d mode_switches=%0d",
             n_fwd, n_inv, n_b2b, n_gap, n_sat, n_switch);
    chk(n_fwd > 0 && n_inv > 0 && n_b2b > 0 && n_gap > 0 && n_sat > 0 && n_switch > 0,
        "a mechanism was never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
