// tb_dbu_hh_merged: self-checking testbench of the merged Householder stage
// at its default size (N_DATA = 206).
//
// Loads a random unit-norm pair (u1, u2) and streams 16QAM vectors through
// the stage: three vectors back to back, two with random input gaps, then
// two in reverse mode. Every output sample is compared with a bit-exact
// integer model of the stage; each forward vector is also compared with the
// ideal double-precision result H2 H1 x (small tolerance). The first output
// must come N_DATA + 4 cycles after the first input, back-to-back vectors
// must leave back to back (one sample per clock), and reverse mode applied
// after forward mode must return the original vector within tolerance.
module tb_dbu_hh_merged;
  import dbu_pkg::*;
  import dbu_ref_pkg::*;

  localparam int N   = 206;
  localparam int LAT = N + 4;
  localparam int NV  = 7;

  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic rev, cfg_we, in_en, out_en, sat_evt;
  logic [$clog2(N)-1:0] cfg_addr;
  cplx_u_t cfg_u1, cfg_u2;
  cplx_x_t in_x, out_x;

  dbu_hh_merged #(.N_DATA(N)) dut (
    .clk(clk), .rst_n(rst_n), .reverse(rev), .cfg_we(cfg_we), .cfg_addr(cfg_addr),
    .cfg_u1(cfg_u1), .cfg_u2(cfg_u2), .in_en(in_en), .in_x(in_x),
    .out_en(out_en), .out_x(out_x), .sat_evt(sat_evt));

  int checks = 0, failures = 0;
  int u1r[], u1i[], u2r[], u2i[];
  int xr[NV][], xi[NV][];
  int got_r[$], got_i[$];
  longint cyc = 0, first_in_cyc = -1, first_out_cyc = -1;
  longint out_cyc[$];

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (in_en && first_in_cyc < 0) first_in_cyc = cyc;
  always @(posedge clk) if (out_en && rst_n) begin
    got_r.push_back(int'(out_x.re));
    got_i.push_back(int'(out_x.im));
    out_cyc.push_back(cyc);
    if (first_out_cyc < 0) first_out_cyc = cyc;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic send(int v, bit gaps);
    for (int k = 0; k < N; k++) begin
      if (gaps) begin
        while ($urandom % 3 == 0) begin
          in_en <= 0;
          @(posedge clk);
        end
      end
      in_en   <= 1;
      in_x.re <= X_W'(xr[v][k]);
      in_x.im <= X_W'(xi[v][k]);
      @(posedge clk);
    end
    in_en <= 0;
  endtask

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int er[], ei[];
    real fur1[], fui1[], fur2[], fui2[], fxr[], fxi[], maxerr;
    u1r = new[N]; u1i = new[N]; u2r = new[N]; u2i = new[N];
    er = new[N]; ei = new[N];
    rand_unit(N, u1r, u1i);
    rand_unit(N, u2r, u2i);
    for (int v = 0; v < NV; v++) begin
      xr[v] = new[N]; xi[v] = new[N];
      for (int k = 0; k < N; k++) begin
        xr[v][k] = qam16_q6();
        xi[v][k] = qam16_q6();
      end
    end
    rev = 0; cfg_we = 0; in_en = 0; cfg_addr = '0; cfg_u1 = '0; cfg_u2 = '0; in_x = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int k = 0; k < N; k++) begin
      cfg_we <= 1; cfg_addr <= $clog2(N)'(k);
      cfg_u1.re <= U_W'(u1r[k]); cfg_u1.im <= U_W'(u1i[k]);
      cfg_u2.re <= U_W'(u2r[k]); cfg_u2.im <= U_W'(u2i[k]);
      @(posedge clk);
    end
    cfg_we <= 0;
    @(posedge clk);

    // forward: 3 vectors back to back, 2 with gaps
    send(0, 0); send(1, 0); send(2, 0);
    send(3, 1); send(4, 1);
    wait (got_r.size() == 5 * N);
    repeat (5) @(posedge clk);
    check(first_out_cyc - first_in_cyc == LAT,
          $sformatf("latency %0d, expected %0d", first_out_cyc - first_in_cyc, LAT));
    // throughput: the first three vectors come out on consecutive cycles
    check(out_cyc[3*N-1] - out_cyc[0] == 3*N - 1,
          $sformatf("3 back-to-back vectors took %0d cycles", out_cyc[3*N-1] - out_cyc[0] + 1));

    for (int v = 0; v < 5; v++) begin
      hh_model(N, 0, u1r, u1i, u2r, u2i, xr[v], xi[v], er, ei);
      for (int k = 0; k < N; k++)
        check(got_r[v*N+k] == er[k] && got_i[v*N+k] == ei[k],
              $sformatf("fwd vec %0d elem %0d: got (%0d,%0d) exp (%0d,%0d)", v, k,
                        got_r[v*N+k], got_i[v*N+k], er[k], ei[k]));
      // ideal floating point
      fur1 = new[N]; fui1 = new[N]; fur2 = new[N]; fui2 = new[N]; fxr = new[N]; fxi = new[N];
      for (int k = 0; k < N; k++) begin
        fur1[k] = u1r[k] / 1024.0; fui1[k] = u1i[k] / 1024.0;
        fur2[k] = u2r[k] / 1024.0; fui2[k] = u2i[k] / 1024.0;
        fxr[k] = xr[v][k] / 64.0;  fxi[k] = xi[v][k] / 64.0;
      end
      hh_ideal(N, fur1, fui1, fxr, fxi);
      hh_ideal(N, fur2, fui2, fxr, fxi);
      maxerr = 0.0;
      for (int k = 0; k < N; k++) begin
        automatic real d = (got_r[v*N+k] / 64.0 - fxr[k]) ** 2 + (got_i[v*N+k] / 64.0 - fxi[k]) ** 2;
        if (d > maxerr) maxerr = d;
      end
      check($sqrt(maxerr) < 0.08, $sformatf("vec %0d ideal max error %f", v, $sqrt(maxerr)));
    end

    // reverse: send the forward output of vector 0 and vector 1 back
    rev <= 1;
    @(posedge clk);
    for (int v = 0; v < 2; v++)
      for (int k = 0; k < N; k++) begin
        xr[5+v][k] = got_r[v*N+k];
        xi[5+v][k] = got_i[v*N+k];
      end
    send(5, 0); send(6, 1);
    wait (got_r.size() == 7 * N);
    repeat (5) @(posedge clk);
    for (int v = 5; v < 7; v++) begin
      automatic int dmax = 0;
      hh_model(N, 1, u1r, u1i, u2r, u2i, xr[v], xi[v], er, ei);
      for (int k = 0; k < N; k++) begin
        automatic int dr = got_r[v*N+k] - xr[v-5][k], di = got_i[v*N+k] - xi[v-5][k];
        check(got_r[v*N+k] == er[k] && got_i[v*N+k] == ei[k],
              $sformatf("rev vec %0d elem %0d mismatch", v, k));
        if (dr < 0) dr = -dr;
        if (di < 0) di = -di;
        if (dr > dmax) dmax = dr;
        if (di > dmax) dmax = di;
      end
      // round trip within 5 LSB of Q(10,6)
      check(dmax <= 5, $sformatf("round trip vec %0d max error %0d LSB", v - 5, dmax));
    end
    check(got_r.size() == 7 * N, "output count");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
