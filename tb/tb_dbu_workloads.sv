// tb_dbu_workloads: the configurations the DBU-OFDM evaluation uses, run
// through the U_data transform.
//
//   cfg3_k4     : N = 256 subcarriers (206 data), K = 4, 16QAM (default core)
//   cfg1_pad    : N = 64 (46 data) zero-padded into the 206-sample frame
//   cfg2_pad    : N = 128 (94 data) zero-padded into the 206-sample frame
//   usrp_64qam  : N = 256, 64QAM as in the over-the-air test
//   cfg3_k32    : K = 32 (16 merged stages)
//   cfg3_k128   : K = 128 (64 merged stages)
// Each run checks bit-exactness, error to the ideal transform, latency,
// throughput and the transmitter/receiver round trip (see dbu_wl_runner).
module tb_dbu_workloads;
  localparam int R = 6;
  logic done [R];
  int   ch [R], fl [R];

  dbu_wl_runner #(.K(4),   .N_USED(206), .QAM(16), .TOL(0.08), .RT_LSB(6), .NAME("cfg3_k4"))
    r0 (.done(done[0]), .checks(ch[0]), .failures(fl[0]));
  dbu_wl_runner #(.K(4),   .N_USED(46),  .QAM(16), .TOL(0.08), .RT_LSB(6), .NAME("cfg1_pad"))
    r1 (.done(done[1]), .checks(ch[1]), .failures(fl[1]));
  dbu_wl_runner #(.K(4),   .N_USED(94),  .QAM(16), .TOL(0.08), .RT_LSB(6), .NAME("cfg2_pad"))
    r2 (.done(done[2]), .checks(ch[2]), .failures(fl[2]));
  dbu_wl_runner #(.K(4),   .N_USED(206), .QAM(64), .TOL(0.08), .RT_LSB(6), .NAME("usrp_64qam"))
    r3 (.done(done[3]), .checks(ch[3]), .failures(fl[3]));
  dbu_wl_runner #(.K(32),  .N_USED(206), .QAM(16), .TOL(0.15), .RT_LSB(15), .NAME("cfg3_k32"))
    r4 (.done(done[4]), .checks(ch[4]), .failures(fl[4]));
  dbu_wl_runner #(.K(128), .N_USED(206), .QAM(16), .TOL(0.35), .RT_LSB(30), .NAME("cfg3_k128"))
    r5 (.done(done[5]), .checks(ch[5]), .failures(fl[5]));

  int checks = 0, failures = 0;

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10;
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5]);
    for (int i = 0; i < R; i++) begin
      checks   += ch[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
