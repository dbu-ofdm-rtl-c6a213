// tb_dbu_quant: self-checking testbench of the quantization unit.
//
// Drives two instances, Q(32,16) -> Q(12,6) and Q(13,6) -> Q(10,6), with
// hand-picked corner values (ties, negative ties, both saturation limits)
// and random values, and compares dout/sat with an integer model written
// from the definition: round to nearest with ties up, then clip.
module tb_dbu_quant;
  import dbu_ref_pkg::*;

  logic signed [31:0] a_in;
  logic signed [11:0] a_out;
  logic               a_sat;
  logic signed [12:0] b_in;
  logic signed [9:0]  b_out;
  logic               b_sat;

  dbu_quant #(.IN_W(32), .IN_F(16), .OUT_W(12), .OUT_F(6)) dut_a (.din(a_in), .dout(a_out), .sat(a_sat));
  dbu_quant #(.IN_W(13), .IN_F(6),  .OUT_W(10), .OUT_F(6)) dut_b (.din(b_in), .dout(b_out), .sat(b_sat));

  int checks = 0, failures = 0;

  task automatic try_a(longint v);
    longint e, r;
    a_in = 32'(v);
    #1;
    r = (longint'(a_in) + 512) >>> 10;
    e = rq(longint'(a_in), 16, 12, 6);
    checks++;
    if (longint'(a_out) != e || a_sat != (r != e)) begin
      failures++;
      $display("FAIL A: in %0d out %0d sat %0b exp %0d", a_in, a_out, a_sat, e);
    end
  endtask

  task automatic try_b(longint v);
    longint e;
    b_in = 13'(v);
    #1;
    e = rq(longint'(b_in), 6, 10, 6);
    checks++;
    if (longint'(b_out) != e || b_sat != (longint'(b_in) != e)) begin
      failures++;
      $display("FAIL B: in %0d out %0d sat %0b exp %0d", b_in, b_out, b_sat, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // hand-computed: 1.5 LSB of Q(.,6) = 1536 in 16-bit fraction -> rounds to 2
    a_in = 32'sd1536;  #1; checks++; if (a_out != 12'sd2 || a_sat) failures++;
    // -1.5 LSB -> ties up -> -1
    a_in = -32'sd1536; #1; checks++; if (a_out != -12'sd1 || a_sat) failures++;
    // 0.49 LSB -> 0
    a_in = 32'sd500;   #1; checks++; if (a_out != 12'sd0) failures++;
    // +40.0 > 31.98 -> saturates at 2047
    a_in = 32'sd40 <<< 16; #1; checks++; if (a_out != 12'sd2047 || !a_sat) failures++;
    a_in = -(32'sd40 <<< 16); #1; checks++; if (a_out != -12'sd2048 || !a_sat) failures++;
    // Q(13,6) -> Q(10,6): 600 -> 511 saturated, -600 -> -512, 100 -> 100
    b_in = 13'sd600;  #1; checks++; if (b_out != 10'sd511 || !b_sat) failures++;
    b_in = -13'sd600; #1; checks++; if (b_out != -10'sd512 || !b_sat) failures++;
    b_in = 13'sd100;  #1; checks++; if (b_out != 10'sd100 || b_sat) failures++;
    for (int i = 0; i < 2000; i++) begin
      try_a(longint'($signed($urandom)) >>> ($urandom % 12));
      try_b(longint'($signed($urandom)) >>> 19);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
