// tb_dbu_fifo: self-checking testbench of the input FIFO (default size,
// 20-bit words, 214 entries).
//
// Random push/pop traffic against a queue model, including filling the FIFO
// completely, push and pop in the same cycle while full, and draining it.
// Checks dout, count, empty and full every cycle.
module tb_dbu_fifo;
  localparam int W = 20, D = 214;
  logic clk = 0, rst_n = 0;
  always #2.5 clk = ~clk;

  logic push, pop, empty, full;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;

  dbu_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .clk(clk), .rst_n(rst_n), .push(push), .din(din), .pop(pop),
    .dout(dout), .count(count), .empty(empty), .full(full));

  int checks = 0, failures = 0, nfull = 0;
  logic [W-1:0] q[$];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      // phases: fill, random, drain
      automatic int ph = (i < 300) ? 0 : (i < 3500 ? 1 : 2);
      bit ps, pp;
      #1;
      chk(32'(count) == q.size(), $sformatf("count %0d exp %0d", count, q.size()));
      chk(empty == (q.size() == 0) && full == (q.size() == D), "flags");
      if (q.size() > 0) chk(dout == q[0], $sformatf("dout %h exp %h", dout, q[0]));
      if (full) nfull++;
      ps = (ph == 0) ? 1 : (ph == 1 ? $urandom % 2 : 0);
      pp = (ph == 0) ? (q.size() == D && i % 7 == 0) : (ph == 1 ? $urandom % 2 : 1);
      if (q.size() == 0) pp = 0;
      if (q.size() == D && !pp) ps = 0;
      push <= ps; pop <= pp; din <= W'($urandom);
      @(posedge clk);
      if (pp) void'(q.pop_front());
      if (ps) q.push_back(din);
    end
    chk(nfull > 0, "FIFO never reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
