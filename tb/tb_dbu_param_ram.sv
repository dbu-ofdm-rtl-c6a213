// tb_dbu_param_ram: self-checking testbench of the parameter storage
// (default 206 words of 48 bits).
//
// Writes every word with random data, reads all words back on both ports
// in different orders (same-cycle read), overwrites a random subset and
// checks that only those words changed.
module tb_dbu_param_ram;
  localparam int D = 206, W = 48;
  logic clk = 0;
  always #2.5 clk = ~clk;

  logic we;
  logic [$clog2(D)-1:0] waddr, ra, rb;
  logic [W-1:0] wdata, da, db;

  dbu_param_ram #(.DEPTH(D), .WIDTH(W)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
    .raddr_a(ra), .rdata_a(da), .raddr_b(rb), .rdata_b(db));

  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [D];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readback();
    for (int i = 0; i < D; i++) begin
      ra = $clog2(D)'(i);
      rb = $clog2(D)'(D - 1 - i);
      #1;
      checks++;
      if (da != ref_mem[i] || db != ref_mem[D-1-i]) begin
        failures++;
        if (failures < 10) $display("FAIL: word %0d", i);
      end
    end
  endtask

  initial begin
    we = 0; waddr = '0; wdata = '0; ra = '0; rb = '0;
    @(posedge clk);
    for (int i = 0; i < D; i++) begin
      ref_mem[i] = {$urandom, $urandom};
      we <= 1; waddr <= $clog2(D)'(i); wdata <= ref_mem[i];
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    readback();
    for (int j = 0; j < 40; j++) begin
      automatic int a = $urandom % D;
      ref_mem[a] = {$urandom, $urandom};
      we <= 1; waddr <= $clog2(D)'(a); wdata <= ref_mem[a];
      @(posedge clk);
    end
    we <= 0;
    @(posedge clk);
    readback();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
