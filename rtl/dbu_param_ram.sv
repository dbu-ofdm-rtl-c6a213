// dbu_param_ram: parameter storage of one transform stage.
//
// DEPTH words of WIDTH bits with one synchronous write port and two
// asynchronous (same-cycle) read ports, as LUT-based distributed memory:
// the reported implementation uses no block RAM. A merged Householder stage
// keeps the pair (u_k[n], u_{k+1}[n]) in word n; the phase module keeps
// (cos d_n, sin d_n). Port A serves the inner-product side and port B the
// update side, so one vector can be accumulated while the previous one is
// being corrected. Contents are not reset: they must be written before use.
module dbu_param_ram #(
  parameter int unsigned DEPTH = 206,
  parameter int unsigned WIDTH = 48
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr_a,
  output logic [WIDTH-1:0]         rdata_a,
  input  logic [$clog2(DEPTH)-1:0] raddr_b,
  output logic [WIDTH-1:0]         rdata_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];

  a_waddr_range: assert property (@(posedge clk) we |-> 32'(waddr) < DEPTH)
    else $error("dbu_param_ram: write address out of range");
endmodule
