// dbu_quant: quantization unit.
//
// Converts a signed fixed-point value with IN_F fraction bits to OUT_W bits
// with OUT_F fraction bits. Bits dropped on the right are rounded to nearest
// (ties toward +infinity: add half an output LSB, then shift arithmetically);
// a result outside the OUT_W range saturates to the largest or smallest code
// and raises `sat`. Purely combinational, no latency.
//
// The paper names quantization units as part of each merged Householder
// module and gives the target formats; the rounding and saturation rules are
// this design's choice. OUT_F must not exceed IN_F.
module dbu_quant #(
  parameter int unsigned IN_W  = 32,
  parameter int unsigned IN_F  = 16,
  parameter int unsigned OUT_W = 12,
  parameter int unsigned OUT_F = 6
) (
  input  logic signed [IN_W-1:0]  din,
  output logic signed [OUT_W-1:0] dout,
  output logic                    sat
);
  localparam int unsigned SH = IN_F - OUT_F;

  // one spare bit so the rounding addition cannot wrap
  logic signed [IN_W:0] ext, rnd;
  logic signed [IN_W:0] maxv, minv;

  always_comb begin
    ext = {din[IN_W-1], din};
    if (SH > 0) rnd = (ext + ((IN_W+1)'(1) <<< (SH - 1))) >>> SH;
    else        rnd = ext;
    maxv = (IN_W+1)'((65'sd1 <<< (OUT_W - 1)) - 1);
    minv = -(IN_W+1)'(65'sd1 <<< (OUT_W - 1));
    if (rnd > maxv) begin
      dout = OUT_W'(maxv);
      sat  = 1'b1;
    end else if (rnd < minv) begin
      dout = OUT_W'(minv);
      sat  = 1'b1;
    end else begin
      dout = OUT_W'(rnd);
      sat  = 1'b0;
    end
  end

  initial assert (OUT_F <= IN_F) else $error("dbu_quant: OUT_F > IN_F");
endmodule
