// shuffler: rotation-based load-balancing shuffle of one K0-wide vector.
//
// To spread zeros evenly over the K0 multiplier lanes, the elements of each
// K-step are rotated inside groups of four consecutive lanes (K0/4 local 4x4
// crossbars instead of one K0 x K0 crossbar, as the paper does).  The same
// rotation is applied to A and to B, so every A/B pair stays in one lane and
// the dot product is unchanged.  The rotation amount is this design's choice:
// the K-step index mod 4, so lane 4g+l moves to lane 4g+((l+rot) mod 4).
// Purely combinational; en = 0 passes the vector through unchanged.
module shuffler #(
  parameter int unsigned K0 = 16,
  parameter int unsigned W  = 8
) (
  input  logic                 en,
  input  logic [1:0]           rot,
  input  logic [K0-1:0][W-1:0] din,
  output logic [K0-1:0][W-1:0] dout
);
  initial assert (K0 % 4 == 0) else $error("K0 must be a multiple of 4");

  // gather form: output lane 4g+j takes input lane 4g+((j-rot) mod 4)
  for (genvar g = 0; g < K0 / 4; g++) begin : g_grp
    for (genvar j = 0; j < 4; j++) begin : g_lane
      logic [1:0] src;
      assign src = 2'(j) - (en ? rot : 2'd0);
      assign dout[g*4 + j] = din[g*4 + 32'(src)];
    end
  end
endmodule
