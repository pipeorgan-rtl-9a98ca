// pe_dot_product: the arithmetic of one PE, an 8-lane signed 8-bit dot product.
//
// Each cycle the unit multiplies the activation vector a and the weight
// vector b lane by lane (LANES products of DW-bit signed operands) and sums
// the products with a balanced adder tree. The individual products are also
// brought out, because depthwise (grouped) convolution uses the lanes
// without reduction. The unit is purely combinational; the PE registers the
// accumulation. Lane count and element width follow the evaluated
// configuration (8 lanes, 1 B elements); signed operands are this design's
// choice. LANES must be a power of two (balanced tree).
module pe_dot_product #(
  parameter int unsigned LANES = 8,
  parameter int unsigned DW    = 8
) (
  input  logic [LANES*DW-1:0]               a,
  input  logic [LANES*DW-1:0]               b,
  output logic signed [LANES-1:0][2*DW-1:0] prod,
  output logic signed [2*DW+$clog2(LANES)-1:0] y
);
  localparam int unsigned SW = 2 * DW + $clog2(LANES);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      prod[l] = $signed(a[l*DW +: DW]) * $signed(b[l*DW +: DW]);
    end
  end

  // adder tree over the products
  logic signed [SW-1:0] tree [2*LANES-1];
  always_comb begin
    for (int l = 0; l < LANES; l++) tree[LANES-1+l] = SW'($signed(prod[l]));
    for (int n = LANES - 2; n >= 0; n--) tree[n] = tree[2*n+1] + tree[2*n+2];
  end
  assign y = tree[0];
endmodule
