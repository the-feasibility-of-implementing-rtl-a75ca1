// mm_tile: a Tile of the Matrix Multiply module: PES processing elements
// chained so that the partial sum of one feeds the next.
//
// Per cycle the tile takes PES*LANES INT8 elements of the input row and of
// one weight column (PE p gets elements p*LANES .. p*LANES+LANES-1) and
// returns their dot product added to psum_in. The tile/PE hierarchy and the
// chaining are the paper's; PES and LANES are this design's choice (their
// product is one 512-bit flit by default). Combinational; the Linear module
// accumulates the tile result over the row in a register.
module mm_tile #(
  parameter int unsigned PES   = 4,
  parameter int unsigned LANES = 16
) (
  input  logic [PES*LANES*8-1:0] a,
  input  logic [PES*LANES*8-1:0] w,
  input  logic signed [31:0]     psum_in,
  output logic signed [31:0]     psum_out
);
  logic signed [31:0] chain [PES+1];
  assign chain[0] = psum_in;

  for (genvar p = 0; p < PES; p++) begin : g_pe
    mm_pe #(.LANES(LANES)) u_pe (
      .a(a[p*LANES*8 +: LANES*8]), .w(w[p*LANES*8 +: LANES*8]),
      .psum_in(chain[p]), .psum_out(chain[p+1]));
  end

  assign psum_out = chain[PES];
endmodule
