// mm_pe: processing element of the Matrix Multiply tiles.
//
// A PE multiplies LANES INT8 values of a partial input row with LANES INT8
// values of a partial weight column and adds the products to the partial
// sum handed on by the previous PE of its tile (the PE chain PE1 -> PE2 ->
// PE3 of the paper's matrix-multiply figure). INT8 operands and INT32 sums
// follow the paper; LANES is this design's choice.
// Purely combinational: the tile that chains the PEs registers the result.
module mm_pe #(
  parameter int unsigned LANES = 16
) (
  input  logic [LANES*8-1:0] a,        // partial input row, lane 0 in bits 7:0
  input  logic [LANES*8-1:0] w,        // partial weight column
  input  logic signed [31:0] psum_in,  // partial sum from the previous PE
  output logic signed [31:0] psum_out
);
  always_comb begin
    psum_out = psum_in;
    for (int unsigned i = 0; i < LANES; i++)
      psum_out += 32'(signed'(a[i*8 +: 8])) * 32'(signed'(w[i*8 +: 8]));
  end
endmodule
