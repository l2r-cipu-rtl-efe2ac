// lr_compressor_6to2: 6:2 carry-save compressor of the LR inner-product unit.
//
// Adds six W-bit vectors (the residual pair, the two counter vectors and the
// PPR pair) into one sum and one carry vector, so that no carry travels along
// the word. It is built from four rows of 3:2 full-adder cells
// (6 -> 4 -> 3 -> 2 vectors); the cell arrangement is this design's choice, the
// paper names only a 6:2 compressor. The carry vectors shifted one place left
// have a free least significant bit; cin enters there, which the counter stage
// uses for its +1. All arithmetic is modulo 2^W:
// sum_o + carry_o == in_vec[0] + ... + in_vec[5] + cin (mod 2^W).
// Combinational.
module lr_compressor_6to2 #(
  parameter int unsigned W = 19
) (
  input  logic [5:0][W-1:0] in_vec,
  input  logic              cin,
  output logic [W-1:0]      sum_o,
  output logic [W-1:0]      carry_o
);

  // One row of 3:2 full-adder cells; the carry is returned unshifted.
  function automatic logic [1:0][W-1:0] csa(logic [W-1:0] u0, logic [W-1:0] u1, logic [W-1:0] u2);
    logic [1:0][W-1:0] r;
    r[0] = u0 ^ u1 ^ u2;
    r[1] = (u0 & u1) | (u0 & u2) | (u1 & u2);
    return r;
  endfunction

  logic [1:0][W-1:0] l1a, l1b, l2, l3;

  always_comb begin
    l1a = csa(in_vec[0], in_vec[1], in_vec[2]);
    l1b = csa(in_vec[3], in_vec[4], in_vec[5]);
    l2  = csa(l1a[0], {l1a[1][W-2:0], cin}, l1b[0]);
    l3  = csa(l2[0], {l2[1][W-2:0], 1'b0}, {l1b[1][W-2:0], 1'b0});
    sum_o   = l3[0];
    carry_o = {l3[1][W-2:0], 1'b0};
  end

endmodule
