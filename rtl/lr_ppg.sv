// lr_ppg: operand gate and partial product generation of the LR inner-product
// unit.
//
// In every cycle the unit receives digit i of all k activations (A_i) and
// digit j of all k weights (B_j), both as signed digits. This block forms the
// k digit products A_{k,i} * B_{k,j}, which are again signed digits: the
// product is +1 when the signs agree and -1 when they differ. The k products
// together are the partial-product term PP_{i,j} of the paper. The block is
// purely combinational.
//
// The paper's block diagram draws an unlabelled gate ahead of the generator;
// here it is an enable that forces all products to zero when no operand
// digits are valid (the flush cycles of the unit), a choice of this design.
module lr_ppg
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned K_TERMS = l2r_pkg::K_TERMS
) (
  input  logic                en,
  input  sd_t [K_TERMS-1:0]   a_dig,
  input  sd_t [K_TERMS-1:0]   b_dig,
  output sd_t [K_TERMS-1:0]   pp
);

  always_comb begin
    for (int k = 0; k < K_TERMS; k++) begin
      sd_t a, b;
      a = en ? a_dig[k] : '0;
      b = en ? b_dig[k] : '0;
      pp[k].p = (a.p & b.p) | (a.n & b.n);
      pp[k].n = (a.p & b.n) | (a.n & b.p);
    end
  end

endmodule
