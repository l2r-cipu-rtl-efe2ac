// lr_counter_neg: counter and negation stage of the LR inner-product unit.
//
// The paper sums the k digit products of PP_{i,j} "using a counter circuit".
// Here two population counters count the +1 and the -1 digits; the -1 count is
// negated in one's complement (bitwise inverse). The compressor that follows
// adds the two W-bit vectors together with a carry-in of 1, which completes
// the two's complement negation, so pos + neg_n + 1 = sum_k A_{k,i}B_{k,j}
// modulo 2^W. Combinational. Splitting the count into a positive and a negated
// negative vector is this design's reading of the "Counter & Negation" block,
// which the paper only names; it also explains the two counter vectors that
// enter the 6:2 compressor.
module lr_counter_neg
  import l2r_pkg::sd_t, l2r_pkg::ipu_ctrl_t, l2r_pkg::acc_ctrl_t, l2r_pkg::tc_digit, l2r_pkg::SHIFT_W;
#(
  parameter int unsigned K_TERMS = l2r_pkg::K_TERMS,
  parameter int unsigned W       = l2r_pkg::row_bits(l2r_pkg::K_TERMS, l2r_pkg::N_BITS) + 4
) (
  input  sd_t [K_TERMS-1:0] pp,
  output logic [W-1:0]      pos,
  output logic [W-1:0]      neg_n
);

  always_comb begin
    logic [W-1:0] np;
    pos = '0;
    np  = '0;
    for (int k = 0; k < K_TERMS; k++) begin
      pos = pos + W'(pp[k].p);
      np  = np  + W'(pp[k].n);
    end
    neg_n = ~np;
  end

endmodule
