// binarize_comparators: the 32 parallel comparators of the Binarize step.
//
// Combinational. Result bit j is 1 when counter j is greater than or equal
// to the threshold, both read as signed 32-bit numbers, so all 32 class-HV
// bits of a word are produced in one cycle. With threshold 0 this is the
// paper's majority vote h = sign(1/2 + c): a tie (c = 0) gives 1, as in the
// paper's Bound figure where a counter of 0 yields a class-HV bit of 1.
// Signed comparison is this design's reading; the paper only says the
// counters are compared with a threshold.
module binarize_comparators
  import hdc_pkg::*;
(
  input  bound_vec_t        cnt_in,
  input  counter_t          threshold,
  output logic [XLEN-1:0]   bits_out
);

  always_comb begin
    for (int j = 0; j < NUM_BOUND; j++) begin
      bits_out[j] = (cnt_in[j] >= threshold);
    end
  end

endmodule
