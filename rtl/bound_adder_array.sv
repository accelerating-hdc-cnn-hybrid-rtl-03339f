// bound_adder_array: the 32 parallel arithmetic units of the Bound operation.
//
// Combinational. Counter j gets +1 when bit j of the input HV word is 1 and
// -1 when it is 0, the bipolar reading the paper defines for HV bits. All
// 32 updates happen in the same cycle, which is what lets one vpopcnt.add
// accumulate a whole 32-element HV word in one cycle instead of 32
// load/add/store sequences. Counters wrap in two's complement on overflow
// (this design's choice; with 32-bit counters it takes over 2^31 HVs).
module bound_adder_array
  import hdc_pkg::*;
(
  input  bound_vec_t        cnt_in,
  input  logic [XLEN-1:0]   hv_bits,
  output bound_vec_t        cnt_out
);

  always_comb begin
    for (int j = 0; j < NUM_BOUND; j++) begin
      cnt_out[j] = hv_bits[j] ? cnt_in[j] + counter_t'(1) : cnt_in[j] - counter_t'(1);
    end
  end

endmodule
