// bound_alu: one lane of the HDC unit, executing a vpopcnt instruction for
// one thread.
//
// Combinational. Given the thread's 32 counters and its rs1/rs2 register
// values it produces the register-file write and the rd result:
//   set  counter[rs1[4:0]] <= rs2            (no rd result)
//   get  rd = counter[rs1[4:0]]
//   add  counter[j] <= counter[j] +/- 1 for every bit j of rs1 (all 32 at once)
//   geq  rd[j] = (counter[j] >= rs1), signed (all 32 at once)
// The operations and their one-cycle behaviour are the paper's; that set and
// get take the counter index from the low five bits of rs1 is this design's
// reading of the operand lists "set rs1, rs2" and "get rd, rs1". The lane
// holds the 32 adders and the 32 comparators.
module bound_alu
  import hdc_pkg::*;
(
  input  hdc_op_e            op,
  input  logic [XLEN-1:0]    rs1_data,
  input  logic [XLEN-1:0]    rs2_data,
  input  bound_vec_t         cnt_in,
  output logic               wr_all_en,
  output bound_vec_t         wr_all_data,
  output logic               wr_one_en,
  output logic [BIDX_W-1:0]  wr_idx,
  output counter_t           wr_data,
  output logic [XLEN-1:0]    result
);

  bound_vec_t       add_out;
  logic [XLEN-1:0]  geq_out;
  logic [BIDX_W-1:0] idx;

  assign idx = rs1_data[BIDX_W-1:0];

  bound_adder_array u_add (
    .cnt_in  (cnt_in),
    .hv_bits (rs1_data),
    .cnt_out (add_out)
  );

  binarize_comparators u_cmp (
    .cnt_in    (cnt_in),
    .threshold (counter_t'(rs1_data)),
    .bits_out  (geq_out)
  );

  assign wr_all_data = add_out;
  assign wr_idx      = idx;
  assign wr_data     = counter_t'(rs2_data);

  always_comb begin
    wr_all_en = 1'b0;
    wr_one_en = 1'b0;
    result    = '0;
    unique case (op)
      OP_SET: wr_one_en = 1'b1;
      OP_GET: result    = cnt_in[idx];
      OP_ADD: wr_all_en = 1'b1;
      OP_GEQ: result    = geq_out;
      default: ;
    endcase
  end

endmodule
