// bound_regfile: the 32 cumulative sum ("Bound") registers of one thread.
//
// Each register is a signed 32-bit counter for one bit position of a 32-bit
// HV word. The paper's point is that all 32 counters are available at once:
// rd_all presents every counter combinationally, and wr_all_en replaces all
// 32 in one clock edge (used by vpopcnt.add). wr_one_en writes a single
// counter chosen by wr_idx (used by vpopcnt.set); if both enables are high,
// wr_all_en wins (the datapath never raises both). Clearing every counter
// on reset is this design's choice; the paper does not describe reset.
module bound_regfile
  import hdc_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  output bound_vec_t         rd_all,
  input  logic               wr_all_en,
  input  bound_vec_t         wr_all_data,
  input  logic               wr_one_en,
  input  logic [BIDX_W-1:0]  wr_idx,
  input  counter_t           wr_data
);

  bound_vec_t regs_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs_q <= '0;
    end else if (wr_all_en) begin
      regs_q <= wr_all_data;
    end else if (wr_one_en) begin
      regs_q[wr_idx] <= wr_data;
    end
  end

  assign rd_all = regs_q;

endmodule
