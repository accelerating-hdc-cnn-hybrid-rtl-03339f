// hdc_unit: HDC custom-instruction execution unit of one GPU core.
//
// This is the hardware the paper adds to a RISC-V GPU core (Vortex): every
// hardware thread gets 32 signed 32-bit Bound counters, and four custom
// instructions (vpopcnt.set/get/add/geq, decoded here) operate on them.
// The core's issue stage hands the unit one warp instruction at a time:
// the instruction word, the warp id, the active-thread mask and each
// thread's rs1/rs2 values. The unit answers with one result per thread for
// the commit/writeback stage.
//
// Organisation. NUM_WARPS x NUM_THREADS bound_regfile instances hold the
// counters (2 x 4 in the paper's configuration). NUM_LANES bound_alu lanes,
// each with 32 adders and 32 comparators, execute the instruction for
// NUM_LANES threads per cycle, so a warp instruction takes
// NUM_GROUPS = ceil(NUM_THREADS / NUM_LANES) cycles. The default
// NUM_LANES = 1 follows the paper's "32 arithmetic units per core"; setting
// NUM_LANES = NUM_THREADS gives each thread its own lane and one cycle per
// warp instruction. Threads whose mask bit is 0 leave their counters alone
// and return 0.
//
// Interface and timing. Input and output use valid/ready handshakes; a
// source must hold a valid request stable until it is accepted (checked by
// assertions). Thread group g executes, and writes its counters, in the g-th
// cycle that the request is presented; the request is accepted (in_ready) in
// the cycle its last group executes, which needs the output register to be
// free or draining in that same cycle, otherwise the last group waits
// (output back-pressure stalls the unit). The result appears on out_* the
// cycle after acceptance. With NUM_LANES = NUM_THREADS and out_ready held
// high the unit accepts one instruction per cycle, matching the paper's one
// cycle per accumulation and per Binarize. An instruction that is not a
// vpopcnt op is accepted in one cycle, changes nothing and is returned with
// out_illegal set. A later instruction always sees the counters written by
// an earlier one, since both run in order through the same registers.
//
// Lint notes: the decoder's rs1/rs2 field and uses_rs2 outputs are meant for
// the core's operand fetch, which sits outside this unit, so they are unused
// here; the handshake assertions sample rst_n synchronously while the
// flip-flops use it as an asynchronous reset, which is intended.
module hdc_unit
  import hdc_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 2,
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned NUM_LANES   = 1,
  localparam int unsigned WID_W      = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned NUM_GROUPS = (NUM_THREADS + NUM_LANES - 1) / NUM_LANES,
  localparam int unsigned GRP_W      = (NUM_GROUPS > 1) ? $clog2(NUM_GROUPS) : 1
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // issue side
  input  logic                                   in_valid,
  output logic                                   in_ready,
  input  logic [31:0]                            in_instr,
  input  logic [WID_W-1:0]                       in_wid,
  input  logic [NUM_THREADS-1:0]                 in_tmask,
  input  logic [NUM_THREADS-1:0][XLEN-1:0]       in_rs1_data,
  input  logic [NUM_THREADS-1:0][XLEN-1:0]       in_rs2_data,
  // commit / writeback side
  output logic                                   out_valid,
  input  logic                                   out_ready,
  output logic [WID_W-1:0]                       out_wid,
  output logic [NUM_THREADS-1:0]                 out_tmask,
  output logic [4:0]                             out_rd,
  output logic                                   out_wb,
  output logic                                   out_illegal,
  output logic [NUM_THREADS-1:0][XLEN-1:0]       out_data
);

  localparam int unsigned NUM_HW_THREADS = NUM_WARPS * NUM_THREADS;

  // ---------------------------------------------------------------- decode
  hdc_dec_t dec;

  vpopcnt_decoder u_dec (
    .instr (in_instr),
    .dec   (dec)
  );

  // ------------------------------------------------------- group sequencing
  logic [GRP_W-1:0] grp_q;
  logic             last_grp;
  logic             slot_free;
  logic             exec;        // a thread group executes this cycle

  assign slot_free = !out_valid || out_ready;
  assign last_grp  = !dec.valid || (int'(grp_q) == NUM_GROUPS - 1);
  assign exec      = in_valid && dec.valid && (!last_grp || slot_free);
  assign in_ready  = in_valid && last_grp && slot_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_q <= '0;
    end else if (exec) begin
      grp_q <= last_grp ? '0 : grp_q + GRP_W'(1);
    end
  end

  // ------------------------------------------------------- counter storage
  bound_vec_t               bank_rd   [NUM_HW_THREADS];
  logic [NUM_HW_THREADS-1:0] bank_wr_all;
  logic [NUM_HW_THREADS-1:0] bank_wr_one;

  // ------------------------------------------------------------- the lanes
  bound_vec_t               lane_cnt     [NUM_LANES];
  logic [NUM_LANES-1:0]     lane_wr_all;
  bound_vec_t               lane_wr_data [NUM_LANES];
  logic [NUM_LANES-1:0]     lane_wr_one;
  logic [BIDX_W-1:0]        lane_wr_idx  [NUM_LANES];
  counter_t                 lane_wr_val  [NUM_LANES];
  logic [XLEN-1:0]          lane_result  [NUM_LANES];
  logic [XLEN-1:0]          lane_rs1     [NUM_LANES];
  logic [XLEN-1:0]          lane_rs2     [NUM_LANES];
  logic [NUM_LANES-1:0]     lane_active;

  // thread served by lane l in the current group
  function automatic int unsigned lane_thread(int unsigned l, logic [GRP_W-1:0] g);
    return int'(g) * NUM_LANES + l;
  endfunction

  always_comb begin
    for (int unsigned l = 0; l < NUM_LANES; l++) begin
      int unsigned t;
      t              = lane_thread(l, grp_q);
      lane_active[l] = 1'b0;
      lane_rs1[l]    = '0;
      lane_rs2[l]    = '0;
      lane_cnt[l]    = '0;
      if (t < NUM_THREADS) begin
        lane_active[l] = exec && in_tmask[t];
        lane_rs1[l]    = in_rs1_data[t];
        lane_rs2[l]    = in_rs2_data[t];
        lane_cnt[l]    = bank_rd[int'(in_wid) * NUM_THREADS + t];
      end
    end
  end

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    bound_alu u_alu (
      .op          (dec.op),
      .rs1_data    (lane_rs1[l]),
      .rs2_data    (lane_rs2[l]),
      .cnt_in      (lane_cnt[l]),
      .wr_all_en   (lane_wr_all[l]),
      .wr_all_data (lane_wr_data[l]),
      .wr_one_en   (lane_wr_one[l]),
      .wr_idx      (lane_wr_idx[l]),
      .wr_data     (lane_wr_val[l]),
      .result      (lane_result[l])
    );
  end

  // route lane writes back to the addressed thread's registers
  always_comb begin
    bank_wr_all = '0;
    bank_wr_one = '0;
    for (int unsigned l = 0; l < NUM_LANES; l++) begin
      int unsigned t;
      t = lane_thread(l, grp_q);
      if (t < NUM_THREADS && lane_active[l]) begin
        bank_wr_all[int'(in_wid) * NUM_THREADS + t] = lane_wr_all[l];
        bank_wr_one[int'(in_wid) * NUM_THREADS + t] = lane_wr_one[l];
      end
    end
  end

  for (genvar h = 0; h < NUM_HW_THREADS; h++) begin : g_thread
    localparam int unsigned LANE = (h % NUM_THREADS) % NUM_LANES;
    bound_regfile u_rf (
      .clk         (clk),
      .rst_n       (rst_n),
      .rd_all      (bank_rd[h]),
      .wr_all_en   (bank_wr_all[h]),
      .wr_all_data (lane_wr_data[LANE]),
      .wr_one_en   (bank_wr_one[h]),
      .wr_idx      (lane_wr_idx[LANE]),
      .wr_data     (lane_wr_val[LANE])
    );
  end

  // ------------------------------------------------------ result collection
  logic [NUM_THREADS-1:0][XLEN-1:0] acc_q, acc_d;

  always_comb begin
    acc_d = acc_q;
    for (int unsigned l = 0; l < NUM_LANES; l++) begin
      int unsigned t;
      t = lane_thread(l, grp_q);
      if (t < NUM_THREADS) begin
        acc_d[t] = lane_active[l] ? lane_result[l] : '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q <= '0;
    end else if (exec && !last_grp) begin
      acc_q <= acc_d;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_wid     <= '0;
      out_tmask   <= '0;
      out_rd      <= '0;
      out_wb      <= 1'b0;
      out_illegal <= 1'b0;
      out_data    <= '0;
    end else if (in_ready) begin
      out_valid   <= 1'b1;
      out_wid     <= in_wid;
      out_tmask   <= in_tmask;
      out_rd      <= dec.rd;
      out_wb      <= dec.valid && dec.writes_rd;
      out_illegal <= !dec.valid;
      out_data    <= dec.valid ? acc_d : '0;
    end else if (out_ready) begin
      out_valid   <= 1'b0;
    end
  end

  // ------------------------------------------------------ handshake rules
  // A request that is waiting must stay unchanged until it is accepted.
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> (in_valid && $stable(in_instr) && $stable(in_wid)
                                 && $stable(in_tmask) && $stable(in_rs1_data)
                                 && $stable(in_rs2_data)));
  // A result that is not taken stays on the outputs.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_data) && $stable(out_rd)
                                   && $stable(out_wid) && $stable(out_wb)));
  a_wid_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (int'(in_wid) < NUM_WARPS));

endmodule
