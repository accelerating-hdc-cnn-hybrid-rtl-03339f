// hdc_unit_tester: drives one hdc_unit instance and checks it against a
// reference model of the Bound registers.
//
// Phase 1 measures timing with the output always ready: NADD back-to-back
// vpopcnt.add instructions for one warp must take NADD * NUM_GROUPS cycles
// and the following vpopcnt.geq NUM_GROUPS cycles (one accumulation and one
// Binarize per thread per cycle). Phase 2 sends a random mix of set, get,
// add, geq and non-HDC instructions over all warps with random thread masks,
// random idle cycles and random output back-pressure, and compares every
// result (data, rd, write-back flag, illegal flag, warp, mask) with the
// model. It counts how often each mechanism occurred (each op, illegal
// instruction, masked thread, output stall, multi-cycle group sequencing,
// warp change) and counts a failure for any that never did.
module hdc_unit_tester
  import hdc_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 2,
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned NUM_LANES   = 1,
  parameter bit          DEFAULTS    = 1'b0,  // instantiate hdc_unit without overrides
  parameter int unsigned N_RANDOM    = 3000,
  parameter int unsigned NADD        = 40
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int unsigned WID_W = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1;
  localparam int unsigned G     = (NUM_THREADS + NUM_LANES - 1) / NUM_LANES;

  logic                             in_valid, in_ready, out_valid, out_ready;
  logic [31:0]                      in_instr;
  logic [WID_W-1:0]                 in_wid, out_wid;
  logic [NUM_THREADS-1:0]           in_tmask, out_tmask;
  logic [NUM_THREADS-1:0][XLEN-1:0] in_rs1_data, in_rs2_data, out_data;
  logic [4:0]                       out_rd;
  logic                             out_wb, out_illegal;

  if (DEFAULTS) begin : g_dut
    hdc_unit dut (.*);
  end else begin : g_dut
    hdc_unit #(.NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .NUM_LANES(NUM_LANES)) dut (.*);
  end

  // ---------------------------------------------------------------- model
  int model [NUM_WARPS*NUM_THREADS][NUM_BOUND];

  typedef struct {
    logic [WID_W-1:0]                 wid;
    logic [NUM_THREADS-1:0]           tmask;
    logic [4:0]                       rd;
    logic                             wb;
    logic                             illegal;
    logic [NUM_THREADS-1:0][XLEN-1:0] data;
  } exp_t;
  exp_t expq [$];

  int n_accept = 0;
  int n_set = 0, n_get = 0, n_add = 0, n_geq = 0, n_illegal = 0;
  int n_masked = 0, n_stall = 0, n_serial = 0, n_warpchg = 0;
  logic [WID_W-1:0] last_wid = '0;

  function automatic logic [31:0] enc(logic [2:0] f3, logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'h01, rs2, rs1, f3, rd, 7'h0b};
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      // waiting with the output full is a stall; waiting with it free can
      // only be an earlier thread group executing
      if (in_valid && !in_ready && out_valid && !out_ready) n_stall++;
      if (in_valid && !in_ready && !(out_valid && !out_ready)) n_serial++;
      if (in_valid && in_ready) begin
        exp_t e;
        logic [2:0] f3;
        logic legal;
        n_accept++;
        if (in_wid != last_wid) n_warpchg++;
        last_wid = in_wid;
        f3 = in_instr[14:12];
        legal = in_instr[6:0] == 7'h0b && in_instr[31:25] == 7'h01 &&
                (f3 == 1 || f3 == 2 || f3 == 3 || f3 == 5);
        e.wid = in_wid; e.tmask = in_tmask; e.rd = in_instr[11:7];
        e.illegal = !legal; e.wb = legal && (f3 == 2 || f3 == 5);
        e.data = '0;
        if (!legal) n_illegal++;
        else case (f3)
          1: n_set++;
          2: n_get++;
          3: n_add++;
          default: n_geq++;
        endcase
        if (legal && in_tmask != '1) n_masked++;
        for (int t = 0; t < NUM_THREADS; t++) begin
          int h;
          h = int'(in_wid) * NUM_THREADS + t;
          if (legal && in_tmask[t]) begin
            case (f3)
              1: model[h][in_rs1_data[t][4:0]] = int'(in_rs2_data[t]);
              2: e.data[t] = 32'(model[h][in_rs1_data[t][4:0]]);
              3: for (int j = 0; j < NUM_BOUND; j++)
                   model[h][j] = model[h][j] + (in_rs1_data[t][j] ? 1 : -1);
              default: for (int j = 0; j < NUM_BOUND; j++)
                   e.data[t][j] = (model[h][j] >= int'($signed(in_rs1_data[t])));
            endcase
          end
        end
        expq.push_back(e);
      end
      if (out_valid && out_ready) begin
        checks++;
        if (expq.size() == 0) begin
          failures++; $display("FAIL L%0d: unexpected result", NUM_LANES);
        end else begin
          exp_t e;
          e = expq.pop_front();
          if (out_data !== e.data || out_rd !== e.rd || out_wb !== e.wb ||
              out_illegal !== e.illegal || out_wid !== e.wid || out_tmask !== e.tmask) begin
            failures++;
            $display("FAIL L%0d: result %h exp %h rd %0d/%0d wb %b/%b ill %b/%b", NUM_LANES,
                     out_data, e.data, out_rd, e.rd, out_wb, e.wb, out_illegal, e.illegal);
          end
        end
      end
    end
  end

  // --------------------------------------------------------------- driver
  // Inputs change on the falling edge; the monitor above samples handshakes
  // on the rising edge. send() returns on the falling edge after acceptance
  // and reports how many rising edges the request was presented for.
  task automatic send(input logic [31:0] instr, input int w, input logic [NUM_THREADS-1:0] m,
                      input logic [NUM_THREADS-1:0][XLEN-1:0] a,
                      input logic [NUM_THREADS-1:0][XLEN-1:0] b, output int cyc);
    int prev;
    prev = n_accept;
    in_valid = 1'b1; in_instr = instr; in_wid = WID_W'(w); in_tmask = m;
    in_rs1_data = a; in_rs2_data = b;
    cyc = 0;
    do begin
      @(negedge clk);
      cyc++;
    end while (n_accept == prev);
    in_valid = 1'b0;
    in_rs1_data = '0;
  endtask

  initial begin
    int cyc, total;
    logic [NUM_THREADS-1:0][XLEN-1:0] a, b;
    done = 1'b0; checks = 0; failures = 0;
    in_valid = 1'b0; in_instr = '0; in_wid = '0; in_tmask = '0;
    in_rs1_data = '0; in_rs2_data = '0; out_ready = 1'b1;
    for (int h = 0; h < NUM_WARPS*NUM_THREADS; h++)
      for (int j = 0; j < NUM_BOUND; j++) model[h][j] = 0;
    @(posedge rst_n);
    @(negedge clk);

    // ---- phase 1: throughput with the output always ready
    total = 0;
    for (int i = 0; i < NADD; i++) begin
      for (int t = 0; t < NUM_THREADS; t++) a[t] = $urandom;
      send(enc(3'd3, 5'd0, 5'd10, 5'd0), NUM_WARPS - 1, '1, a, '0, cyc);
      total += cyc;
    end
    checks++;
    if (total != NADD * G) begin
      failures++; $display("FAIL L%0d: %0d adds took %0d cycles, exp %0d", NUM_LANES, NADD, total, NADD * G);
    end
    a = '0;
    send(enc(3'd5, 5'd11, 5'd10, 5'd0), NUM_WARPS - 1, '1, a, '0, cyc);
    checks++;
    if (cyc != G) begin
      failures++; $display("FAIL L%0d: geq took %0d cycles, exp %0d", NUM_LANES, cyc, G);
    end

    // ---- phase 2: random traffic with back-pressure
    fork
      begin
        for (int i = 0; i < N_RANDOM; i++) begin
          int r, w;
          logic [2:0] f3;
          logic [31:0] instr;
          logic [NUM_THREADS-1:0] m;
          r = $urandom_range(0, 99);
          f3 = (r < 15) ? 3'd1 : (r < 35) ? 3'd2 : (r < 75) ? 3'd3 : (r < 95) ? 3'd5 : 3'($urandom_range(0, 7));
          instr = enc(f3, 5'($urandom), 5'($urandom), 5'($urandom));
          if (r >= 95 && $urandom_range(0, 1) == 1) instr[6:0] = 7'h33;
          w = $urandom_range(0, NUM_WARPS - 1);
          m = ($urandom_range(0, 3) == 0) ? NUM_THREADS'($urandom) : '1;
          for (int t = 0; t < NUM_THREADS; t++) begin
            a[t] = $urandom;
            b[t] = $urandom;
            if (f3 == 3'd1 || f3 == 3'd2) a[t] = 32'($urandom_range(0, 31)) | (32'($urandom) << 5);
            if (f3 == 3'd1) b[t] = 32'($signed($urandom_range(0, 60)) - 30);
            if (f3 == 3'd5) a[t] = 32'($signed($urandom_range(0, 40)) - 20);
          end
          send(instr, w, m, a, b, cyc);
          if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
        end
      end
      begin
        while (n_accept < NADD + 1 + N_RANDOM) begin
          @(negedge clk);
          out_ready = ($urandom_range(0, 9) < 7);
        end
      end
    join
    out_ready = 1'b1;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++; $display("FAIL L%0d: %0d results missing", NUM_LANES, expq.size());
    end

    $display("L%0d mechanisms: set=%0d get=%0d add=%0d geq=%0d illegal=%0d masked=%0d stall=%0d serial=%0d warp_change=%0d",
             NUM_LANES, n_set, n_get, n_add, n_geq, n_illegal, n_masked, n_stall, n_serial, n_warpchg);
    checks += 8;
    if (n_set == 0 || n_get == 0 || n_add == 0 || n_geq == 0) begin failures++; $display("FAIL: an op never ran"); end
    if (n_illegal == 0) begin failures++; $display("FAIL: no illegal instruction"); end
    if (n_masked == 0) begin failures++; $display("FAIL: no masked thread"); end
    if (n_stall == 0) begin failures++; $display("FAIL: no output stall"); end
    if (G > 1 && n_serial == 0) begin failures++; $display("FAIL: no group sequencing"); end
    if (NUM_WARPS > 1 && n_warpchg == 0) begin failures++; $display("FAIL: no warp change"); end
    done = 1'b1;
  end

endmodule
