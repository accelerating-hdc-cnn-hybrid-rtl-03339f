// tb_hdc_train_workload: an HDC classification workload run on the default
// hdc_unit, with the testbench playing the GPU program.
//
// Sizes follow the image-classification benchmark: 10 classes, 1024-dim
// binary HVs, 5000 training and 1000 test samples, 20 retraining epochs.
// The samples are synthetic (not image features): class prototypes are a
// common random HV with 10 % of bits flipped per class, and each sample flips
// every bit of its class prototype with probability 40 %, so classes overlap
// and retraining has work to do.
// The hardware does the Bound and Binarize work:
//   - class sums live in testbench memory, as they would in GPU memory;
//     a tile of 8 words (one per hardware thread) of one class is loaded
//     into the Bound registers with vpopcnt.set, updated with vpopcnt.add,
//     binarised with vpopcnt.geq (threshold 0) and stored back with
//     vpopcnt.get;
//   - initial training adds every sample of the class;
//   - retraining adds a misclassified sample to its true class and
//     subtracts it from the predicted class by adding its complement
//     (bipolar: adding ~h is subtracting h), right after the sample is
//     misclassified, and both class HVs are binarised again.
// Hamming-distance prediction is software here, as in the paper's program.
// Every class HV and class sum produced by the hardware is compared with a
// pure software computation of the same algorithm; retraining must have
// made updates and test accuracy must exceed 50 % (chance is 10 %).
module tb_hdc_train_workload;
  import hdc_pkg::*;

  localparam int C = 10, D = 1024, WORDS = D / 32;
  localparam int NTRAIN = 5000, NTEST = 1000, EPOCHS = 20;
  localparam int PROTO_FLIP = 10, SAMPLE_FLIP = 40;  // percent
  localparam int W = 2, T = 4;
  localparam int TILES = WORDS / (W*T);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                       in_valid, in_ready, out_valid, out_ready;
  logic [31:0]                in_instr;
  logic [0:0]                 in_wid, out_wid;
  logic [T-1:0]               in_tmask, out_tmask;
  logic [T-1:0][XLEN-1:0]     in_rs1_data, in_rs2_data, out_data;
  logic [4:0]                 out_rd;
  logic                       out_wb, out_illegal;

  hdc_unit dut (.*);

  logic [31:0] train_hv [NTRAIN][WORDS];
  logic [31:0] test_hv  [NTEST][WORDS];
  int          train_y  [NTRAIN];
  int          test_y   [NTEST];
  int          hw_sum   [C][D];       // class sums kept in "GPU memory"
  logic [31:0] hw_chv   [C][WORDS];   // class HVs from vpopcnt.geq
  int          sw_sum   [C][D];       // software reference

  int checks = 0, failures = 0, n_accept = 0, n_sub = 0;
  always @(posedge clk) if (in_valid && in_ready) n_accept++;

  function automatic logic [31:0] enc(logic [2:0] f3, logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'h01, rs2, rs1, f3, rd, 7'h0b};
  endfunction

  task automatic send(input logic [31:0] instr, input int w,
                      input logic [T-1:0][XLEN-1:0] a, input logic [T-1:0][XLEN-1:0] b);
    int prev;
    prev = n_accept;
    in_valid = 1'b1; in_instr = instr; in_wid = 1'(w); in_tmask = '1;
    in_rs1_data = a; in_rs2_data = b;
    do @(negedge clk); while (n_accept == prev);
    in_valid = 1'b0;
  endtask

  function automatic int word_of(int tile, int w, int t);
    return tile*W*T + w*T + t;
  endfunction

  // Run one class tile through the unit: load sums, apply the listed
  // samples (sign +1 add, -1 subtract), binarise, store sums back.
  task automatic run_tile(input int c, input int tile, input int samples [$], input int signs [$],
                          input bit is_train);
    logic [T-1:0][XLEN-1:0] a, b;
    for (int w = 0; w < W; w++)
      for (int j = 0; j < NUM_BOUND; j++) begin
        for (int t = 0; t < T; t++) begin
          a[t] = j; b[t] = 32'(hw_sum[c][word_of(tile, w, t)*32 + j]);
        end
        send(enc(3'd1, 5'd0, 5'd10, 5'd11), w, a, b);
      end
    for (int s = 0; s < samples.size(); s++)
      for (int w = 0; w < W; w++) begin
        for (int t = 0; t < T; t++) begin
          a[t] = train_hv[samples[s]][word_of(tile, w, t)];
          if (signs[s] < 0) a[t] = ~a[t];
        end
        send(enc(3'd3, 5'd0, 5'd10, 5'd0), w, a, '0);
      end
    for (int w = 0; w < W; w++) begin
      a = '0;
      send(enc(3'd5, 5'd12, 5'd10, 5'd0), w, a, '0);
      for (int t = 0; t < T; t++) hw_chv[c][word_of(tile, w, t)] = out_data[t];
      for (int j = 0; j < NUM_BOUND; j++) begin
        for (int t = 0; t < T; t++) a[t] = j;
        send(enc(3'd2, 5'd13, 5'd10, 5'd0), w, a, '0);
        for (int t = 0; t < T; t++) hw_sum[c][word_of(tile, w, t)*32 + j] = int'($signed(out_data[t]));
      end
    end
  endtask

  function automatic int predict(input logic [31:0] x [WORDS]);
    int best, bestd;
    best = 0; bestd = D + 1;
    for (int c = 0; c < C; c++) begin
      int d;
      d = 0;
      for (int k = 0; k < WORDS; k++) d += $countones(x[k] ^ hw_chv[c][k]);
      if (d < bestd) begin bestd = d; best = c; end
    end
    return best;
  endfunction

  task automatic compare_with_software(input string when);
    int bad;
    bad = 0;
    for (int c = 0; c < C; c++)
      for (int d = 0; d < D; d++) begin
        if (hw_sum[c][d] != sw_sum[c][d]) bad++;
        if (hw_chv[c][d/32][d%32] != (sw_sum[c][d] >= 0)) bad++;
      end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s: %0d mismatches", when, bad); end
  endtask

  initial begin
    logic [31:0] proto [C][WORDS];
    int correct;
    in_valid = 0; in_instr = '0; in_wid = '0; in_tmask = '0;
    in_rs1_data = '0; in_rs2_data = '0; out_ready = 1'b1;
    for (int k = 0; k < WORDS; k++) proto[0][k] = $urandom;
    for (int c = 1; c < C; c++)
      for (int k = 0; k < WORDS; k++) begin
        logic [31:0] flip;
        for (int j = 0; j < 32; j++) flip[j] = ($urandom_range(0, 99) < PROTO_FLIP);
        proto[c][k] = proto[0][k] ^ flip;
      end
    for (int i = 0; i < NTRAIN + NTEST; i++) begin
      int y;
      logic [31:0] x [WORDS];
      y = $urandom_range(0, C - 1);
      for (int k = 0; k < WORDS; k++) begin
        logic [31:0] flip;
        for (int j = 0; j < 32; j++) flip[j] = ($urandom_range(0, 99) < SAMPLE_FLIP);
        x[k] = proto[y][k] ^ flip;
      end
      if (i < NTRAIN) begin train_y[i] = y; train_hv[i] = x; end
      else begin test_y[i-NTRAIN] = y; test_hv[i-NTRAIN] = x; end
    end
    for (int c = 0; c < C; c++) for (int d = 0; d < D; d++) begin hw_sum[c][d] = 0; sw_sum[c][d] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // initial training (Bound + Binarize)
    for (int c = 0; c < C; c++) begin
      int smp [$], sg [$];
      smp.delete(); sg.delete();
      for (int i = 0; i < NTRAIN; i++) if (train_y[i] == c) begin
        smp.push_back(i); sg.push_back(1);
        for (int d = 0; d < D; d++) sw_sum[c][d] += train_hv[i][d/32][d%32] ? 1 : -1;
      end
      for (int tile = 0; tile < TILES; tile++) run_tile(c, tile, smp, sg, 1'b1);
    end
    compare_with_software("initial training");

    // retraining: on every misclassified training sample, add it to its
    // true class and subtract it from the predicted class at once
    for (int e = 0; e < EPOCHS; e++) begin
      int miss;
      miss = 0;
      for (int i = 0; i < NTRAIN; i++) begin
        int p;
        p = predict(train_hv[i]);
        if (p != train_y[i]) begin
          int smp [$], sg [$];
          miss++;
          n_sub++;
          for (int d = 0; d < D; d++) begin
            sw_sum[train_y[i]][d] += train_hv[i][d/32][d%32] ? 1 : -1;
            sw_sum[p][d]          -= train_hv[i][d/32][d%32] ? 1 : -1;
          end
          smp.delete(); sg.delete();
          smp.push_back(i); sg.push_back(1);
          for (int tile = 0; tile < TILES; tile++) run_tile(train_y[i], tile, smp, sg, 1'b0);
          sg[0] = -1;
          for (int tile = 0; tile < TILES; tile++) run_tile(p, tile, smp, sg, 1'b0);
        end
      end
      compare_with_software($sformatf("epoch %0d", e));
      $display("epoch %0d: %0d training samples misclassified", e, miss);
    end

    correct = 0;
    for (int i = 0; i < NTEST; i++) if (predict(test_hv[i]) == test_y[i]) correct++;
    $display("test accuracy %0d / %0d, subtract updates %0d", correct, NTEST, n_sub);
    checks++;
    if (correct * 2 < NTEST) begin failures++; $display("FAIL accuracy below 50 %%"); end
    checks++;
    if (n_sub == 0) begin failures++; $display("FAIL retraining never updated a class"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
