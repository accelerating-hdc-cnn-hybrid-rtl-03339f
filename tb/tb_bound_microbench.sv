// tb_bound_microbench: the Bound microbenchmark at full size on the default
// hdc_unit (2 warps x 4 threads, one lane of 32 arithmetic units).
//
// 1000 hypervectors of 1024 dimensions are accumulated into one class HV.
// A 1024-bit HV is 32 words of 32 bits; the 8 hardware threads each own one
// word position, so the program makes 4 passes of 8 words. Each pass:
// clear the 32 counters of every thread with vpopcnt.set, issue one
// vpopcnt.add per HV per warp (each thread adds its own word), Binarize with
// vpopcnt.geq (threshold 0) and read all counters back with vpopcnt.get.
// The class HV and every counter are compared with a software count
// (counter = 2*ones - N, bit = counter >= 0), and the add phase must take
// exactly N * 2 warps * 4 thread groups cycles per pass with no stalls.
// The HVs are a random prototype with 35 % of bits flipped per HV.
module tb_bound_microbench;
  import hdc_pkg::*;

  localparam int N     = 1000;
  localparam int D     = 1024;
  localparam int WORDS = D / 32;
  localparam int W = 2, T = 4, G = 4;

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

  logic [31:0] hv [N][WORDS];
  int ones [D];
  int checks = 0, failures = 0;
  int n_accept = 0;

  always @(posedge clk) if (in_valid && in_ready) n_accept++;

  function automatic logic [31:0] enc(logic [2:0] f3, logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    return {7'h01, rs2, rs1, f3, rd, 7'h0b};
  endfunction

  task automatic send(input logic [31:0] instr, input int w,
                      input logic [T-1:0][XLEN-1:0] a, input logic [T-1:0][XLEN-1:0] b,
                      output int cyc);
    int prev;
    prev = n_accept;
    in_valid = 1'b1; in_instr = instr; in_wid = 1'(w); in_tmask = '1;
    in_rs1_data = a; in_rs2_data = b;
    cyc = 0;
    do begin @(negedge clk); cyc++; end while (n_accept == prev);
    in_valid = 1'b0;
  endtask

  initial begin
    logic [31:0] proto [WORDS];
    logic [T-1:0][XLEN-1:0] a, b;
    int cyc, add_cycles;
    in_valid = 0; in_instr = '0; in_wid = '0; in_tmask = '0;
    in_rs1_data = '0; in_rs2_data = '0; out_ready = 1'b1;
    for (int k = 0; k < WORDS; k++) proto[k] = $urandom;
    for (int d = 0; d < D; d++) ones[d] = 0;
    for (int i = 0; i < N; i++)
      for (int k = 0; k < WORDS; k++) begin
        logic [31:0] flip;
        for (int j = 0; j < 32; j++) flip[j] = ($urandom_range(0, 99) < 35);
        hv[i][k] = proto[k] ^ flip;
        for (int j = 0; j < 32; j++) ones[k*32 + j] += hv[i][k][j];
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int p = 0; p < WORDS / (W*T); p++) begin
      // clear counters
      for (int w = 0; w < W; w++)
        for (int j = 0; j < NUM_BOUND; j++) begin
          for (int t = 0; t < T; t++) begin a[t] = j; b[t] = '0; end
          send(enc(3'd1, 5'd0, 5'd10, 5'd11), w, a, b, cyc);
        end
      // accumulate
      add_cycles = 0;
      for (int i = 0; i < N; i++)
        for (int w = 0; w < W; w++) begin
          for (int t = 0; t < T; t++) a[t] = hv[i][p*W*T + w*T + t];
          send(enc(3'd3, 5'd0, 5'd10, 5'd0), w, a, '0, cyc);
          add_cycles += cyc;
        end
      checks++;
      if (add_cycles != N * W * G) begin
        failures++; $display("FAIL pass %0d: add phase took %0d cycles, exp %0d", p, add_cycles, N*W*G);
      end
      // binarize and read back
      for (int w = 0; w < W; w++) begin
        a = '0;
        send(enc(3'd5, 5'd12, 5'd10, 5'd0), w, a, '0, cyc);
        checks++;
        if (cyc != G) begin failures++; $display("FAIL geq took %0d cycles", cyc); end
        for (int t = 0; t < T; t++) begin
          int k;
          logic [31:0] e;
          k = p*W*T + w*T + t;
          for (int j = 0; j < 32; j++) e[j] = (2*ones[k*32 + j] - N >= 0);
          checks++;
          if (!out_valid || out_data[t] !== e || !out_wb || out_rd != 5'd12) begin
            failures++; $display("FAIL class HV word %0d: %h exp %h", k, out_data[t], e);
          end
        end
        for (int j = 0; j < NUM_BOUND; j++) begin
          for (int t = 0; t < T; t++) a[t] = j;
          send(enc(3'd2, 5'd13, 5'd10, 5'd0), w, a, '0, cyc);
          for (int t = 0; t < T; t++) begin
            int k;
            k = p*W*T + w*T + t;
            checks++;
            if (out_data[t] !== 32'(2*ones[k*32 + j] - N)) begin
              failures++; $display("FAIL counter word %0d bit %0d: %0d exp %0d", k, j,
                                   $signed(out_data[t]), 2*ones[k*32 + j] - N);
            end
          end
        end
      end
      $display("pass %0d: %0d adds in %0d cycles", p, N*W, add_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
