// tb_binarize_comparators: checks the 32 threshold comparators. Replays the
// Bound figure's binarize row (counters 0 2 0 0 ... -2 0 2 with threshold 0
// give class-HV bits 1 1 1 1 ... 0 1 1), then random signed counters and
// thresholds, with ties and sign extremes, against a per-element model.
module tb_binarize_comparators;
  import hdc_pkg::*;

  bound_vec_t cnt_in;
  counter_t threshold;
  logic [XLEN-1:0] bits_out;
  int checks = 0, failures = 0;

  binarize_comparators dut (.*);

  initial begin
    int fig_cnt [7];
    int fig_bit [7];
    fig_cnt = '{0, 2, 0, 0, -2, 0, 2};
    fig_bit = '{1, 1, 1, 1, 0, 1, 1};
    cnt_in = '0;
    for (int k = 0; k < 7; k++) cnt_in[(k < 4) ? k : 25 + k] = counter_t'(fig_cnt[k]);
    threshold = '0;
    #1;
    for (int k = 0; k < 7; k++) begin
      checks++;
      if (bits_out[(k < 4) ? k : 25 + k] !== 1'(fig_bit[k])) begin
        failures++; $display("FAIL figure element %0d", k);
      end
    end
    for (int i = 0; i < 3000; i++) begin
      threshold = counter_t'($signed($urandom_range(0, 200)) - 100);
      if (i % 7 == 0) threshold = 32'sh80000000;
      if (i % 11 == 0) threshold = 32'sh7fffffff;
      for (int j = 0; j < NUM_BOUND; j++) begin
        case ($urandom_range(0, 4))
          0: cnt_in[j] = threshold;
          1: cnt_in[j] = threshold - 1;
          2: cnt_in[j] = 32'sh80000000;
          default: cnt_in[j] = counter_t'($signed($urandom_range(0, 200)) - 100);
        endcase
      end
      #1;
      for (int j = 0; j < NUM_BOUND; j++) begin
        logic e;
        e = (longint'(cnt_in[j]) >= longint'(threshold));
        checks++;
        if (bits_out[j] !== e) begin
          failures++; $display("FAIL j=%0d c=%0d thr=%0d", j, cnt_in[j], threshold);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
