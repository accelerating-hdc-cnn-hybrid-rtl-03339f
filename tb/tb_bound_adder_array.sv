// tb_bound_adder_array: checks the 32 bipolar accumulators. First replays
// the worked example of the Bound figure (two HVs accumulated from zero give
// counters 0 2 0 0 ... -2 0 2), then random counters, including values next
// to the signed limits, against an independent per-element model.
module tb_bound_adder_array;
  import hdc_pkg::*;

  bound_vec_t cnt_in, cnt_out;
  logic [XLEN-1:0] hv_bits;
  int checks = 0, failures = 0;

  bound_adder_array dut (.*);

  initial begin
    // Bound figure: HV A = 0 1 1 0 ... 0 0 1, HV B = 1 1 0 1 ... 0 1 1
    // (leftmost element is element 0). Middle elements are set equal to the
    // figure's rightmost pattern, which the figure leaves out.
    logic [XLEN-1:0] a, b;
    int exp_fig [7];
    a = '0; b = '0;
    a[0] = 0; a[1] = 1; a[2] = 1; a[3] = 0; a[29] = 0; a[30] = 0; a[31] = 1;
    b[0] = 1; b[1] = 1; b[2] = 0; b[3] = 1; b[29] = 0; b[30] = 1; b[31] = 1;
    exp_fig = '{0, 2, 0, 0, -2, 0, 2};
    cnt_in = '0; hv_bits = a; #1;
    cnt_in = cnt_out; hv_bits = b; #1;
    for (int k = 0; k < 7; k++) begin
      int j;
      j = (k < 4) ? k : 25 + k;
      checks++;
      if (cnt_out[j] !== counter_t'(exp_fig[k])) begin
        failures++; $display("FAIL figure element %0d = %0d, exp %0d", j, cnt_out[j], exp_fig[k]);
      end
    end
    for (int i = 0; i < 3000; i++) begin
      for (int j = 0; j < NUM_BOUND; j++) begin
        case ($urandom_range(0, 3))
          0: cnt_in[j] = 32'sh7fffffff;
          1: cnt_in[j] = 32'sh80000000;
          default: cnt_in[j] = counter_t'($signed($urandom_range(0, 20000)) - 10000);
        endcase
      end
      hv_bits = $urandom;
      #1;
      for (int j = 0; j < NUM_BOUND; j++) begin
        longint e;
        e = longint'(cnt_in[j]) + (hv_bits[j] ? 64'sd1 : -64'sd1);
        checks++;
        if (cnt_out[j] !== counter_t'(e[31:0])) begin
          failures++; $display("FAIL j=%0d in=%0d bit=%b out=%0d", j, cnt_in[j], hv_bits[j], cnt_out[j]);
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
