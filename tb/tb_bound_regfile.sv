// tb_bound_regfile: checks the per-thread Bound register file against an
// array model: reset to zero, whole-array writes, single-counter writes,
// priority of the whole-array write, and holding when no write is enabled.
module tb_bound_regfile;
  import hdc_pkg::*;

  logic clk = 0, rst_n = 0;
  bound_vec_t rd_all, wr_all_data, model;
  logic wr_all_en = 0, wr_one_en = 0;
  logic [BIDX_W-1:0] wr_idx = '0;
  counter_t wr_data = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  bound_regfile dut (.*);

  task automatic compare(string what);
    checks++;
    if (rd_all !== model) begin
      failures++; $display("FAIL %s", what);
    end
  endtask

  initial begin
    wr_all_data = '0;
    model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare("reset");
    for (int i = 0; i < 3000; i++) begin
      int r;
      r = $urandom_range(0, 3);
      wr_all_en = (r == 0) || (r == 3);
      wr_one_en = (r == 1) || (r == 3);
      for (int j = 0; j < NUM_BOUND; j++) wr_all_data[j] = $urandom;
      wr_idx  = BIDX_W'($urandom);
      wr_data = $urandom;
      @(negedge clk);
      if (wr_all_en) model = wr_all_data;
      else if (wr_one_en) model[wr_idx] = wr_data;
      compare("write");
    end
    wr_all_en = 0; wr_one_en = 0;
    repeat (3) @(negedge clk);
    compare("hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
