// tb_bound_alu: checks one execution lane for all four operations with
// random operands against an independent model of set, get, add and geq.
module tb_bound_alu;
  import hdc_pkg::*;

  hdc_op_e op;
  logic [XLEN-1:0] rs1_data, rs2_data, result;
  bound_vec_t cnt_in, wr_all_data;
  logic wr_all_en, wr_one_en;
  logic [BIDX_W-1:0] wr_idx;
  counter_t wr_data;
  int checks = 0, failures = 0;

  bound_alu dut (.*);

  task automatic fail(string s);
    failures++;
    $display("FAIL %s op=%0d rs1=%h rs2=%h", s, op, rs1_data, rs2_data);
  endtask

  initial begin
    for (int i = 0; i < 4000; i++) begin
      op = hdc_op_e'(i % 4);
      for (int j = 0; j < NUM_BOUND; j++) cnt_in[j] = counter_t'($signed($urandom_range(0, 100)) - 50);
      rs1_data = $urandom;
      rs2_data = $urandom;
      if (op == OP_GEQ) rs1_data = 32'($signed($urandom_range(0, 100)) - 50);
      #1;
      checks++;
      case (op)
        OP_SET: begin
          if (!wr_one_en || wr_all_en || wr_idx != rs1_data[4:0] || wr_data != counter_t'(rs2_data))
            fail("set");
        end
        OP_GET: begin
          if (wr_one_en || wr_all_en || result != 32'(cnt_in[rs1_data[4:0]])) fail("get");
        end
        OP_ADD: begin
          if (!wr_all_en || wr_one_en) fail("add enables");
          for (int j = 0; j < NUM_BOUND; j++)
            if (wr_all_data[j] != cnt_in[j] + (rs1_data[j] ? 1 : -1)) fail("add value");
        end
        OP_GEQ: begin
          if (wr_one_en || wr_all_en) fail("geq enables");
          for (int j = 0; j < NUM_BOUND; j++)
            if (result[j] != (int'(cnt_in[j]) >= int'($signed(rs1_data)))) fail("geq value");
        end
        default: fail("op");
      endcase
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
