// tb_vpopcnt_decoder: checks the custom-instruction decoder.
//
// Sweeps every funct3 value with the HDC opcode/funct7, then random words,
// and compares valid, op, register fields and operand-use flags with a table
// written from the instruction list (funct3 1 set, 2 get, 3 add, 5 geq;
// opcode 0x0b, funct7 0x01).
module tb_vpopcnt_decoder;
  import hdc_pkg::*;

  logic [31:0] instr;
  hdc_dec_t    dec;
  int checks = 0, failures = 0;

  vpopcnt_decoder dut (.instr(instr), .dec(dec));

  task automatic check(input logic [31:0] w);
    logic       exp_valid, exp_rs2, exp_rd;
    hdc_op_e    exp_op;
    instr = w;
    #1;
    exp_valid = 1'b0; exp_rs2 = 1'b0; exp_rd = 1'b0; exp_op = OP_SET;
    if (w[6:0] == 7'h0b && w[31:25] == 7'h01) begin
      case (w[14:12])
        3'd1: begin exp_valid = 1; exp_op = OP_SET; exp_rs2 = 1; end
        3'd2: begin exp_valid = 1; exp_op = OP_GET; exp_rd = 1; end
        3'd3: begin exp_valid = 1; exp_op = OP_ADD; end
        3'd5: begin exp_valid = 1; exp_op = OP_GEQ; exp_rd = 1; end
        default: ;
      endcase
    end
    checks++;
    if (dec.valid !== exp_valid) begin
      failures++; $display("FAIL %h valid=%b exp %b", w, dec.valid, exp_valid);
    end
    if (exp_valid) begin
      checks++;
      if (dec.op !== exp_op || dec.uses_rs2 !== exp_rs2 || dec.writes_rd !== exp_rd ||
          dec.rd !== w[11:7] || dec.rs1 !== w[19:15] || dec.rs2 !== w[24:20]) begin
        failures++; $display("FAIL %h op=%0d rs2u=%b wrd=%b", w, dec.op, dec.uses_rs2, dec.writes_rd);
      end
    end
  endtask

  initial begin
    for (int f3 = 0; f3 < 8; f3++) begin
      check({7'h01, 5'd7, 5'd9, 3'(f3), 5'd3, 7'h0b});
      check({7'h00, 5'd7, 5'd9, 3'(f3), 5'd3, 7'h0b});   // wrong funct7
      check({7'h01, 5'd7, 5'd9, 3'(f3), 5'd3, 7'h33});   // ordinary OP
    end
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] w;
      w = $urandom;
      if (i % 2 == 0) begin w[6:0] = 7'h0b; w[31:25] = 7'h01; end
      check(w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
