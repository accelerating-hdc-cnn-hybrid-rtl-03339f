// vpopcnt_decoder: recognises the four HDC custom instructions.
//
// Purely combinational. An instruction is a vpopcnt op when its opcode is
// 0x0b, its funct7 is 0x01 and its funct3 is 1 (set), 2 (get), 3 (add) or
// 5 (geq); these values are the paper's. Every other word gives
// dec.valid = 0. Register fields follow the standard RISC-V R-type layout:
// rd = [11:7], rs1 = [19:15], rs2 = [24:20]. For ops that do not use a field
// the field is still passed through; uses_rs2 and writes_rd tell the issue
// logic which operands matter (set reads rs1 and rs2, get and geq read rs1
// and write rd, add reads only rs1), as the paper's assembly syntax implies.
module vpopcnt_decoder
  import hdc_pkg::*;
(
  input  logic [31:0] instr,
  output hdc_dec_t    dec
);

  logic [6:0] opcode, funct7;
  logic [2:0] funct3;

  assign opcode = instr[6:0];
  assign funct3 = instr[14:12];
  assign funct7 = instr[31:25];

  always_comb begin
    dec           = '0;
    dec.rd        = instr[11:7];
    dec.rs1       = instr[19:15];
    dec.rs2       = instr[24:20];
    dec.op        = OP_SET;
    if (opcode == OPCODE_HDC && funct7 == FUNCT7_HDC) begin
      unique case (funct3)
        F3_SET:  begin dec.valid = 1'b1; dec.op = OP_SET; dec.uses_rs2 = 1'b1; end
        F3_GET:  begin dec.valid = 1'b1; dec.op = OP_GET; dec.writes_rd = 1'b1; end
        F3_ADD:  begin dec.valid = 1'b1; dec.op = OP_ADD; end
        F3_GEQ:  begin dec.valid = 1'b1; dec.op = OP_GEQ; dec.writes_rd = 1'b1; end
        default: dec.valid = 1'b0;
      endcase
    end
  end

endmodule
