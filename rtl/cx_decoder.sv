// cx_decoder: recognises the accelerator's custom instructions.
//
// The unit claims R-type instructions with the custom opcode 0x77 (one of the opcodes
// the base ISA leaves free, as the paper chooses). funct3 selects the operation and
// funct7 must be zero; any other funct3/funct7 combination is not claimed, so the core
// treats it as it would any unknown instruction. The convolution itself (CX_CONV) and a
// kernel-load instruction come from the paper; their funct3 codes, and the two further
// operations CX_SET_THR and CX_READ_OUT, are this design's choices.
//
// Instruction fields: funct7[31:25] rs2[24:20] rs1[19:15] funct3[14:12] rd[11:7]
// opcode[6:0]. Purely combinational.
module cx_decoder
  import conv_approx_pkg::*;
(
  input  logic [31:0] instr_i,
  output logic        hit_o,
  output cx_op_e      op_o,
  output logic [4:0]  rd_o
);

  logic [6:0] opcode, funct7;
  logic [2:0] funct3;

  always_comb begin
    opcode = instr_i[6:0];
    funct3 = instr_i[14:12];
    funct7 = instr_i[31:25];
    rd_o   = instr_i[11:7];
    op_o   = CX_CONV;
    hit_o  = 1'b0;
    if (opcode == OPC_CUSTOM && funct7 == 7'd0) begin
      unique case (funct3)
        3'd0:    begin op_o = CX_CONV;        hit_o = 1'b1; end
        3'd1:    begin op_o = CX_LOAD_KERNEL; hit_o = 1'b1; end
        3'd2:    begin op_o = CX_SET_THR;     hit_o = 1'b1; end
        3'd3:    begin op_o = CX_READ_OUT;    hit_o = 1'b1; end
        default: begin op_o = CX_CONV;        hit_o = 1'b0; end
      endcase
    end
  end

endmodule
