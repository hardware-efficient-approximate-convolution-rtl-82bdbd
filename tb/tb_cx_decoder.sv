// tb_cx_decoder: builds R-type instruction words with random register fields and checks
// that exactly opcode 0x77 with funct7 = 0 and funct3 = 0..3 is claimed, with the right
// operation and destination register; every other opcode or funct code is refused.
module tb_cx_decoder;
  import conv_approx_pkg::*;

  logic [31:0] instr;
  logic        hit;
  cx_op_e      op;
  logic [4:0]  rd;
  int checks = 0, failures = 0;

  cx_decoder dut (.instr_i(instr), .hit_o(hit), .op_o(op), .rd_o(rd));

  function automatic logic [31:0] rtype(input logic [6:0] f7, input logic [4:0] rs2,
                                        input logic [4:0] rs1, input logic [2:0] f3,
                                        input logic [4:0] rdv, input logic [6:0] opc);
    return {f7, rs2, rs1, f3, rdv, opc};
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 5000; n++) begin
      logic [6:0] opc, f7;
      logic [2:0] f3;
      logic [4:0] rdv;
      bit exp_hit;
      opc = (n % 2) ? 7'h77 : 7'($urandom);
      f7  = (n % 3) ? 7'h00 : 7'($urandom);
      f3  = 3'($urandom);
      rdv = 5'($urandom);
      instr = rtype(f7, 5'($urandom), 5'($urandom), f3, rdv, opc);
      #1;
      exp_hit = (opc == 7'h77) && (f7 == 0) && (f3 <= 3);
      checks++;
      if (hit != exp_hit) begin
        failures++; $display("FAIL instr=%h hit=%b exp=%b", instr, hit, exp_hit);
      end
      if (exp_hit) begin
        checks++;
        if (op != cx_op_e'(f3) || rd != rdv) begin
          failures++; $display("FAIL instr=%h op=%0d rd=%0d", instr, op, rd);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
