// conv_approx_pkg: types and constants shared by the approximate-convolution unit.
//
// The unit convolves a 4x4 window of signed 32-bit activations with a 3x3 kernel of
// signed 32-bit weights and produces a 2x2 output. Operand magnitudes are summarised by
// the position of their most significant set bit (5 bits for 32-bit data); a product whose
// MSB-sum lies too far below the largest MSB-sum of its window is not computed.
// The sizes, the opcode 0x77 and the state names come from the paper. The funct3 codes
// of the four operations and the threshold width are this design's own choices.
package conv_approx_pkg;

  localparam int unsigned DATA_W  = 32;                 // operand width
  localparam int unsigned MSB_W   = 5;                  // MSB position width ($clog2(DATA_W))
  localparam int unsigned THR_W   = 6;                  // threshold T, in MSB units
  localparam int unsigned PROD_W  = 2 * DATA_W;         // full signed product
  localparam int unsigned ACC_W   = PROD_W + 4;         // sum of 9 products without overflow

  localparam int unsigned IN_DIM  = 4;                  // input window is IN_DIM x IN_DIM
  localparam int unsigned K_DIM   = 3;                  // kernel is K_DIM x K_DIM
  localparam int unsigned OUT_DIM = IN_DIM - K_DIM + 1; // 2x2 outputs
  localparam int unsigned N_X     = IN_DIM * IN_DIM;    // 16 activations
  localparam int unsigned N_W     = K_DIM * K_DIM;      // 9 weights
  localparam int unsigned N_Y     = OUT_DIM * OUT_DIM;  // 4 outputs

  localparam logic [6:0] OPC_CUSTOM = 7'h77;            // repurposed custom opcode

  // Operation selected by funct3 of an opcode-0x77 R-type instruction.
  typedef enum logic [2:0] {
    CX_CONV        = 3'd0,  // rs1 = word count, rs2 = address of the 4x4 window; rd <= y0
    CX_LOAD_KERNEL = 3'd1,  // rs1 = word count, rs2 = address of the 3x3 kernel; rd <= 0
    CX_SET_THR     = 3'd2,  // rs1[THR_W-1:0] = new threshold T; rd <= previous T
    CX_READ_OUT    = 3'd3   // rs1[1:0] selects y0..y3; rd <= that output
  } cx_op_e;

  // States of the controller, named as in the paper.
  typedef enum logic [2:0] {
    S_IDLE     = 3'd0,
    S_GET_DATA = 3'd1,
    S_STAGE_1  = 3'd2,  // MSB analysis of the 16 activations
    S_STAGE_2  = 3'd3,  // pruning and multiplication
    S_STAGE_3  = 3'd4,  // accumulation
    S_DONE     = 3'd5
  } conv_state_e;

endpackage
