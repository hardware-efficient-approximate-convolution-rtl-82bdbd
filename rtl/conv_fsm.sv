// conv_fsm: controller of the approximate-convolution unit.
//
// Six states, named as in the paper:
//   IDLE      ready; a claimed instruction (start_i) is captured, operands latched
//   GET_DATA  the fetch unit reads words into the window buffer or kernel store; the
//             state is held until fetch_done_i
//   STAGE_1   MSB analysis of the 16 activations (s1_en_o loads the MSB register)
//   STAGE_2   pruning and multiplication (s2_en_o loads the product registers)
//   STAGE_3   accumulation (s3_en_o loads the outputs)
//   DONE      done_o is raised and held until ack_i, then back to IDLE
// A convolution walks all six states. A kernel load goes IDLE -> GET_DATA -> DONE,
// and a threshold write or output read goes IDLE -> DONE. Those shorter paths, one
// cycle per STAGE_n and the asynchronous active-low reset are this design's choices. The
// paper gives the state names, their order and what each does for the convolution.
//
// Timing: capture_o is combinational (IDLE and start_i) so the datapath latches the
// operands on the same edge that leaves IDLE. With a memory that grants at once and
// answers one cycle later, a 16-word convolution spends 17 cycles in GET_DATA (one
// request per cycle, the last word arriving a cycle after its grant) and reaches DONE
// 20 cycles after leaving IDLE.
module conv_fsm
  import conv_approx_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  cx_op_e      op_i,
  input  logic        fetch_done_i,
  input  logic        ack_i,
  output conv_state_e state_o,
  output cx_op_e      op_o,
  output logic        capture_o,
  output logic        fetch_start_o,
  output logic        s1_en_o,
  output logic        s2_en_o,
  output logic        s3_en_o,
  output logic        done_o,
  output logic        busy_o
);

  conv_state_e state_q, state_d;
  cx_op_e      op_q;

  assign capture_o     = (state_q == S_IDLE) && start_i;
  assign fetch_start_o = capture_o && (op_i == CX_CONV || op_i == CX_LOAD_KERNEL);
  assign s1_en_o       = (state_q == S_STAGE_1);
  assign s2_en_o       = (state_q == S_STAGE_2);
  assign s3_en_o       = (state_q == S_STAGE_3);
  assign done_o        = (state_q == S_DONE);
  assign busy_o        = (state_q != S_IDLE);
  assign state_o       = state_q;
  assign op_o          = op_q;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_IDLE:     if (start_i) state_d = fetch_start_o ? S_GET_DATA : S_DONE;
      S_GET_DATA: if (fetch_done_i) state_d = (op_q == CX_CONV) ? S_STAGE_1 : S_DONE;
      S_STAGE_1:  state_d = S_STAGE_2;
      S_STAGE_2:  state_d = S_STAGE_3;
      S_STAGE_3:  state_d = S_DONE;
      S_DONE:     if (ack_i) state_d = S_IDLE;
      default:    state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      op_q    <= CX_CONV;
    end else begin
      state_q <= state_d;
      if (capture_o) op_q <= op_i;
    end
  end

  // An acknowledgement is only meaningful while a result is offered.
  assert property (@(posedge clk_i) disable iff (!rst_ni) ack_i |-> state_q == S_DONE)
    else $error("conv_fsm: ack_i outside DONE");

endmodule
