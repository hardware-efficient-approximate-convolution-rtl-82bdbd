// tb_conv_fsm: checks the controller's state sequences and strobes.
//
// For every operation, with random fetch and acknowledge delays, the testbench records
// the state after each clock edge and compares it with the expected walk:
//   CONV         IDLE, GET_DATA x (delay+1), STAGE_1, STAGE_2, STAGE_3, DONE x (wait+1), IDLE
//   LOAD_KERNEL  IDLE, GET_DATA x (delay+1), DONE ..., IDLE
//   SET_THR / READ_OUT  IDLE, DONE ..., IDLE
// It also checks that s1/s2/s3/done/busy match the state, that fetch_start comes only
// with CONV or LOAD_KERNEL, and that a start request outside IDLE is ignored.
module tb_conv_fsm;
  import conv_approx_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, fdone = 0, ack = 0;
  cx_op_e op;
  conv_state_e state;
  cx_op_e op_q;
  logic capture, fstart, s1, s2, s3, done, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  conv_fsm dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .op_i(op), .fetch_done_i(fdone),
    .ack_i(ack), .state_o(state), .op_o(op_q), .capture_o(capture), .fetch_start_o(fstart),
    .s1_en_o(s1), .s2_en_o(s2), .s3_en_o(s3), .done_o(done), .busy_o(busy));

  task automatic expect_state(input conv_state_e s);
    checks++;
    if (state != s) begin
      failures++; $display("FAIL state %s expected %s", state.name(), s.name());
    end
    checks++;
    if (s1 != (s == S_STAGE_1) || s2 != (s == S_STAGE_2) || s3 != (s == S_STAGE_3) ||
        done != (s == S_DONE) || busy != (s != S_IDLE)) begin
      failures++; $display("FAIL strobes in %s", s.name());
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fd, aw;
    op = CX_CONV;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expect_state(S_IDLE);
    for (int n = 0; n < 400; n++) begin
      op = cx_op_e'($urandom % 4);
      fd = $urandom % 5;
      aw = $urandom % 4;
      start = 1;
      #1;
      checks++;
      if (!capture || fstart != (op == CX_CONV || op == CX_LOAD_KERNEL)) begin
        failures++; $display("FAIL capture=%b fetch_start=%b for %s", capture, fstart, op.name());
      end
      @(negedge clk);
      // Keep start high while busy (as the core does): it must be ignored.
      if (op == CX_CONV || op == CX_LOAD_KERNEL) begin
        for (int c = 0; c < fd; c++) begin
          expect_state(S_GET_DATA);
          checks++;
          if (capture) begin failures++; $display("FAIL capture while busy"); end
          @(negedge clk);
        end
        expect_state(S_GET_DATA);
        fdone = 1;
        @(negedge clk);
        fdone = 0;
        if (op == CX_CONV) begin
          expect_state(S_STAGE_1); @(negedge clk);
          expect_state(S_STAGE_2); @(negedge clk);
          expect_state(S_STAGE_3); @(negedge clk);
        end
      end
      for (int c = 0; c < aw; c++) begin
        expect_state(S_DONE);
        @(negedge clk);
      end
      expect_state(S_DONE);
      checks++;
      if (op_q != op) begin failures++; $display("FAIL op_o %s", op_q.name()); end
      ack = 1; start = 0;
      @(negedge clk);
      ack = 0;
      expect_state(S_IDLE);
      repeat ($urandom % 2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
