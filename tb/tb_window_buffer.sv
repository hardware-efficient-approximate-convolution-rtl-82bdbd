// tb_window_buffer: fills the 4x4 window in random order, checks all 16 entries against
// a reference copy, then clears it (with one simultaneous write) and checks again.
module tb_window_buffer;
  logic clk = 0, rst_n = 0, clr = 0, we = 0;
  logic [3:0] waddr;
  logic [31:0] wdata;
  logic [15:0][31:0] x, model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  window_buffer dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .we_i(we), .waddr_i(waddr),
                     .wdata_i(wdata), .x_o(x));

  task automatic compare();
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (x[i] != model[i]) begin
        failures++; $display("FAIL entry %0d %h exp %h", i, x[i], model[i]);
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0; waddr = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare();
    for (int n = 0; n < 200; n++) begin
      for (int k = 0; k < 20; k++) begin
        waddr = 4'($urandom); wdata = $urandom; we = 1;
        @(negedge clk);
        we = 0;
        model[waddr] = wdata;
      end
      compare();
      if (n % 4 == 0) begin
        clr = 1; we = 1; waddr = 4'($urandom); wdata = $urandom;
        @(negedge clk);
        clr = 0; we = 0;
        model = '0;
        model[waddr] = wdata;
        compare();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
