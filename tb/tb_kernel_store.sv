// tb_kernel_store: writes random kernels (with zeros and negative weights) one weight at
// a time and checks every stored weight, its MSB position and zero flag against a
// reference copy. Also checks the reset state and that writes to other indices leave an
// entry alone.
module tb_kernel_store;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, we = 0;
  logic [3:0] waddr;
  logic [31:0] wdata;
  logic [8:0][31:0] w;
  logic [8:0][4:0]  msb;
  logic [8:0]       zero;
  logic [8:0][31:0] model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  kernel_store dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .waddr_i(waddr),
                    .wdata_i(wdata), .w_o(w), .msb_o(msb), .zero_o(zero));

  task automatic compare();
    for (int i = 0; i < 9; i++) begin
      checks++;
      if (w[i] != model[i] || msb[i] != 5'(ref_msb(model[i])) || zero[i] != (model[i] == 0)) begin
        failures++;
        $display("FAIL entry %0d w=%h exp=%h msb=%0d zero=%b", i, w[i], model[i], msb[i], zero[i]);
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
    model = '0; waddr = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare();
    for (int n = 0; n < 300; n++) begin
      for (int k = 0; k < 9; k++) begin
        waddr = 4'($urandom % 9);
        wdata = rand_operand(20);
        we = 1;
        @(negedge clk);
        we = 0;
        model[waddr] = wdata;
      end
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
