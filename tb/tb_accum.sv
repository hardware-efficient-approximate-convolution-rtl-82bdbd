// tb_accum: checks the accumulation stage. Random signed 64-bit products (including
// extreme values) with random keep masks are summed; y must equal the reference sum of
// the kept products in 68 bits, hold when en is low, and clear on clr.
module tb_accum;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [8:0][63:0] prod;
  logic [8:0]       keep;
  logic signed [67:0] y, expv, held;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  accum dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .en_i(en), .prod_i(prod),
             .keep_i(keep), .y_o(y));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prod = '0; keep = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 9; i++) begin
        prod[i] = {$urandom, $urandom};
        if (n % 7 == 0) prod[i] = (n % 2) ? 64'h8000_0000_0000_0000 : 64'h7FFF_FFFF_FFFF_FFFF;
      end
      keep = 9'($urandom);
      expv = '0;
      for (int i = 0; i < 9; i++) if (keep[i]) expv += 68'($signed(prod[i]));
      en = 1;
      @(negedge clk);
      en = 0;
      checks++;
      if (y !== expv) begin failures++; $display("FAIL y=%h exp=%h", y, expv); end
      held = y;
      prod = '1;
      @(negedge clk);
      checks++;
      if (y !== held) begin failures++; $display("FAIL y changed without en"); end
      if (n % 100 == 0) begin
        clr = 1; en = 1;
        @(negedge clk);
        clr = 0; en = 0;
        checks++;
        if (y !== '0) begin failures++; $display("FAIL clear"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
