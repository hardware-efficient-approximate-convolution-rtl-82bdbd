// tb_msb_encoder: checks the magnitude MSB encoder against the reference model on
// edge values (0, +-1, powers of two, the extremes) and 20,000 random values.
module tb_msb_encoder;
  import tb_ref_pkg::*;

  logic [31:0] value;
  logic [4:0]  msb;
  logic        zero;
  int checks = 0, failures = 0;

  msb_encoder dut (.value_i(value), .msb_o(msb), .zero_o(zero));

  task automatic check(input logic [31:0] v);
    int exp_msb;
    value = v;
    #1;
    exp_msb = ref_msb(v);
    checks++;
    if (msb != 5'(exp_msb) || zero != (v == 0)) begin
      failures++;
      $display("FAIL value=%h msb=%0d exp=%0d zero=%b", v, msb, exp_msb, zero);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'd0); check(32'd1); check(-32'sd1); check(32'h8000_0000); check(32'h7FFF_FFFF);
    for (int b = 0; b < 32; b++) begin
      check(32'd1 << b);
      check(-(32'd1 << b));
      check((32'd1 << b) | ((32'd1 << b) - 1));
    end
    for (int n = 0; n < 20000; n++) check($urandom >> ($urandom % 32));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
