// tb_prune_mult: checks the pruning/multiply stage of one window.
//
// Two instances run side by side, one with each comparison rule (SKIP_ON_EQUAL = 0 and
// 1). Random windows with zeros, small and large operands and random thresholds are
// driven with MSBs taken from the reference model; after the enable edge the keep bits
// and every kept product are compared with the reference. Windows built so that one term
// lies exactly T below the maximum check that the two rules differ there. A dropped
// term's product register must keep its previous value (it is not clocked).
module tb_prune_mult;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0;
  logic [5:0] thr;
  logic [8:0][31:0] x, w;
  logic [8:0][4:0]  mx, mw;
  logic [8:0]       zx, zw;
  logic [8:0][63:0] prod0, prod1, prev0;
  logic [8:0]       keep0, keep1;
  int checks = 0, failures = 0, n_tie_diff = 0, n_pruned = 0;

  always #5 clk = ~clk;

  prune_mult #(.SKIP_ON_EQUAL(1'b0)) dut0 (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .thr_i(thr), .x_i(x), .w_i(w),
    .msb_x_i(mx), .msb_w_i(mw), .zero_x_i(zx), .zero_w_i(zw), .prod_o(prod0), .keep_o(keep0));
  prune_mult #(.SKIP_ON_EQUAL(1'b1)) dut1 (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .thr_i(thr), .x_i(x), .w_i(w),
    .msb_x_i(mx), .msb_w_i(mw), .zero_x_i(zx), .zero_w_i(zw), .prod_o(prod1), .keep_o(keep1));

  task automatic apply(input logic [8:0][31:0] xv, input logic [8:0][31:0] wv, input int t);
    longint y0, y1;
    logic [8:0] k0, k1;
    x = xv; w = wv; thr = 6'(t);
    for (int i = 0; i < 9; i++) begin
      mx[i] = 5'(ref_msb(xv[i])); mw[i] = 5'(ref_msb(wv[i]));
      zx[i] = (xv[i] == 0);       zw[i] = (wv[i] == 0);
    end
    prev0 = prod0;
    @(negedge clk); en = 1;
    @(negedge clk); en = 0;
    ref_window(xv, wv, t, 1'b0, y0, k0);
    ref_window(xv, wv, t, 1'b1, y1, k1);
    checks += 2;
    if (keep0 !== k0) begin failures++; $display("FAIL keep0 %b exp %b", keep0, k0); end
    if (keep1 !== k1) begin failures++; $display("FAIL keep1 %b exp %b", keep1, k1); end
    if (k0 != k1) n_tie_diff++;
    for (int i = 0; i < 9; i++) begin
      longint p;
      p = longint'($signed(xv[i])) * longint'($signed(wv[i]));
      checks++;
      if (k0[i] && prod0[i] != 64'(p)) begin
        failures++; $display("FAIL prod0[%0d] %h exp %h", i, prod0[i], p);
      end
      if (!k0[i] && prod0[i] != prev0[i]) begin
        failures++; $display("FAIL prod0[%0d] changed although dropped", i);
      end
      if (k1[i] && prod1[i] != 64'(p)) begin
        failures++; $display("FAIL prod1[%0d] %h exp %h", i, prod1[i], p);
      end
      if (!k0[i] && xv[i] != 0 && wv[i] != 0) n_pruned++;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [8:0][31:0] xv, wv;
    en = 0; thr = 7; x = '0; w = '0; mx = '0; mw = '0; zx = '1; zw = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Tie cases: term 0 has MSB sum 20, term 1 sum 20 - T exactly.
    for (int t = 1; t < 8; t++) begin
      xv = '0; wv = '0;
      xv[0] = 32'd1 << 10; wv[0] = 32'd1 << 10;
      xv[1] = 32'd1 << (10 - t); wv[1] = -(32'd1 << 10);
      xv[2] = 32'd3; wv[2] = 32'd0;            // zero weight: never multiplied
      apply(xv, wv, t);
    end
    for (int n = 0; n < 1500; n++) begin
      for (int i = 0; i < 9; i++) begin
        xv[i] = rand_operand(20);
        wv[i] = rand_operand(10);
      end
      if (n % 50 == 0) begin xv[3] = 32'h8000_0000; wv[3] = 32'h8000_0000; end
      apply(xv, wv, $urandom % 12);
    end
    checks++;
    if (n_tie_diff == 0 || n_pruned == 0) begin
      failures++; $display("FAIL coverage tie_diff=%0d pruned=%0d", n_tie_diff, n_pruned);
    end
    $display("windows where the two rules differ: %0d, pruned non-zero terms: %0d",
             n_tie_diff, n_pruned);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
