// tb_mnist_workload: a 28x28 handwritten-digit-style image convolved with a 3x3 kernel,
// tiled onto the 4x4 -> 2x2 unit.
//
// The image is generated here (a stroke drawing of a "4" with one ring of faint halo
// around it, pixel values 0..255, mostly zero like the digit images the design
// targets). The kernel is the smoothing filter [1 1 1; 1 9 1; 1 1 1]. The 26x26 valid
// output is computed as 13x13 unit operations: for each 2x2 output tile the host copies the 4x4 input window at
// (2a, 2b) into a contiguous scratch area and issues CONV, then reads y1..y3 back with
// READ_OUT. An exact convolution needs 26*26*9 = 6084 multiplications.
// The run is repeated for thresholds T = 63 (nothing pruned but zeros), 6, 5, 4 and 2,
// which correspond to keeping products above about 3%, 6%, 10% and 25% of the largest
// (T = ceil(log2(1/fraction))). Each output is checked against the reference model, the
// unit's multiplication count is summed and compared with the model, and the count must
// not grow as T shrinks.
module tb_mnist_workload;
  import conv_approx_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned KBASE = 0;
  localparam int unsigned XBASE = 16;

  logic clk = 0, rst_n = 0, instr_valid = 0, ack = 0;
  logic [31:0] instr, rs1, rs2, result, addr, rdata;
  logic hit, busy, done, req, gnt, rvalid;
  logic [4:0] rd;
  logic [3:0][31:0] y;
  logic [5:0] thr, mcount;
  int checks = 0, failures = 0;
  int img [28][28];

  always #5 clk = ~clk;

  tb_data_mem #(.DEPTH(64)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .stall_pct_i(0), .data_req_i(req), .data_addr_i(addr),
    .data_gnt_o(gnt), .data_rvalid_o(rvalid), .data_rdata_o(rdata));

  conv_approx_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_valid_i(instr_valid), .instr_i(instr),
    .rs1_i(rs1), .rs2_i(rs2), .cx_hit_o(hit), .busy_o(busy), .done_o(done),
    .result_o(result), .rd_o(rd), .ack_i(ack),
    .data_req_o(req), .data_addr_o(addr), .data_gnt_i(gnt), .data_rvalid_i(rvalid),
    .data_rdata_i(rdata), .y_o(y), .thr_o(thr), .mult_count_o(mcount));

  task automatic issue(input logic [2:0] f3, input logic [31:0] a, input logic [31:0] b,
                       output logic [31:0] res);
    instr = {7'd0, 5'd11, 5'd10, f3, 5'd5, 7'h77}; rs1 = a; rs2 = b; instr_valid = 1;
    @(negedge clk);
    while (!done) @(negedge clk);
    res = result;
    ack = 1;
    @(negedge clk);
    ack = 0; instr_valid = 0;
  endtask

  task automatic stroke(input int r0, input int c0, input int r1, input int c1);
    for (int k = 0; k <= 40; k++) begin
      int r, c;
      r = r0 + ((r1 - r0) * k) / 40;
      c = c0 + ((c1 - c0) * k) / 40;
      img[r][c] = 255;
      if (img[r][c+1] < 180) img[r][c+1] = 180;
      if (r + 1 < 28 && img[r+1][c] < 90) img[r+1][c] = 90;
    end
  endtask

  // Give every zero pixel that touches a lit one the value v.
  task automatic halo(input int v);
    int nxt [28][28];
    nxt = img;
    for (int r = 1; r < 27; r++)
      for (int c = 1; c < 27; c++)
        if (img[r][c] == 0)
          for (int dr = -1; dr <= 1; dr++)
            for (int dc = -1; dc <= 1; dc++)
              if (img[r+dr][c+dc] != 0) nxt[r][c] = v;
    img = nxt;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [8:0][31:0]  w;
    logic [15:0][31:0] x;
    logic [31:0] res;
    longint ey[4];
    int thr_list[5] = '{63, 6, 5, 4, 2};
    int total, ref_total, prev_total, en, zeros, nz_mults;
    instr = '0; rs1 = '0; rs2 = '0;
    for (int r = 0; r < 28; r++) for (int c = 0; c < 28; c++) img[r][c] = 0;
    stroke(5, 8, 16, 5);      // left arm of the "4"
    stroke(16, 5, 16, 21);    // cross bar
    stroke(4, 18, 24, 17);    // stem
    halo(12);                 // faint anti-aliasing around the strokes
    zeros = 0;
    for (int r = 0; r < 28; r++) for (int c = 0; c < 28; c++) if (img[r][c] == 0) zeros++;
    $display("image: %0d of 784 pixels are zero", zeros);
    w = {32'd1, 32'd1, 32'd1, 32'd1, 32'd9, 32'd1, 32'd1, 32'd1, 32'd1};
    for (int i = 0; i < 9; i++) u_mem.mem[KBASE + i] = w[8 - i];
    for (int i = 0; i < 9; i++) w[i] = u_mem.mem[KBASE + i];
    repeat (2) @(negedge clk);
    rst_n = 1;
    issue(3'd1, 32'd9, 32'(KBASE * 4), res);

    nz_mults = 0;
    for (int r = 0; r < 26; r++)
      for (int c = 0; c < 26; c++)
        for (int k = 0; k < 9; k++)
          if (img[r + k / 3][c + k % 3] != 0) nz_mults++;

    prev_total = 1 << 30;
    foreach (thr_list[t]) begin
      issue(3'd2, 32'(thr_list[t]), 32'd0, res);
      total = 0; ref_total = 0;
      for (int a = 0; a < 13; a++)
        for (int b = 0; b < 13; b++) begin
          for (int i = 0; i < 16; i++) begin
            x[i] = 32'(img[2*a + i / 4][2*b + i % 4]);
            u_mem.mem[XBASE + i] = x[i];
          end
          issue(3'd0, 32'd16, 32'(XBASE * 4), res);
          total += int'(mcount);
          ref_conv(x, w, thr_list[t], 1'b0, ey, en);
          ref_total += en;
          checks++;
          if (res != 32'(ey[0])) begin failures++; $display("FAIL tile %0d,%0d y0", a, b); end
          for (int k = 1; k < 4; k++) begin
            issue(3'd3, 32'(k), 32'd0, res);
            checks++;
            if (res != 32'(ey[k])) begin failures++; $display("FAIL tile %0d,%0d y%0d", a, b, k); end
          end
        end
      $display("T=%0d: %0d multiplications (exact 6084, non-zero %0d)", thr_list[t], total, nz_mults);
      checks++;
      if (total != ref_total || total > prev_total) begin
        failures++; $display("FAIL count %0d model %0d previous %0d", total, ref_total, prev_total);
      end
      if (t == 0) begin
        checks++;
        if (total != nz_mults) begin failures++; $display("FAIL T=63 must keep every non-zero product"); end
      end
      prev_total = total;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
