// tb_conv_approx_unit: end-to-end test of the accelerator at its default parameters.
//
// The testbench plays the host core: it presents opcode-0x77 instructions with rs1/rs2
// values, holds them while the unit is busy, takes the result when done is raised and
// acknowledges it after a random delay. Data come from the behavioural memory, which
// stalls grants at random in part of the run. Random kernels and windows (with zeros,
// negative and large values) are loaded and convolved at random thresholds. Every
// result, all four outputs, READ_OUT values and the multiplication count are compared
// with the reference model. With a zero-wait memory a full CONV must raise done 20
// cycles after it is captured.
// Mechanisms that must each occur at least once: a product pruned although non-zero, a
// product skipped for a zero operand, a grant stall, a DONE held for a late
// acknowledgement, a short fetch (size < 16, missing entries read as zero), a clipped
// fetch (size > 16), a threshold change, a kernel load and an output read.
module tb_conv_approx_unit;
  import conv_approx_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned KBASE = 0;     // word address of the kernel
  localparam int unsigned XBASE = 64;    // word address of the window

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, ack = 0;
  logic [31:0] instr, rs1, rs2;
  logic hit, busy, done;
  logic [31:0] result;
  logic [4:0] rd;
  logic req, gnt, rvalid;
  logic [31:0] addr, rdata;
  logic [3:0][31:0] y;
  logic [5:0] thr, mcount;
  int unsigned stall_pct = 0;

  int checks = 0, failures = 0;
  int n_pruned = 0, n_zero_skip = 0, n_ack_wait = 0, n_short = 0, n_clipped = 0;
  int n_set_thr = 0, n_kload = 0, n_read = 0;

  always #5 clk = ~clk;

  tb_data_mem #(.DEPTH(256)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .stall_pct_i(stall_pct), .data_req_i(req),
    .data_addr_i(addr), .data_gnt_o(gnt), .data_rvalid_o(rvalid), .data_rdata_o(rdata));

  conv_approx_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_valid_i(instr_valid), .instr_i(instr),
    .rs1_i(rs1), .rs2_i(rs2), .cx_hit_o(hit), .busy_o(busy), .done_o(done),
    .result_o(result), .rd_o(rd), .ack_i(ack),
    .data_req_o(req), .data_addr_o(addr), .data_gnt_i(gnt), .data_rvalid_i(rvalid),
    .data_rdata_i(rdata), .y_o(y), .thr_o(thr), .mult_count_o(mcount));

  function automatic logic [31:0] cx(input logic [2:0] f3, input logic [4:0] rdv);
    return {7'd0, 5'd11, 5'd10, f3, rdv, 7'h77};
  endfunction

  // Issue one instruction; returns its result and the cycles from capture to done.
  task automatic issue(input logic [2:0] f3, input logic [31:0] a, input logic [31:0] b,
                       output logic [31:0] res, output int cycles);
    logic [4:0] rdv;
    int wait_ack;
    rdv = 5'($urandom % 31 + 1);
    instr = cx(f3, rdv); rs1 = a; rs2 = b; instr_valid = 1;
    #1;
    checks++;
    if (!hit) begin failures++; $display("FAIL instruction not claimed"); end
    @(negedge clk);
    cycles = 0;
    while (!done) begin
      cycles++;
      @(negedge clk);
      if (cycles > 1000) break;
    end
    res = result;
    checks++;
    if (rd != rdv) begin failures++; $display("FAIL rd=%0d exp %0d", rd, rdv); end
    wait_ack = $urandom % 3;
    if (wait_ack > 0) n_ack_wait++;
    repeat (wait_ack) begin
      @(negedge clk);
      checks++;
      if (!done || result != res) begin failures++; $display("FAIL DONE not held"); end
    end
    ack = 1;
    @(negedge clk);
    ack = 0; instr_valid = 0;
    checks++;
    if (busy) begin failures++; $display("FAIL busy after ack"); end
    repeat ($urandom % 2) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [8:0][31:0]  w;
    logic [15:0][31:0] x;
    logic [31:0] res;
    longint ey[4];
    int cyc, en_mult, cur_thr, nz, cnt;
    instr = '0; rs1 = '0; rs2 = '0; w = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cur_thr = 7;
    checks++;
    if (thr != 6'd7) begin failures++; $display("FAIL reset threshold %0d", thr); end

    for (int n = 0; n < 300; n++) begin
      stall_pct = (n < 100) ? 0 : 30;
      // New kernel now and then.
      if (n % 10 == 0) begin
        for (int i = 0; i < 9; i++) begin
          w[i] = rand_operand(15);
          u_mem.mem[KBASE + i] = w[i];
        end
        issue(3'd1, 32'd9, 32'(KBASE * 4), res, cyc);
        n_kload++;
        checks++;
        if (res != 0) begin failures++; $display("FAIL LOAD_KERNEL result %h", res); end
      end
      // New threshold now and then; the previous one comes back as the result.
      if (n % 7 == 3) begin
        int t;
        t = $urandom % 12;
        issue(3'd2, 32'(t), 32'd0, res, cyc);
        n_set_thr++;
        checks++;
        if (res != 32'(cur_thr) || thr != 6'(t)) begin
          failures++; $display("FAIL SET_THR old=%0d exp %0d now=%0d", res, cur_thr, thr);
        end
        cur_thr = t;
      end
      // Window: mostly full, sometimes short or over-long.
      cnt = 16;
      if (n % 13 == 5) cnt = 5 + $urandom % 11;
      if (n % 17 == 8) cnt = 17 + $urandom % 8;
      for (int i = 0; i < 16; i++) u_mem.mem[XBASE + i] = rand_operand(25);
      for (int i = 16; i < 24; i++) u_mem.mem[XBASE + i] = $urandom;
      for (int i = 0; i < 16; i++) x[i] = (i < cnt) ? u_mem.mem[XBASE + i] : '0;
      if (cnt < 16) n_short++;
      if (cnt > 16) n_clipped++;
      issue(3'd0, 32'(cnt), 32'(XBASE * 4), res, cyc);
      ref_conv(x, w, cur_thr, 1'b0, ey, en_mult);
      checks++;
      if (res != 32'(ey[0])) begin failures++; $display("FAIL CONV result %h exp %h", res, 32'(ey[0])); end
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (y[k] != 32'(ey[k])) begin failures++; $display("FAIL y%0d %h exp %h", k, y[k], 32'(ey[k])); end
      end
      checks++;
      if (int'(mcount) != en_mult) begin failures++; $display("FAIL mult count %0d exp %0d", mcount, en_mult); end
      if (stall_pct == 0) begin
        checks++;
        if (cyc != ((cnt > 16 ? 16 : cnt) + 4)) begin
          failures++; $display("FAIL CONV of %0d words took %0d cycles", cnt, cyc);
        end
      end
      // Coverage of the two kinds of skipping.
      nz = 0;
      for (int i = 0; i < 2; i++)
        for (int j = 0; j < 2; j++)
          for (int r = 0; r < 3; r++)
            for (int c = 0; c < 3; c++)
              if (x[(i+r)*4+j+c] != 0 && w[r*3+c] != 0) nz++;
      if (nz > en_mult) n_pruned++;
      if (nz < 36) n_zero_skip++;
      // Read one output back through the register path.
      if (n % 3 == 0) begin
        int k;
        k = $urandom % 4;
        issue(3'd3, 32'(k), 32'd0, res, cyc);
        n_read++;
        checks++;
        if (res != 32'(ey[k])) begin failures++; $display("FAIL READ_OUT %0d %h exp %h", k, res, 32'(ey[k])); end
      end
    end

    $display("pruned=%0d zero_skip=%0d stalls=%0d ack_wait=%0d short=%0d clipped=%0d set_thr=%0d kload=%0d read=%0d",
             n_pruned, n_zero_skip, u_mem.n_stalls, n_ack_wait, n_short, n_clipped, n_set_thr,
             n_kload, n_read);
    checks++;
    if (n_pruned == 0 || n_zero_skip == 0 || u_mem.n_stalls == 0 || n_ack_wait == 0 ||
        n_short == 0 || n_clipped == 0 || n_set_thr == 0 || n_kload == 0 || n_read == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
