// tb_mem_fetch: checks the memory read master against the behavioural memory.
//
// Fetches of random length (0..20 words, clipped to 16) from random word-aligned
// addresses, with and without random grant stalls. Every streamed word must carry the
// next index and the memory word at base + 4*index, the number of words must match,
// done must pulse exactly once, and with a zero-wait memory an N-word fetch must finish
// N+1 cycles after the start edge.
module tb_mem_fetch;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] base, count;
  logic req, gnt, rvalid, wr, done;
  logic [31:0] addr, rdata, wdata;
  logic [3:0] widx;
  int unsigned stall_pct;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tb_data_mem #(.DEPTH(256)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .stall_pct_i(stall_pct), .data_req_i(req),
    .data_addr_i(addr), .data_gnt_o(gnt), .data_rvalid_o(rvalid), .data_rdata_o(rdata));

  mem_fetch dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .base_i(base), .count_i(count),
    .data_req_o(req), .data_addr_o(addr), .data_gnt_i(gnt), .data_rvalid_i(rvalid),
    .data_rdata_i(rdata), .wr_o(wr), .widx_o(widx), .wdata_o(wdata), .done_o(done));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_words, got, cycles, n_done;
    stall_pct = 0; base = 0; count = 0;
    for (int i = 0; i < 256; i++) u_mem.mem[i] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      stall_pct = (n < 100) ? 0 : 40;
      base  = 32'(($urandom % 200) * 4);
      count = $urandom % 21;
      n_words = (count > 16) ? 16 : int'(count);
      start = 1;
      @(negedge clk);
      start = 0;
      got = 0; cycles = 0; n_done = 0;
      while (n_done == 0) begin
        cycles++;
        if (wr) begin
          checks++;
          if (int'(widx) != got || wdata != u_mem.mem[(base >> 2) + got]) begin
            failures++;
            $display("FAIL word %0d idx=%0d data=%h exp=%h", got, widx, wdata,
                     u_mem.mem[(base >> 2) + got]);
          end
          got++;
        end
        if (done) n_done++;
        @(negedge clk);
        if (cycles > 200) break;
      end
      checks++;
      if (got != n_words || n_done != 1) begin
        failures++; $display("FAIL count=%0d got=%0d done=%0d", count, got, n_done);
      end
      if (stall_pct == 0) begin
        checks++;
        if (cycles != n_words + 1) begin
          failures++; $display("FAIL %0d words took %0d cycles", n_words, cycles);
        end
      end
      checks++;
      if (done || req) begin failures++; $display("FAIL still busy after done"); end
      repeat ($urandom % 3) @(negedge clk);
    end
    $display("grant stalls seen: %0d", u_mem.n_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
