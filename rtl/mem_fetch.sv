// mem_fetch: data-memory read master of the convolution unit (used in GET_DATA).
//
// On start_i it latches a byte base address and a word count (clipped to MAX_WORDS) and
// reads that many consecutive 32-bit words, base, base+4, ... The bus follows the
// request/grant/response convention of the RI5CY data port: data_req_o is held with a
// stable data_addr_o until data_gnt_i; each granted request is answered later by one
// data_rvalid_i cycle carrying data_rdata_i, in request order. Requests are pipelined:
// a new one is issued in the cycle after a grant, so with a memory that grants at once
// and answers one cycle later a word arrives every cycle.
// Every returned word leaves on wr_o/widx_o/wdata_o in the cycle it arrives. done_o
// pulses for one cycle together with the last word (in the cycle after start_i for a
// count of 0), so with a zero-wait memory an N-word fetch ends N+1 cycles after start_i.
//
// The paper says the FSM "activates data fetching" and stays in GET_DATA until "the
// required amount of data is retrieved from memory", with rs1 giving the array size and
// rs2 its address. The bus protocol, pipelining and clipping are this design's choices.
module mem_fetch #(
  parameter int unsigned MAX_WORDS = 16,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DATA_W    = 32
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         start_i,
  input  logic [ADDR_W-1:0]            base_i,
  input  logic [31:0]                  count_i,
  // data-memory port
  output logic                         data_req_o,
  output logic [ADDR_W-1:0]            data_addr_o,
  input  logic                         data_gnt_i,
  input  logic                         data_rvalid_i,
  input  logic [DATA_W-1:0]            data_rdata_i,
  // returned words
  output logic                         wr_o,
  output logic [$clog2(MAX_WORDS)-1:0] widx_o,
  output logic [DATA_W-1:0]            wdata_o,
  output logic                         done_o
);

  localparam int unsigned CNT_W = $clog2(MAX_WORDS + 1);

  logic             active;
  logic [CNT_W-1:0] total, issued, recvd;
  logic [ADDR_W-1:0] addr;

  assign data_req_o  = active && (issued != total);
  assign data_addr_o = addr;
  assign wr_o        = active && data_rvalid_i;
  assign widx_o      = recvd[$clog2(MAX_WORDS)-1:0];
  assign wdata_o     = data_rdata_i;
  assign done_o      = active && (recvd + CNT_W'(data_rvalid_i) == total);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active <= 1'b0;
      total  <= '0;
      issued <= '0;
      recvd  <= '0;
      addr   <= '0;
    end else if (start_i) begin
      active <= 1'b1;
      total  <= (count_i > MAX_WORDS) ? CNT_W'(MAX_WORDS) : CNT_W'(count_i);
      issued <= '0;
      recvd  <= '0;
      addr   <= base_i;
    end else if (active) begin
      if (data_req_o && data_gnt_i) begin
        issued <= issued + 1'b1;
        addr   <= addr + ADDR_W'(4);
      end
      if (data_rvalid_i) recvd <= recvd + 1'b1;
      if (done_o)        active <= 1'b0;
    end
  end

  // Bus rules: the address holds while a request waits, and no response comes unasked.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   data_req_o && !data_gnt_i && !start_i |=> data_req_o && $stable(data_addr_o))
    else $error("mem_fetch: request withdrawn or address changed before grant");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   data_rvalid_i |-> active && (recvd < issued))
    else $error("mem_fetch: response without an outstanding request");

endmodule
