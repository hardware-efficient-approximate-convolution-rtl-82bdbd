// tb_data_mem: behavioural model of the SoC data memory seen by the accelerator.
//
// A word-addressed array of DEPTH 32-bit words behind a request/grant/response port:
// a request is granted in the cycle it is raised unless a stall is drawn for that cycle
// (probability STALL_PCT percent, drawn with $urandom), and every granted read is
// answered in the next cycle with data_rvalid_o and the word at data_addr_i / 4.
// Testbenches fill `mem` directly and can count the stall cycles in `n_stalls`.
// Read-only: the accelerator never writes memory.
module tb_data_mem #(
  parameter int unsigned DEPTH = 1024
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  int unsigned stall_pct_i,
  input  logic        data_req_i,
  input  logic [31:0] data_addr_i,
  output logic        data_gnt_o,
  output logic        data_rvalid_o,
  output logic [31:0] data_rdata_o
);

  logic [31:0] mem [DEPTH];
  logic        stall;
  int unsigned n_stalls;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  assign data_gnt_o = data_req_i && !stall;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stall         <= 1'b0;
      data_rvalid_o <= 1'b0;
      data_rdata_o  <= '0;
      n_stalls      <= 0;
    end else begin
      stall         <= ($urandom % 100) < stall_pct_i;
      data_rvalid_o <= data_req_i && data_gnt_o;
      if (data_req_i && data_gnt_o) data_rdata_o <= mem[(data_addr_i >> 2) % DEPTH];
      if (data_req_i && stall) n_stalls <= n_stalls + 1;
    end
  end

endmodule
