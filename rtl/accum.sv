// accum: accumulation of the kept partial products of one window (STAGE_3).
//
// Adds the products whose keep bit is set, sign-extended to ACC_W bits, in one adder
// tree, and registers the sum as the window's output y. With ACC_W = PROD_W + 4 the sum
// of up to 16 full-width products cannot overflow. The paper says only that the retained
// products are summed; the single-cycle adder and the widths are this design's choices.
//
// Timing: y_o updates on the rising edge where en_i is high; clr_i (which wins over
// en_i) sets it to zero.
module accum #(
  parameter int unsigned N_TERMS = 9,
  parameter int unsigned PROD_W  = 64,
  parameter int unsigned ACC_W   = PROD_W + 4
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic                             clr_i,
  input  logic                             en_i,
  input  logic [N_TERMS-1:0][PROD_W-1:0]   prod_i,
  input  logic [N_TERMS-1:0]               keep_i,
  output logic signed [ACC_W-1:0]          y_o
);

  logic signed [ACC_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int unsigned i = 0; i < N_TERMS; i++) begin
      if (keep_i[i]) sum = sum + ACC_W'($signed(prod_i[i]));
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)    y_o <= '0;
    else if (clr_i) y_o <= '0;
    else if (en_i)  y_o <= sum;
  end

endmodule
