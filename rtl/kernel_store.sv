// kernel_store: the 3x3 kernel held inside the convolution unit.
//
// Nine DATA_W-bit weight registers written one at a time by the kernel-load operation.
// As each weight is written, its magnitude MSB position and zero flag are computed by an
// msb_encoder and stored next to it, so a convolution never has to recompute them. This
// follows the paper, which says the kernel elements are stored in the unit "and each of
// their MSB locations are also computed and stored". Reset clears everything (weight 0,
// zero flag set), a choice of this design.
//
// Timing: one write per cycle; the weight, MSB and zero flag appear on the outputs after
// the clock edge of the write.
module kernel_store #(
  parameter int unsigned N_W    = 9,
  parameter int unsigned DATA_W = 32,
  parameter int unsigned MSB_W  = $clog2(DATA_W)
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       we_i,
  input  logic [$clog2(N_W)-1:0]     waddr_i,
  input  logic [DATA_W-1:0]          wdata_i,
  output logic [N_W-1:0][DATA_W-1:0] w_o,
  output logic [N_W-1:0][MSB_W-1:0]  msb_o,
  output logic [N_W-1:0]             zero_o
);

  logic [MSB_W-1:0] wmsb;
  logic             wzero;

  msb_encoder #(.DATA_W(DATA_W), .MSB_W(MSB_W)) u_enc (
    .value_i(wdata_i),
    .msb_o  (wmsb),
    .zero_o (wzero)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_o    <= '0;
      msb_o  <= '0;
      zero_o <= '1;
    end else if (we_i) begin
      for (int unsigned i = 0; i < N_W; i++) begin
        if (waddr_i == $clog2(N_W)'(i)) begin
          w_o[i]    <= wdata_i;
          msb_o[i]  <= wmsb;
          zero_o[i] <= wzero;
        end
      end
    end
  end

endmodule
