// window_buffer: the 4x4 input data window of the convolution unit.
//
// Sixteen DATA_W-bit registers, filled one word at a time while the controller is in
// GET_DATA. Entry r*4+c holds row r, column c of the window (row-major, the order in
// which the words are fetched from memory). clr_i empties the buffer at the start of a
// convolution so that entries not fetched (a short element count) read as zero; a write
// in the same cycle as clr_i takes effect for its own entry.
//
// The paper says only that the FSM fills "internal buffers" until the 4x4 window is
// complete; the row-major layout and the clear are this design's choices.
//
// Timing: a write on a rising edge is visible on x_o after that edge. All entries are
// read in parallel.
module window_buffer #(
  parameter int unsigned N_X    = 16,
  parameter int unsigned DATA_W = 32
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       clr_i,
  input  logic                       we_i,
  input  logic [$clog2(N_X)-1:0]     waddr_i,
  input  logic [DATA_W-1:0]          wdata_i,
  output logic [N_X-1:0][DATA_W-1:0] x_o
);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      x_o <= '0;
    end else begin
      for (int unsigned i = 0; i < N_X; i++) begin
        if (we_i && waddr_i == $clog2(N_X)'(i)) x_o[i] <= wdata_i;
        else if (clr_i)           x_o[i] <= '0;
      end
    end
  end

endmodule
