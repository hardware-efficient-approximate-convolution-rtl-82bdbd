// conv_approx_unit: approximate 3x3 convolution accelerator for a RISC-V execution stage.
//
// The unit computes the four outputs of a 3x3 kernel slid over a 4x4 window of signed
// 32-bit values, but multiplies only the products that matter. For every output window
// it sums the MSB positions of each activation/weight pair (a base-2 log estimate of the
// product) and drops every pair whose estimate is more than the threshold T below the
// window's largest. T is in MSB units, so T = 7 keeps roughly every product above 1% of
// the largest one. Dropped products cost no multiplier activity.
//
// Blocks: cx_decoder claims opcode-0x77 instructions; conv_fsm sequences IDLE ->
// GET_DATA -> STAGE_1 -> STAGE_2 -> STAGE_3 -> DONE; mem_fetch reads the window (or the
// kernel) from data memory into window_buffer (or kernel_store, which also keeps each
// weight's MSB); STAGE_1 registers the 16 activation MSBs from 16 msb_encoders; STAGE_2
// runs four prune_mult windows (36 gated multipliers); STAGE_3 four accum adders.
//
// Core interface (the host core itself is not part of this design): the EX stage
// presents instr_valid_i with the instruction word and the values of rs1 and rs2.
// cx_hit_o says the unit claims the instruction. From the next cycle busy_o is high and
// the pipeline must stall. done_o then offers result_o for register rd_o. The core
// writes it back and pulses ack_i, and must drop instr_valid_i in that same cycle.
// Operations (funct3):
//   0 CONV         rs1 = words to fetch (16 for a full window), rs2 = byte address of the
//                  row-major 4x4 window; result = y0. All four outputs are on y_o.
//   1 LOAD_KERNEL  rs1 = words (9), rs2 = address of the row-major 3x3 kernel; result 0
//   2 SET_THR      T <= rs1[5:0]; result = previous T
//   3 READ_OUT     result = y[rs1[1:0]]
// y[2*i+j] is the window whose top-left input is row i, column j. Outputs are the low 32
// bits of the exact 68-bit sum of the kept products. mult_count_o gives the number of
// products multiplied by the last convolution (0..36).
//
// From the paper: window and kernel sizes, 32-bit data with 5-bit MSB positions, opcode
// 0x77 with rs1 = size and rs2 = address, the state sequence, the pruning rule and the
// separate kernel-load instruction. This design's own choices: the funct3 codes, SET_THR
// and READ_OUT, the bus protocol, the reset threshold THR_RESET, skipping zero operands,
// the 32-bit truncation of outputs and mult_count_o.
//
// Timing with a zero-wait memory: a CONV raises done_o 20 cycles after the cycle in which
// it is captured; SET_THR and READ_OUT raise it on the next cycle.
module conv_approx_unit
  import conv_approx_pkg::*;
#(
  parameter logic [THR_W-1:0] THR_RESET     = THR_W'(7),
  parameter bit               SKIP_ON_EQUAL = 1'b0
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  // from the core's decode/EX stage
  input  logic                       instr_valid_i,
  input  logic [31:0]                instr_i,
  input  logic [31:0]                rs1_i,
  input  logic [31:0]                rs2_i,
  output logic                       cx_hit_o,
  output logic                       busy_o,
  // to the write-back path
  output logic                       done_o,
  output logic [31:0]                result_o,
  output logic [4:0]                 rd_o,
  input  logic                       ack_i,
  // data-memory read port
  output logic                       data_req_o,
  output logic [31:0]                data_addr_o,
  input  logic                       data_gnt_i,
  input  logic                       data_rvalid_i,
  input  logic [31:0]                data_rdata_i,
  // status
  output logic [N_Y-1:0][DATA_W-1:0] y_o,
  output logic [THR_W-1:0]           thr_o,
  output logic [5:0]                 mult_count_o
);

  // ---------------------------------------------------------------- decode and control
  cx_op_e      dec_op, op_q;
  logic [4:0]  dec_rd;
  logic        capture, fetch_start, s1_en, s2_en, s3_en;
  logic        fetch_done;

  cx_decoder u_dec (
    .instr_i(instr_i),
    .hit_o  (cx_hit_o),
    .op_o   (dec_op),
    .rd_o   (dec_rd)
  );

  conv_fsm u_fsm (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .start_i      (instr_valid_i && cx_hit_o),
    .op_i         (dec_op),
    .fetch_done_i (fetch_done),
    .ack_i        (ack_i),
    .state_o      (),
    .op_o         (op_q),
    .capture_o    (capture),
    .fetch_start_o(fetch_start),
    .s1_en_o      (s1_en),
    .s2_en_o      (s2_en),
    .s3_en_o      (s3_en),
    .done_o       (done_o),
    .busy_o       (busy_o)
  );

  // ------------------------------------------------ threshold, destination and result
  logic [THR_W-1:0]  thr_q;
  logic [4:0]        rd_q;
  logic [31:0]       result_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      thr_q    <= THR_RESET;
      rd_q     <= '0;
      result_q <= '0;
    end else if (capture) begin
      rd_q <= dec_rd;
      unique case (dec_op)
        CX_SET_THR: begin
          thr_q    <= rs1_i[THR_W-1:0];
          result_q <= 32'(thr_q);
        end
        CX_READ_OUT: result_q <= y_o[rs1_i[1:0]];
        default:     result_q <= '0;
      endcase
    end
  end

  assign rd_o     = rd_q;
  assign thr_o    = thr_q;
  assign result_o = (op_q == CX_CONV) ? y_o[0] : result_q;

  // ------------------------------------------------------------------ fetch and storage
  logic                   f_wr;
  logic [$clog2(N_X)-1:0] f_idx;
  logic [DATA_W-1:0]      f_data;

  mem_fetch #(.MAX_WORDS(N_X), .ADDR_W(32), .DATA_W(DATA_W)) u_fetch (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .start_i      (fetch_start),
    .base_i       (rs2_i),
    .count_i      (rs1_i),
    .data_req_o   (data_req_o),
    .data_addr_o  (data_addr_o),
    .data_gnt_i   (data_gnt_i),
    .data_rvalid_i(data_rvalid_i),
    .data_rdata_i (data_rdata_i),
    .wr_o         (f_wr),
    .widx_o       (f_idx),
    .wdata_o      (f_data),
    .done_o       (fetch_done)
  );

  logic [N_X-1:0][DATA_W-1:0] x;
  logic [N_W-1:0][DATA_W-1:0] w;
  logic [N_W-1:0][MSB_W-1:0]  w_msb;
  logic [N_W-1:0]             w_zero;
  logic                       conv_start;

  assign conv_start = fetch_start && (dec_op == CX_CONV);

  window_buffer #(.N_X(N_X), .DATA_W(DATA_W)) u_win (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .clr_i  (conv_start),
    .we_i   (f_wr && op_q == CX_CONV),
    .waddr_i(f_idx),
    .wdata_i(f_data),
    .x_o    (x)
  );

  kernel_store #(.N_W(N_W), .DATA_W(DATA_W), .MSB_W(MSB_W)) u_kern (
    .clk_i  (clk_i),
    .rst_ni (rst_ni),
    .we_i   (f_wr && op_q == CX_LOAD_KERNEL && 32'(f_idx) < N_W),
    .waddr_i(f_idx[$clog2(N_W)-1:0]),
    .wdata_i(f_data),
    .w_o    (w),
    .msb_o  (w_msb),
    .zero_o (w_zero)
  );

  // ------------------------------------------------------------ STAGE_1: MSB analysis
  logic [N_X-1:0][MSB_W-1:0] x_msb, x_msb_q;
  logic [N_X-1:0]            x_zero, x_zero_q;

  for (genvar k = 0; k < N_X; k++) begin : g_enc
    msb_encoder #(.DATA_W(DATA_W), .MSB_W(MSB_W)) u_enc (
      .value_i(x[k]),
      .msb_o  (x_msb[k]),
      .zero_o (x_zero[k])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      x_msb_q  <= '0;
      x_zero_q <= '1;
    end else if (s1_en) begin
      x_msb_q  <= x_msb;
      x_zero_q <= x_zero;
    end
  end

  // ------------------------------------- STAGE_2 and STAGE_3: one lane per output window
  logic [N_Y-1:0][N_W-1:0]        keep;
  logic [N_Y-1:0][N_W-1:0][PROD_W-1:0] prod;
  logic [N_Y-1:0][ACC_W-1:0]      y_full;

  for (genvar i = 0; i < OUT_DIM; i++) begin : g_row
    for (genvar j = 0; j < OUT_DIM; j++) begin : g_col
      localparam int unsigned Y = i * OUT_DIM + j;
      logic [N_W-1:0][DATA_W-1:0] wx;
      logic [N_W-1:0][MSB_W-1:0]  wx_msb;
      logic [N_W-1:0]             wx_zero;

      // Gather the 3x3 activations under kernel position (r, s).
      for (genvar r = 0; r < K_DIM; r++) begin : g_r
        for (genvar s = 0; s < K_DIM; s++) begin : g_s
          assign wx[r*K_DIM+s]      = x[(i+r)*IN_DIM + (j+s)];
          assign wx_msb[r*K_DIM+s]  = x_msb_q[(i+r)*IN_DIM + (j+s)];
          assign wx_zero[r*K_DIM+s] = x_zero_q[(i+r)*IN_DIM + (j+s)];
        end
      end

      prune_mult #(
        .N_TERMS(N_W), .DATA_W(DATA_W), .MSB_W(MSB_W), .THR_W(THR_W),
        .SKIP_ON_EQUAL(SKIP_ON_EQUAL)
      ) u_pm (
        .clk_i   (clk_i),
        .rst_ni  (rst_ni),
        .en_i    (s2_en),
        .thr_i   (thr_q),
        .x_i     (wx),
        .w_i     (w),
        .msb_x_i (wx_msb),
        .msb_w_i (w_msb),
        .zero_x_i(wx_zero),
        .zero_w_i(w_zero),
        .prod_o  (prod[Y]),
        .keep_o  (keep[Y])
      );

      accum #(.N_TERMS(N_W), .PROD_W(PROD_W), .ACC_W(ACC_W)) u_acc (
        .clk_i (clk_i),
        .rst_ni(rst_ni),
        .clr_i (conv_start),
        .en_i  (s3_en),
        .prod_i(prod[Y]),
        .keep_i(keep[Y]),
        .y_o   (y_full[Y])
      );

      assign y_o[Y] = y_full[Y][DATA_W-1:0];
    end
  end

  // ------------------------------------------------ multiplications of the last CONV
  logic [5:0] n_kept;

  always_comb begin
    n_kept = '0;
    for (int unsigned y = 0; y < N_Y; y++) begin
      for (int unsigned t = 0; t < N_W; t++) n_kept = n_kept + 6'(keep[y][t]);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)     mult_count_o <= '0;
    else if (s3_en)  mult_count_o <= n_kept;
  end

  // The core holds the instruction until it acknowledges the result.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   busy_o && !done_o |-> instr_valid_i)
    else $error("conv_approx_unit: instruction withdrawn while the unit is busy");

endmodule
