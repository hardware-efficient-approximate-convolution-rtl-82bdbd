// prune_mult: MSB-based pruning and multiplication for one output window (STAGE_2).
//
// For each of the N_TERMS (activation, weight) pairs of a window the MSB positions are
// added, s_i = MSB(x_i) + MSB(w_i); this is roughly log2 of the product. A balanced
// binary reduction tree finds s_max over the terms whose operands are both non-zero.
// A term is kept, and only then multiplied, when it is within the threshold T of the
// largest one:
//   SKIP_ON_EQUAL = 0 (default):  s_i + T >= s_max   (the rule of the paper's hardware
//                                                      section, STAGE_2)
//   SKIP_ON_EQUAL = 1:            s_i + T >  s_max   (the paper's Algorithm 1, which drops
//                                                      a term once s_max - s_i >= T)
// The paper states both rules; they differ only when s_max - s_i equals T exactly.
// Terms with a zero operand are never multiplied. Their product is exactly zero, so this
// loses nothing (a choice of this design: the paper does not say how zeros are handled).
//
// Each term has its own multiplier feeding a product register that loads only when the
// term is kept (keep && en_i). Synthesis can turn this enable into a clock gate, so a
// pruned term's multiplier and register do not switch; this models the paper's idea of
// clock-gating idle multipliers without instantiating a gating cell. keep_o is loaded on
// every en_i and tells the accumulator which product registers are valid.
//
// Timing: combinational decision and multiply; results registered on the rising edge
// where en_i is high.
module prune_mult #(
  parameter int unsigned N_TERMS       = 9,
  parameter int unsigned DATA_W        = 32,
  parameter int unsigned MSB_W         = $clog2(DATA_W),
  parameter int unsigned THR_W         = 6,
  parameter bit          SKIP_ON_EQUAL = 1'b0
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic                             en_i,
  input  logic [THR_W-1:0]                 thr_i,
  input  logic [N_TERMS-1:0][DATA_W-1:0]   x_i,
  input  logic [N_TERMS-1:0][DATA_W-1:0]   w_i,
  input  logic [N_TERMS-1:0][MSB_W-1:0]    msb_x_i,
  input  logic [N_TERMS-1:0][MSB_W-1:0]    msb_w_i,
  input  logic [N_TERMS-1:0]               zero_x_i,
  input  logic [N_TERMS-1:0]               zero_w_i,
  output logic [N_TERMS-1:0][2*DATA_W-1:0] prod_o,
  output logic [N_TERMS-1:0]               keep_o
);

  localparam int unsigned SUM_W  = MSB_W + 1;
  localparam int unsigned CMP_W  = (SUM_W > THR_W ? SUM_W : THR_W) + 1;
  localparam int unsigned LEVELS = $clog2(N_TERMS);
  localparam int unsigned LEAVES = 1 << LEVELS;

  logic [N_TERMS-1:0][SUM_W-1:0] sum;
  logic [N_TERMS-1:0]            live;   // both operands non-zero
  logic [N_TERMS-1:0]            keep;
  logic [SUM_W-1:0]              s_max;

  // Tree nodes: level l holds LEAVES >> l entries. Dead terms enter as 0, which can
  // never exceed a live term's sum.
  logic [LEVELS:0][LEAVES-1:0][SUM_W-1:0] node;

  always_comb begin
    for (int unsigned i = 0; i < N_TERMS; i++) begin
      sum[i]  = SUM_W'(msb_x_i[i]) + SUM_W'(msb_w_i[i]);
      live[i] = !zero_x_i[i] && !zero_w_i[i];
    end

    node = '0;
    for (int unsigned i = 0; i < N_TERMS; i++) begin
      node[0][i] = live[i] ? sum[i] : '0;
    end
    for (int unsigned l = 0; l < LEVELS; l++) begin
      for (int unsigned n = 0; n < (LEAVES >> (l + 1)); n++) begin
        node[l+1][n] = (node[l][2*n] > node[l][2*n+1]) ? node[l][2*n] : node[l][2*n+1];
      end
    end
    s_max = node[LEVELS][0];

    for (int unsigned i = 0; i < N_TERMS; i++) begin
      if (SKIP_ON_EQUAL) keep[i] = live[i] && (CMP_W'(sum[i]) + CMP_W'(thr_i) >  CMP_W'(s_max));
      else               keep[i] = live[i] && (CMP_W'(sum[i]) + CMP_W'(thr_i) >= CMP_W'(s_max));
    end
  end

  for (genvar i = 0; i < N_TERMS; i++) begin : g_term
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        prod_o[i] <= '0;
      end else if (en_i && keep[i]) begin
        prod_o[i] <= $signed(x_i[i]) * $signed(w_i[i]);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   keep_o <= '0;
    else if (en_i) keep_o <= keep;
  end

endmodule
