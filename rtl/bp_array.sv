// bp_array: the BP engine's 16x16 FP16 multiply-accumulate array.
//
// Row c holds 16 stationary kernel-rotated weights w'[c][m]; the 16
// membrane-potential gradients du[m] of the next layer are broadcast down the
// columns. Row c multiplies each du[m] by its weight, and an add tree of four
// levels sums the 16 products into one partial sum for input channel c.
// Sparse control follows the BP engine's gating scheme: fire_mask[c] (the
// surrogate derivative fire' of that output position is non-zero, gating1)
// enables the whole row; a zero check on each du[m] (gating2) is ANDed with
// it, and a gated multiplier's selector outputs 0 instead of the product.
// A row whose fire' is zero keeps its old output and is reported in out_mask
// as not live, so the engine does not update that lane of Conv_BP.
// Interface: wload/wrow/wdata load one row; in_valid/du/fire_mask present one
// vector per cycle; out_valid/out_mask/psum follow one cycle later (the
// register after the tree is this design's own pipeline choice).
module bp_array
  import snn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wload,
  input  logic [3:0] wrow,
  input  vec_t       wdata,
  input  logic       in_valid,
  input  vec_t       du,
  input  spk_t       fire_mask,
  output logic       out_valid,
  output spk_t       out_mask,
  output vec_t       psum
);

  vec_t w [NL];          // w'[c][m]
  vec_t row_sum;
  spk_t du_nz;

  always_ff @(posedge clk) begin
    if (wload) w[wrow] <= wdata;
  end

  always_comb
    for (int m = 0; m < NL; m++) du_nz[m] = !fp16_zero(du[m]);

  for (genvar c = 0; c < NL; c++) begin : g_row
    fp16_t prod [NL];
    fp16_t sel  [NL];
    fp16_t l1 [8];
    fp16_t l2 [4];
    fp16_t l3 [2];
    fp16_t l4;
    for (genvar m = 0; m < NL; m++) begin : g_mul
      fp16_mul u_mul (.a(du[m]), .b(w[c][m]), .y(prod[m]));
      assign sel[m] = (fire_mask[c] && du_nz[m]) ? prod[m] : 16'h0000;
    end
    for (genvar k = 0; k < 8; k++) begin : g_l1
      fp16_add u_a (.a(sel[2*k]), .b(sel[2*k+1]), .y(l1[k]));
    end
    for (genvar k = 0; k < 4; k++) begin : g_l2
      fp16_add u_a (.a(l1[2*k]), .b(l1[2*k+1]), .y(l2[k]));
    end
    for (genvar k = 0; k < 2; k++) begin : g_l3
      fp16_add u_a (.a(l2[2*k]), .b(l2[2*k+1]), .y(l3[k]));
    end
    fp16_add u_l4 (.a(l3[0]), .b(l3[1]), .y(l4));
    assign row_sum[c] = l4;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_mask  <= '0;
      psum      <= '0;
    end else begin
      out_valid <= in_valid;
      out_mask  <= in_valid ? fire_mask : '0;
      for (int c = 0; c < NL; c++)
        if (in_valid && fire_mask[c]) psum[c] <= row_sum[c];
    end
  end

endmodule
