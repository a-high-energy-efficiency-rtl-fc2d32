// fp_array: the FP engine's 16x16 selector-and-adder array.
//
// Row m holds the 16 stationary FP16 weights w[m][c] of one output channel;
// column c is driven by the 1-bit input spike of input channel c. Because a
// spike is 0 or 1, the multiply of a convolution becomes a selection: each row
// adds only the weights whose spike is 1. As in the sparse FP engine design,
// the first stage pairs neighbouring columns: an adder forms w[2k]+w[2k+1] and
// a selector driven by the two spikes picks 0, w[2k], w[2k+1] or the sum; an
// add tree of three levels reduces the eight picks to the row's partial sum.
// An all-zero check on the spike vector (gating2) leaves the output register
// untouched and flags the vector as skipped, so the engine also skips the
// partial-sum update.
// Interface: wload/wrow/wdata write one row of weights (weight stationary:
// rows stay until reloaded). in_valid/s present one spike vector per cycle;
// out_valid/out_skip/psum follow one cycle later. The register after the tree
// is this design's own pipeline choice.
module fp_array
  import snn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wload,
  input  logic [3:0] wrow,
  input  vec_t       wdata,
  input  logic       in_valid,
  input  spk_t       s,
  output logic       out_valid,
  output logic       out_skip,
  output vec_t       psum
);

  vec_t w [NL];          // w[m][c]
  vec_t row_sum;

  always_ff @(posedge clk) begin
    if (wload) w[wrow] <= wdata;
  end

  for (genvar m = 0; m < NL; m++) begin : g_row
    fp16_t pair [NL/2];
    fp16_t pick [NL/2];
    fp16_t l1 [4];
    fp16_t l2 [2];
    fp16_t l3;
    for (genvar k = 0; k < NL/2; k++) begin : g_pair
      fp16_add u_pair (.a(w[m][2*k]), .b(w[m][2*k+1]), .y(pair[k]));
      always_comb begin
        unique case ({s[2*k+1], s[2*k]})
          2'b00:   pick[k] = 16'h0000;
          2'b01:   pick[k] = w[m][2*k];
          2'b10:   pick[k] = w[m][2*k+1];
          default: pick[k] = pair[k];
        endcase
      end
    end
    for (genvar k = 0; k < 4; k++) begin : g_l1
      fp16_add u_l1 (.a(pick[2*k]), .b(pick[2*k+1]), .y(l1[k]));
    end
    fp16_add u_l2a (.a(l1[0]), .b(l1[1]), .y(l2[0]));
    fp16_add u_l2b (.a(l1[2]), .b(l1[3]), .y(l2[1]));
    fp16_add u_l3  (.a(l2[0]), .b(l2[1]), .y(l3));
    assign row_sum[m] = l3;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_skip  <= 1'b0;
      psum      <= '0;
    end else begin
      out_valid <= in_valid;
      out_skip  <= in_valid && (s == '0);
      if (in_valid && (s != '0)) psum <= row_sum;
    end
  end

endmodule
