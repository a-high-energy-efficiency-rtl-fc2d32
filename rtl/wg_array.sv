// wg_array: the WG engine's 16x16 output-stationary accumulator array.
//
// PE(m,c) keeps the running weight gradient of output channel m and input
// channel c. The 16 gradients du[m] are broadcast along the rows and the 16
// spikes s[c] along the columns; a column whose spike is 0 is gated (gating1)
// and its accumulators hold, otherwise each PE adds du[m]. The products of a
// spike and a gradient are therefore never multiplied, only selected. The
// accumulators stay in the PEs over all time steps and output positions of
// one kernel offset (output stationary) and are read out in parallel, the
// concat of all 256 results.
// Interface: clear zeroes every accumulator; in_valid/du/s add one input per
// cycle (the engine does not even read du when all spikes are zero, gating2).
// acc[m] is row m, 16 FP16 values ordered by c, valid the cycle after the last
// input.
module wg_array
  import snn_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clear,
  input  logic      in_valid,
  input  vec_t      du,
  input  spk_t      s,
  output vec_t      acc [NL]
);

  for (genvar m = 0; m < NL; m++) begin : g_row
    for (genvar c = 0; c < NL; c++) begin : g_pe
      fp16_t sum;
      fp16_add u_add (.a(acc[m][c]), .b(du[m]), .y(sum));
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)                   acc[m][c] <= 16'h0000;
        else if (clear)               acc[m][c] <= 16'h0000;
        else if (in_valid && s[c])    acc[m][c] <= sum;
      end
    end
  end

endmodule
