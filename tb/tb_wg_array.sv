// tb_wg_array: clears the array, feeds random gradient vectors with random
// sparse spike vectors and compares all 256 accumulators with a reference
// that adds du[m] into PE(m,c) only when s[c] is 1. Repeats after a clear.
module tb_wg_array;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  logic clear, in_valid;
  vec_t du;
  spk_t s;
  vec_t acc [NL];
  fp16_t r [16][16];
  int checks = 0, failures = 0;

  wg_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; in_valid = 0; du = '0; s = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++) r[m][c] = 16'h0;
      for (int n = 0; n < 60; n++) begin
        @(negedge clk);
        in_valid = 1;
        s = 16'($urandom) & 16'($urandom);
        for (int m = 0; m < 16; m++) du[m] = rnd_fp16(10, 16);
        for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++)
          if (s[c]) r[m][c] = to_fp16(to_real(r[m][c]) + to_real(du[m]));
      end
      @(negedge clk); in_valid = 0;
      for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++) begin
        checks++;
        if (acc[m][c] !== r[m][c]) begin
          failures++;
          if (failures < 10) $display("FAIL pe %0d,%0d got %h exp %h", m, c, acc[m][c], r[m][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
