// tb_fp_array: loads random stationary weights, streams random sparse spike
// vectors (including all-zero ones) and compares each row sum with a reference
// that adds the selected weights in the array's pair-then-tree order with
// independent FP16 rounding. Checks the one-cycle latency and the skip flag.
module tb_fp_array;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wload, in_valid, out_valid, out_skip;
  logic [3:0] wrow;
  vec_t wdata, psum;
  spk_t s;
  fp16_t wref [16][16];
  int checks = 0, failures = 0;

  fp_array dut (.*);
  always #5 clk = ~clk;

  function automatic fp16_t radd(fp16_t a, fp16_t b);
    return to_fp16(to_real(a) + to_real(b));
  endfunction

  function automatic fp16_t row_ref(int m, spk_t sv);
    fp16_t p [8];
    fp16_t l1 [4];
    for (int k = 0; k < 8; k++) begin
      fp16_t a, b;
      a = sv[2*k] ? wref[m][2*k] : 16'h0;
      b = sv[2*k+1] ? wref[m][2*k+1] : 16'h0;
      p[k] = radd(a, b);
    end
    for (int k = 0; k < 4; k++) l1[k] = radd(p[2*k], p[2*k+1]);
    return radd(radd(l1[0], l1[1]), radd(l1[2], l1[3]));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wload = 0; in_valid = 0; s = '0; wrow = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int m = 0; m < 16; m++) begin
        @(negedge clk);
        wload = 1; wrow = 4'(m);
        for (int c = 0; c < 16; c++) begin wref[m][c] = rnd_fp16(10, 18); wdata[c] = wref[m][c]; end
      end
      @(negedge clk); wload = 0;
      for (int n = 0; n < 200; n++) begin
        spk_t sv;
        sv = 16'($urandom) & 16'($urandom);          // ~75% sparse
        if (n % 10 == 0) sv = '0;
        @(negedge clk); in_valid = 1; s = sv;
        @(negedge clk); in_valid = 0;
        checks++;
        if (!out_valid || out_skip != (sv == 0)) begin
          failures++; $display("FAIL valid/skip %b %b", out_valid, out_skip);
        end
        if (sv != 0)
          for (int m = 0; m < 16; m++) begin
            checks++;
            if (psum[m] !== row_ref(m, sv)) begin
              failures++;
              if (failures < 10) $display("FAIL row %0d s=%h got %h exp %h", m, sv, psum[m], row_ref(m, sv));
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
