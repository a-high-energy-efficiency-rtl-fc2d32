// tb_bp_array: loads random rotated weights, streams random gradient vectors
// with zero lanes and random fire' masks, and compares each live row with a
// reference (products, then a pairwise add tree, all rounded independently).
// Rows whose fire' is zero must keep their previous value and be reported
// not live.
module tb_bp_array;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wload, in_valid, out_valid;
  logic [3:0] wrow;
  vec_t wdata, du, psum, last;
  spk_t fire_mask, out_mask;
  fp16_t wref [16][16];
  int checks = 0, failures = 0;

  bp_array dut (.*);
  always #5 clk = ~clk;

  function automatic fp16_t radd(fp16_t a, fp16_t b);
    return to_fp16(to_real(a) + to_real(b));
  endfunction

  function automatic fp16_t row_ref(int c, vec_t d);
    fp16_t v [16];
    for (int m = 0; m < 16; m++) v[m] = (d[m][14:10] == 0) ? 16'h0 : to_fp16(to_real(d[m]) * to_real(wref[c][m]));
    for (int w = 8; w >= 1; w = w / 2)
      for (int k = 0; k < w; k++) v[k] = radd(v[2*k], v[2*k+1]);
    return v[0];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wload = 0; in_valid = 0; du = '0; fire_mask = '0; wrow = 0; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int c = 0; c < 16; c++) begin
        @(negedge clk);
        wload = 1; wrow = 4'(c);
        for (int m = 0; m < 16; m++) begin wref[c][m] = rnd_fp16(10, 18); wdata[m] = wref[c][m]; end
      end
      @(negedge clk); wload = 0;
      for (int n = 0; n < 150; n++) begin
        vec_t d; spk_t fm;
        for (int m = 0; m < 16; m++) d[m] = ($urandom % 3 == 0) ? 16'h0 : rnd_fp16(10, 18);
        fm = 16'($urandom);
        last = psum;
        @(negedge clk); in_valid = 1; du = d; fire_mask = fm;
        @(negedge clk); in_valid = 0;
        checks++;
        if (!out_valid || out_mask != fm) begin failures++; $display("FAIL valid/mask"); end
        for (int c = 0; c < 16; c++) begin
          fp16_t e;
          e = fm[c] ? row_ref(c, d) : last[c];
          checks++;
          if (psum[c] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d got %h exp %h", c, psum[c], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
