// tb_sram_buf: checks the SRAM buffer's engine and Dispatch Unit ports against
// a reference array: one-cycle read latency, masked engine writes, DU writes,
// two engine read ports and the engine-wins rule on a write collision.
module tb_sram_buf;
  localparam int D = 64, W = 32;
  logic clk = 0;
  logic [1:0][5:0] ra;
  logic [1:0][W-1:0] rd;
  logic we, xen, xwe;
  logic [5:0] wa, xa;
  logic [W-1:0] wd, wm, xwd, xrd;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  sram_buf #(.DEPTH(D), .WIDTH(W), .NRD(2)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic [W-1:0] got, logic [W-1:0] exp_v, string what);
    checks++;
    if (got !== exp_v) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h expected %h", what, got, exp_v);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; xen = 0; xwe = 0; ra = '0; wa = 0; xa = 0; wd = 0; wm = 0; xwd = 0;
    // fill through the DU port
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      xen = 1; xwe = 1; xa = 6'(i); xwd = $urandom; ref_mem[i] = xwd;
    end
    @(negedge clk); xen = 0; xwe = 0;
    // random mixed traffic
    for (int n = 0; n < 2000; n++) begin
      logic [5:0] a0, a1, a2;
      logic [W-1:0] e0, e1, e2;
      @(negedge clk);
      a0 = 6'($urandom); a1 = 6'($urandom); a2 = 6'($urandom);
      ra[0] = a0; ra[1] = a1; xen = 1; xwe = ($urandom % 4 == 0); xa = a2; xwd = $urandom;
      we = ($urandom % 2 == 0); wa = 6'($urandom); wd = $urandom; wm = $urandom;
      if (n % 7 == 0) begin wa = a2; we = 1; xwe = 1; end   // collision
      e0 = ref_mem[a0]; e1 = ref_mem[a1]; e2 = ref_mem[a2];
      if (we && xwe && wa == a2) ref_mem[wa] = (ref_mem[wa] & ~wm) | (wd & wm);
      else begin
        if (xwe) ref_mem[a2] = xwd;
        if (we) ref_mem[wa] = (ref_mem[wa] & ~wm) | (wd & wm);
      end
      @(posedge clk); #1;
      chk(rd[0], e0, "rd0"); chk(rd[1], e1, "rd1"); chk(xrd, e2, "xrd");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
