// tb_dist_h: checks Dist.H against distances computed here with unsigned absolute
// differences (random small, full-range and extreme values) and checks the
// 9-cycle latency per point (8 accumulation steps and the start cycle).
module tb_dist_h;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done;
  elem_t q [D_HIGH];
  elem_t x [D_HIGH];
  dist_t dv;
  int checks = 0, failures = 0;

  dist_h dut (.clk, .rst_n, .start, .q, .x, .dval(dv), .done);

  function automatic dist_t expect_d();
    dist_t s = '0;
    for (int d = 0; d < D_HIGH; d++) begin
      logic [32:0] a, b, ad;
      a = {1'b0, ~q[d][31], q[d][30:0]};
      b = {1'b0, ~x[d][31], x[d][30:0]};
      ad = (a > b) ? a - b : b - a;
      s += DIST_W'(ad) * DIST_W'(ad);
    end
    return s;
  endfunction

  initial begin
    start = 0;
    for (int d = 0; d < D_HIGH; d++) begin q[d] = '0; x[d] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int lat;
      for (int d = 0; d < D_HIGH; d++) begin
        q[d] = (t % 3 == 0) ? elem_t'($urandom % 256) : (t == 1) ? elem_t'(32'h8000_0000) : elem_t'($urandom);
        x[d] = (t % 3 == 0) ? elem_t'($urandom % 256) : (t == 1) ? elem_t'(32'h7FFF_FFFF) : elem_t'($urandom);
      end
      start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++; if (lat != D_HIGH / 16 + 1) begin failures++; $display("FAIL latency %0d", lat); end
      checks++; if (dv !== expect_d()) begin failures++; $display("FAIL t%0d distance", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
