// tb_dist_l: checks Dist.L against distances computed here with unsigned
// absolute differences, for random small values, full-range 32-bit values and
// extremes, and checks that the result arrives 16 cycles after start.
module tb_dist_l;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done;
  elem_t q [D_LOW];
  elem_t pts [N_SORT][D_LOW];
  dist_t dv [N_SORT];
  int checks = 0, failures = 0;

  dist_l dut (.clk, .rst_n, .start, .q, .pts, .dval(dv), .done);

  function automatic dist_t expect_d(int i);
    dist_t s = '0;
    for (int d = 0; d < D_LOW; d++) begin
      logic [32:0] a, b, ad;
      a = {~q[d][31], q[d][30:0]} ;          // offset-binary keeps the order
      b = {~pts[i][d][31], pts[i][d][30:0]};
      a = {1'b0, a[31:0]}; b = {1'b0, b[31:0]};
      ad = (a > b) ? a - b : b - a;
      s += DIST_W'(ad) * DIST_W'(ad);
    end
    return s;
  endfunction

  initial begin
    start = 0;
    for (int d = 0; d < D_LOW; d++) q[d] = '0;
    for (int i = 0; i < N_SORT; i++) for (int d = 0; d < D_LOW; d++) pts[i][d] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int lat;
      for (int d = 0; d < D_LOW; d++)
        q[d] = (t % 3 == 0) ? elem_t'($urandom % 256) : (t == 1) ? elem_t'(32'h8000_0000) : elem_t'($urandom);
      for (int i = 0; i < N_SORT; i++) for (int d = 0; d < D_LOW; d++)
        pts[i][d] = (t % 3 == 0) ? elem_t'($urandom % 256) : (t == 1) ? elem_t'(32'h7FFF_FFFF) : elem_t'($urandom);
      start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++; if (lat != D_LOW + 1) begin failures++; $display("FAIL latency %0d", lat); end
      for (int i = 0; i < N_SORT; i++) begin
        checks++;
        if (dv[i] !== expect_d(i)) begin failures++; $display("FAIL t%0d lane %0d", t, i); end
      end
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
