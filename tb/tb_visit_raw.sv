// tb_visit_raw: checks the visited bitmap on a 4096-point instance with an 8-entry
// clear log: test-and-set answers against a model set, 1-cycle answers for visited
// points and 2-cycle answers for new ones, clearing by log replay (few points set)
// and by full sweep (log overflow), and the sweep after reset.
module tb_visit_raw;
  import phnsw_pkg::*;
  localparam int NPTS = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tas, visited, done, clear, busy, swept;
  idx_t idx;
  int checks = 0, failures = 0, sweeps = 0;
  bit model [int];

  visit_raw #(.N_POINTS(NPTS), .LOG_DEPTH(8)) dut (.clk, .rst_n, .tas, .idx, .visited, .done,
                                                 .clear, .busy, .swept);
  always @(negedge clk) if (swept) sweeps++;

  task automatic do_tas(int p);
    int lat;
    bit exp;
    exp = model.exists(p);
    idx = p; tas = 1; @(negedge clk); tas = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++;
    if (visited !== exp) begin failures++; $display("FAIL point %0d visited %0b", p, visited); end
    checks++;
    if (lat != (exp ? 1 : 2)) begin failures++; $display("FAIL point %0d latency %0d", p, lat); end
    model[p] = 1;
  endtask

  // A clear replays the log (one cycle per point set) unless more than 8 points
  // were set, in which case the whole bitmap is swept.
  task automatic do_clear();
    int n, s0;
    bit exp_sweep;
    exp_sweep = model.size() > 8;
    s0 = sweeps;
    clear = 1; @(negedge clk); clear = 0; n = 1;
    while (busy) begin @(negedge clk); n++; end
    @(negedge clk);
    checks++;
    if (n > (exp_sweep ? NPTS / 32 + 2 : model.size() + 2)) begin
      failures++; $display("FAIL clear took %0d cycles (%0d set)", n, model.size());
    end
    checks++;
    if ((sweeps - s0) != int'(exp_sweep)) begin failures++; $display("FAIL sweep count"); end
    model.delete();
  endtask

  initial begin
    tas = 0; clear = 0; idx = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++; if (sweeps != 1) begin failures++; $display("FAIL reset sweep"); end
    for (int round = 0; round < 6; round++) begin
      int nset;
      nset = (round % 2) ? 40 : 5;                 // 40 new points overflow the log
      for (int t = 0; t < 3 * nset; t++) do_tas((t < nset) ? $urandom % NPTS : ($urandom % 2 ? $urandom % NPTS : 17));
      do_clear();
      for (int t = 0; t < 6; t++) do_tas($urandom % NPTS);    // bitmap must be clean
      do_clear();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
