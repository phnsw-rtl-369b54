// tb_rmf: checks the RMF scanner: the slot of the largest occupied distance
// (lowest slot on ties), `found` for empty lists, and the 8-cycle scan
// (done 9 cycles after start, counting the start cycle).
module tb_rmf;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, found, done;
  dist_t dv [16];
  logic [15:0] valid;
  logic [3:0] slot;
  int checks = 0, failures = 0;

  rmf dut (.clk, .rst_n, .start, .dval(dv), .valid, .slot, .found, .done);

  initial begin
    start = 0; valid = '0;
    for (int i = 0; i < 16; i++) dv[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int best, lat;
      for (int i = 0; i < 16; i++) dv[i] = (t % 2) ? dist_t'($urandom % 8) : {$urandom, $urandom, $urandom};
      valid = (t % 10 == 0) ? '0 : 16'($urandom);
      best = -1;
      for (int i = 0; i < 16; i++) if (valid[i] && (best < 0 || dv[i] > dv[best])) best = i;
      start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++; if (lat != 9) begin failures++; $display("FAIL latency %0d", lat); end
      checks++; if (found !== (best >= 0)) begin failures++; $display("FAIL found t%0d", t); end
      if (best >= 0) begin
        checks++;
        if (int'(slot) != best) begin failures++; $display("FAIL t%0d slot %0d vs %0d", t, slot, best); end
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
