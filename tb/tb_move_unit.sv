// tb_move_unit: moves of random length between random rows, from a behavioural
// synchronous-read SPM; every register-file write must carry the right row to the
// right place, and done must be high with the last write, nrows+1 cycles after start.
module tb_move_unit;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, rf_we;
  logic [5:0] src, raddr;
  logic [4:0] dst, rf_row;
  logic [6:0] nrows;
  row_t rdata, rf_data;
  row_t mem [64];
  int checks = 0, failures = 0;

  move_unit dut (.clk, .rst_n, .start, .src_row(src), .dst_row(dst), .nrows, .done,
                 .spm_raddr(raddr), .spm_rdata(rdata), .rf_we, .rf_row, .rf_data);

  always @(posedge clk) rdata <= mem[raddr];

  int writes;
  always @(negedge clk) if (rf_we) begin
    checks++;
    if (rf_row !== 5'(dst + writes) || rf_data !== mem[src + writes]) begin
      failures++; $display("FAIL write %0d", writes);
    end
    writes++;
  end

  initial begin
    start = 0; src = '0; dst = '0; nrows = 7'd1;
    for (int r = 0; r < 64; r++) for (int i = 0; i < 16; i++) mem[r][32*i +: 32] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int n, lat;
      n = 1 + $urandom % 24;
      src = 6'($urandom % (64 - n + 1));
      dst = 5'($urandom % (24 - n + 1));
      nrows = 7'(n); writes = 0;
      start = 1; @(negedge clk); start = 0; lat = 1;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != n + 1) begin failures++; $display("FAIL t%0d latency %0d n %0d", t, lat, n); end
      @(negedge clk);
      checks++;
      if (writes != n) begin failures++; $display("FAIL t%0d writes %0d of %0d", t, writes, n); end
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
