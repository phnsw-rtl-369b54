// tb_dma: transfers of random length from random addresses of a behavioural memory
// with random request back-pressure and random response delay; every SPM write
// must carry the right burst to the right row, every request a 64-byte step, and
// done must come once, right after the last write.
module tb_dma;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, done, req_v, req_r, rsp_v, spm_we;
  addr_t addr, req_a;
  logic [5:0] row, spm_waddr;
  logic [6:0] nbeats;
  row_t rsp_d, spm_wdata;
  int checks = 0, failures = 0;

  dma dut (.clk, .rst_n, .start, .addr, .row, .nbeats, .done, .mem_req_valid(req_v),
           .mem_req_ready(req_r), .mem_req_addr(req_a), .mem_rsp_valid(rsp_v),
           .mem_rsp_data(rsp_d), .spm_we, .spm_waddr, .spm_wdata);

  function automatic row_t content(addr_t a);   // memory content is a function of address
    row_t r;
    for (int i = 0; i < 16; i++) r[32*i +: 32] = 32'(a >> 6) * 32'h9E37_79B9 + 32'(i);
    return r;
  endfunction

  addr_t pq[$];
  always @(posedge clk) begin
    req_r <= ($urandom % 3) != 0;
    if (req_v && req_r) pq.push_back(req_a);
    rsp_v <= 1'b0;
    if (pq.size() > 0 && ($urandom % 2)) begin
      rsp_v <= 1'b1;
      rsp_d <= content(pq.pop_front());
    end
  end

  int writes;
  addr_t base;
  logic [5:0] row0;
  always @(negedge clk) if (spm_we) begin
    checks++;
    if (spm_waddr !== 6'(row0 + writes) || spm_wdata !== content(base + addr_t'(writes) * 64)) begin
      failures++; $display("FAIL write %0d row %0d", writes, spm_waddr);
    end
    writes++;
  end

  initial begin
    start = 0; addr = '0; row = '0; nbeats = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int n, cyc;
      n = 1 + $urandom % 32;
      base = {$urandom, $urandom} & 40'hFF_FFFF_FFC0;
      row0 = 6'($urandom % (64 - n + 1));
      writes = 0;
      addr = base; row = row0; nbeats = 7'(n);
      start = 1; @(negedge clk); start = 0; cyc = 0;
      while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (writes != n) begin failures++; $display("FAIL t%0d %0d writes of %0d", t, writes, n); end
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
