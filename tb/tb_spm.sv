// tb_spm: writes random rows and reads them back through both read ports at once,
// checking the data and the one-cycle read latency.
module tb_spm;
  import phnsw_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [5:0] waddr, ra, rb;
  row_t wdata, da, db;
  row_t model [64];
  int checks = 0, failures = 0;

  spm dut (.clk, .we, .waddr, .wdata, .raddr_a(ra), .rdata_a(da), .raddr_b(rb), .rdata_b(db));

  function automatic row_t rnd_row();
    row_t r;
    for (int i = 0; i < 16; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    we = 0; waddr = '0; ra = '0; rb = '0; wdata = '0;
    @(negedge clk);
    for (int r = 0; r < 64; r++) begin
      we = 1; waddr = 6'(r); wdata = rnd_row(); model[r] = wdata; @(negedge clk);
    end
    we = 0;
    for (int t = 0; t < 500; t++) begin
      int a, b;
      a = $urandom % 64; b = $urandom % 64;
      ra = 6'(a); rb = 6'(b);
      if (t % 3 == 0) begin
        int w;
        w = $urandom % 64;
        we = 1; waddr = 6'(w); wdata = rnd_row();
      end
      @(negedge clk);
      checks++;
      if (da !== model[a] || db !== model[b]) begin failures++; $display("FAIL read t%0d", t); end
      if (we) begin model[waddr] = wdata; we = 0; end
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
