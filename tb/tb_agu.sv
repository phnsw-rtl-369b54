// tb_agu: random point indices, layers and table bases; the address must be
// raw_base + idx*512 for a 128-dim vector and layer_base[l] + idx*m*64 for a
// neighbour-list entry (m = 32 in layer 0, 16 above), one cycle after the request.
module tb_agu;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req, hi, ack;
  idx_t idx;
  logic [2:0] layer;
  addr_t layer_base [N_LAYERS];
  addr_t raw_base, addr;
  int checks = 0, failures = 0;

  agu dut (.clk, .rst_n, .req, .hi, .idx, .layer, .layer_base, .raw_base, .addr, .ack);

  initial begin
    req = 0; hi = 0; idx = '0; layer = '0; raw_base = '0;
    for (int l = 0; l < N_LAYERS; l++) layer_base[l] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      longint exp;
      for (int l = 0; l < N_LAYERS; l++) layer_base[l] = {$urandom, $urandom} & 40'hFF_FFFF_FFC0;
      raw_base = {$urandom, $urandom} & 40'hFF_FFFF_FFC0;
      idx = $urandom % (1 << 20);
      layer = 3'($urandom % N_LAYERS);
      hi = $urandom % 2;
      exp = hi ? longint'(raw_base) + longint'(idx) * 512
               : longint'(layer_base[layer]) + longint'(idx) * ((layer == 0) ? 32 : 16) * 64;
      req = 1; @(negedge clk); req = 0;
      checks++;
      if (!ack || addr !== addr_t'(exp)) begin failures++; $display("FAIL t%0d addr %h vs %h", t, addr, addr_t'(exp)); end
      @(negedge clk);
      checks++;
      if (ack) begin failures++; $display("FAIL ack held"); end
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
