// tb_regfile: writes random rows through both ports (port B wins on a clash) and
// the query word by word, then checks every output view: query vectors, neighbour
// indices (row 0), the 16 x 15 neighbour vectors (words 16.. in point order) and
// the 128-dim vector (rows 16..23).
module tb_regfile;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we_a, we_b, q_we, q_hi;
  logic [4:0] row_a, row_b;
  row_t data_a, data_b;
  logic [6:0] q_addr;
  elem_t q_data;
  elem_t q_high [D_HIGH];
  elem_t q_low  [D_LOW];
  idx_t  lo_idx [N_SORT];
  elem_t lo_pts [N_SORT][D_LOW];
  elem_t hi_vec [D_HIGH];
  logic [31:0] words [24*16];
  int qhm [D_HIGH];
  int qlm [D_LOW];
  int checks = 0, failures = 0;

  regfile dut (.clk, .rst_n, .we_a, .row_a, .data_a, .we_b, .row_b, .data_b, .q_we, .q_hi,
               .q_addr, .q_data, .q_high, .q_low, .lo_idx, .lo_pts, .hi_vec);

  function automatic row_t rnd_row();
    row_t r;
    for (int i = 0; i < 16; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    we_a = 0; we_b = 0; q_we = 0; q_hi = 0; row_a = '0; row_b = '0; data_a = '0; data_b = '0;
    q_addr = '0; q_data = '0;
    for (int w = 0; w < 24 * 16; w++) words[w] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int t = 0; t < 40; t++) begin
        we_a = $urandom % 2; we_b = $urandom % 2;
        row_a = 5'($urandom % 24); row_b = (t % 7 == 0) ? row_a : 5'($urandom % 24);
        data_a = rnd_row(); data_b = rnd_row();
        @(negedge clk);
        if (we_a) for (int i = 0; i < 16; i++) words[16*row_a + i] = data_a[32*i +: 32];
        if (we_b) for (int i = 0; i < 16; i++) words[16*row_b + i] = data_b[32*i +: 32];
      end
      we_a = 0; we_b = 0;
      for (int d = 0; d < D_HIGH; d++) begin
        q_we = 1; q_hi = 1; q_addr = 7'(d); q_data = $urandom; qhm[d] = q_data; @(negedge clk);
      end
      for (int d = 0; d < D_LOW; d++) begin
        q_we = 1; q_hi = 0; q_addr = 7'(d); q_data = $urandom; qlm[d] = q_data; @(negedge clk);
      end
      q_we = 0;
      for (int d = 0; d < D_HIGH; d++) begin
        checks++; if (q_high[d] !== qhm[d]) begin failures++; $display("FAIL q_high %0d", d); end
        checks++; if (hi_vec[d] !== words[256 + d]) begin failures++; $display("FAIL hi_vec %0d", d); end
      end
      for (int d = 0; d < D_LOW; d++) begin
        checks++; if (q_low[d] !== qlm[d]) begin failures++; $display("FAIL q_low %0d", d); end
      end
      for (int i = 0; i < N_SORT; i++) begin
        checks++; if (lo_idx[i] !== words[i]) begin failures++; $display("FAIL lo_idx %0d", i); end
        for (int d = 0; d < D_LOW; d++) begin
          checks++;
          if (lo_pts[i][d] !== words[16 + 15*i + d]) begin failures++; $display("FAIL lo_pts %0d %0d", i, d); end
        end
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
