// tb_final_list: fills and drains the final list with random entries and compares
// it with a queue model: count, furthest distance, the set of entries, and that a
// removal frees exactly the furthest entry with rm_done 10 cycles after rm_start.
module tb_final_list;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, ins, rm_start, rm_done;
  idx_t ins_idx;
  dist_t ins_dist, max_dist;
  logic [4:0] count;
  idx_t  e_idx [16];
  dist_t e_dist[16];
  logic [15:0] e_valid;
  int checks = 0, failures = 0;

  final_list dut (.clk, .rst_n, .clear, .ins, .ins_idx, .ins_dist, .rm_start, .rm_done,
                  .max_dist, .count, .e_idx, .e_dist, .e_valid);

  idx_t  mi[$];                             // model: indices
  dist_t md[$];                             // model: distances

  task automatic compare(int t);
    dist_t mx = '0;
    int hits = 0;
    foreach (md[i]) if (md[i] > mx) mx = md[i];
    checks++;
    if (int'(count) != md.size() || max_dist != mx) begin
      failures++; $display("FAIL t%0d count %0d/%0d max", t, count, md.size());
    end
    foreach (md[i])
      for (int s = 0; s < 16; s++) if (e_valid[s] && e_idx[s] == mi[i] && e_dist[s] == md[i]) hits++;
    checks++;
    if (hits != md.size()) begin failures++; $display("FAIL t%0d contents", t); end
  endtask

  initial begin
    clear = 0; ins = 0; rm_start = 0; ins_idx = '0; ins_dist = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int op;
      op = $urandom % 10;
      if (op == 0) begin
        clear = 1; begin mi = {}; md = {}; end @(negedge clk); clear = 0;
      end else if (op < 6 && md.size() < 16) begin
        ins = 1; ins_idx = $urandom; ins_dist = dist_t'($urandom);
        begin mi.push_back(ins_idx); md.push_back(ins_dist); end
        @(negedge clk); ins = 0;
      end else if (md.size() > 0) begin
        int b, lat; b = 0;
        for (int i = 1; i < md.size(); i++) if (md[i] > md[b]) b = i;
        begin mi.delete(b); md.delete(b); end
        rm_start = 1; @(negedge clk); rm_start = 0; lat = 1;
        while (!rm_done) begin @(negedge clk); lat++; end
        checks++; if (lat != 10) begin failures++; $display("FAIL rm latency %0d", lat); end
      end
      compare(t);
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
