// tb_ksort_l: checks kSort.L. First the five-element example of the published
// sorting scheme (4 2 5 8 6 -> 2 4 5 6 8), then random batches with ties, invalid
// slots, a distance threshold and random k, against a reference that filters,
// stably sorts by (distance, slot) and cuts to k; then merges of two batches
// (distinct distances) against the top-k of their union. Latency must be 7 cycles
// for a sort and 14 for a merge.
module tb_ksort_l;
  import phnsw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, merge, done;
  dist_t din [N_SORT];
  idx_t  iin [N_SORT];
  logic [N_SORT-1:0] vin;
  dist_t thr;
  logic [4:0] k, cnt;
  dist_t od [N_SORT];
  idx_t  oi [N_SORT];
  int checks = 0, failures = 0;

  ksort_l dut (.clk, .rst_n, .start, .merge, .dist_in(din), .idx_in(iin), .valid_in(vin),
               .thr, .k, .out_dist(od), .out_idx(oi), .out_cnt(cnt), .done);

  typedef struct { dist_t d; idx_t i; } e_t;
  e_t prev[$];

  task automatic run(bit mg, int exp_lat, e_t exp[$]);
    int lat;
    merge = mg; start = 1; @(negedge clk); start = 0; merge = 0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    checks++; if (lat != exp_lat) begin failures++; $display("FAIL latency %0d vs %0d", lat, exp_lat); end
    checks++; if (int'(cnt) != exp.size()) begin failures++; $display("FAIL cnt %0d vs %0d", cnt, exp.size()); end
    foreach (exp[p]) begin
      checks++;
      if (od[p] != exp[p].d || oi[p] != exp[p].i) begin
        failures++; $display("FAIL pos %0d: %0d/%0d vs %0d/%0d", p, od[p], oi[p], exp[p].d, exp[p].i);
      end
    end
  endtask

  // Filter by valid and threshold, stable sort by distance, keep k.
  function automatic void ref_sort(ref e_t q[$], input e_t extra[$]);
    e_t l[$];
    l = extra;
    for (int i = 0; i < N_SORT; i++)
      if (vin[i] && din[i] < thr) l.push_back('{din[i], iin[i]});
    for (int a = 1; a < l.size(); a++)          // insertion sort, stable
      for (int b = a; b > 0 && l[b].d < l[b-1].d; b--) begin e_t t = l[b]; l[b] = l[b-1]; l[b-1] = t; end
    while (l.size() > int'(k)) void'(l.pop_back());
    q = l;
  endfunction

  initial begin
    e_t exp[$];
    start = 0; merge = 0; thr = DIST_MAX; k = 5'd16; vin = '0;
    for (int i = 0; i < N_SORT; i++) begin din[i] = '0; iin[i] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // Published example: 4 2 5 8 6
    din[0] = 4; din[1] = 2; din[2] = 5; din[3] = 8; din[4] = 6;
    for (int i = 0; i < N_SORT; i++) iin[i] = 100 + i;
    vin = 16'h001F; k = 5;
    exp = '{'{2, 101}, '{4, 100}, '{5, 102}, '{6, 104}, '{8, 103}};
    run(0, 7, exp);
    // Random single batches
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N_SORT; i++) begin
        din[i] = (t % 2) ? dist_t'($urandom % 8) : {$urandom, $urandom, $urandom};
        iin[i] = $urandom;
        vin[i] = ($urandom % 5) != 0;
      end
      thr = (t % 4 == 0) ? dist_t'($urandom % 8) : DIST_MAX;
      k   = 5'(1 + $urandom % 16);
      ref_sort(exp, '{});
      run(0, 7, exp);
    end
    // Merges: A = previous result, then batch B
    for (int t = 0; t < 100; t++) begin
      e_t a[$];
      for (int i = 0; i < N_SORT; i++) begin
        din[i] = dist_t'(1000 * ($urandom % 100000) + 2 * i);   // distinct
        iin[i] = $urandom; vin[i] = ($urandom % 6) != 0;
      end
      thr = (t % 3 == 0) ? dist_t'(50_000_000) : DIST_MAX;
      k   = 5'(1 + $urandom % 16);
      ref_sort(a, '{});
      run(0, 7, a);
      for (int i = 0; i < N_SORT; i++) begin
        din[i] = dist_t'(1000 * ($urandom % 100000) + 2 * i + 1);
        iin[i] = $urandom; vin[i] = ($urandom % 6) != 0;
      end
      ref_sort(exp, a);
      run(1, 14, exp);
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
