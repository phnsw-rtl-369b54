// tb_cand_list: random inserts, pops and clears on an 8-entry candidate list,
// compared with a queue model: the nearest entry, emptiness and count after every
// operation, and the overflow policy (replace the furthest entry if nearer).
module tb_cand_list;
  import phnsw_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, ins, pop, empty;
  idx_t ins_idx, min_idx;
  dist_t ins_dist, min_dist;
  logic [3:0] count;
  logic [31:0] ovf;
  int checks = 0, failures = 0, n_ovf = 0;

  cand_list #(.N(N)) dut (.clk, .rst_n, .clear, .ins, .ins_idx, .ins_dist, .pop,
                          .min_idx, .min_dist, .empty, .count, .overflows(ovf));

  idx_t  mi[$];                             // model: indices
  dist_t md[$];                             // model: distances

  initial begin
    clear = 0; ins = 0; pop = 0; ins_idx = '0; ins_dist = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int op;
      op = $urandom % 20;
      if (op == 0) begin
        clear = 1; begin mi = {}; md = {}; end
      end else if (op < 12) begin
        ins = 1; ins_idx = $urandom; ins_dist = dist_t'($urandom);   // distinct w.h.p.
        if (md.size() < N) begin mi.push_back(ins_idx); md.push_back(ins_dist); end
        else begin
          int b; b = 0;
          n_ovf++;
          for (int i = 1; i < md.size(); i++) if (md[i] > md[b]) b = i;
          if (ins_dist < md[b]) begin mi[b] = ins_idx; md[b] = ins_dist; end
        end
      end else begin
        pop = 1;
        if (md.size() > 0) begin
          int b; b = 0;
          for (int i = 1; i < md.size(); i++) if (md[i] < md[b]) b = i;
          begin mi.delete(b); md.delete(b); end
        end
      end
      @(negedge clk);
      clear = 0; ins = 0; pop = 0;
      checks++;
      if (empty !== (md.size() == 0) || int'(count) != md.size()) begin
        failures++; $display("FAIL t%0d size %0d vs %0d", t, count, md.size());
      end
      if (md.size() > 0) begin
        int b; b = 0;
        for (int i = 1; i < md.size(); i++) if (md[i] < md[b]) b = i;
        checks++;
        if (min_idx != mi[b] || min_dist != md[b]) begin failures++; $display("FAIL t%0d min %0d/%0d vs %0d/%0d op%0d", t, min_idx, min_dist, mi[b], md[b], op); end
      end
    end
    checks++;
    if (int'(ovf) != n_ovf || n_ovf == 0) begin failures++; $display("FAIL overflow count %0d vs %0d", ovf, n_ovf); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
