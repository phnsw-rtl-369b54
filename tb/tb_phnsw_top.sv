// tb_phnsw_top: end-to-end test of the pHNSW processor at its default parameters.
//
// Builds a small random HNSW database in a behavioural off-chip memory: NP0 points
// spread over the 1M-point index space, three layers (every 4th point in layer 1,
// every 16th in layer 2), random neighbour lists of up to 16 (32 in layer 0) members
// of the same layer, padded with invalid slots, random 128-dim vectors with values
// 0..255 and a 15-dim projection (sum of 8 consecutive dimensions, centred). A second,
// separate layer-0 graph of NC points on a line (each linked to the next 32) is
// searched by one query placed beyond its end: every expansion then accepts 16 new
// points, which overfills the 64-entry candidate list and the 256-word visited-list
// clear log, so the following query starts with a full sweep. The memory accepts
// requests with random back-pressure and answers in order after a fixed latency.
//
// For each of NQ queries (random ones, and the line query) the final list and counters
// are compared with a reference search written here independently in plain
// procedural code (same algorithm: per-layer V/C/F lists, top-k PCA filtering with
// the f_pca threshold, exact re-ranking). The test also requires that every
// mechanism happened at least once over the run: the distance stop, the empty-list
// stop, the layer-0 two-batch merge, visited hits, F removals, the threshold filter,
// the top-k cut, candidate-list overflow, log-based visited clearing and a sweep
// after a log overflow (besides the one after reset).
module tb_phnsw_top;
  import phnsw_pkg::*;

  localparam int NP0    = 400;              // random points 0..NP0-1
  localparam int NC     = 800;              // chain points NP0..NP-1
  localparam int NP     = NP0 + NC;
  localparam int STRIDE = 2609;             // random point i has index i*STRIDE + 7
  localparam int CSTR   = 1297;             // chain point c has index c*CSTR + 2
  localparam int TOP    = 2;
  localparam int NQ     = 4;                // query NQ-2 is the chain query
  localparam int CQ     = 3000;             // chain query position
  localparam int LAT    = 24;
  localparam int C_CAP  = 64;               // phnsw_top default C_SIZE

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        q_we, q_hi, start, busy, done;
  logic [6:0]  q_addr;
  elem_t       q_data;
  addr_t       layer_base [N_LAYERS];
  addr_t       raw_base;
  idx_t        ep;
  logic [2:0]  top_layer;
  stats_t      stats;
  idx_t        res_idx [16];
  dist_t       res_dist[16];
  logic [15:0] res_valid;
  logic        mem_req_valid, mem_req_ready, mem_rsp_valid;
  addr_t       mem_req_addr;
  row_t        mem_rsp_data;

  phnsw_top dut (.*);

  // ---------------- behavioural off-chip memory ----------------
  row_t   mem [longint];
  addr_t  pend_a[$];
  longint pend_t[$];
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    mem_req_ready <= ($urandom % 4) != 0;
    if (mem_req_valid && mem_req_ready) begin
      pend_a.push_back(mem_req_addr);
      pend_t.push_back(cyc + LAT);
    end
    mem_rsp_valid <= 1'b0;
    if (pend_a.size() > 0 && pend_t[0] <= cyc) begin
      longint a;
      a = longint'(pend_a.pop_front()) >> 6;
      void'(pend_t.pop_front());
      mem_rsp_valid <= 1'b1;
      mem_rsp_data  <= mem.exists(a) ? mem[a] : '0;
    end
  end

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- database ----------------
  int    hv  [NP][D_HIGH];
  int    lv  [NP][D_LOW];
  int    lvl [NP];
  int    nb  [NP][3][32];                   // point numbers, -1 = empty slot
  int    qh  [D_HIGH];
  int    ql  [D_LOW];

  function automatic longint gidx(int i);
    return (i < NP0) ? longint'(i) * STRIDE + 7 : longint'(i - NP0) * CSTR + 2;
  endfunction
  function automatic int m_at(int l); return (l == 0) ? 32 : 16; endfunction

  function automatic dist_t dh(int p);
    dist_t s = '0;
    for (int d = 0; d < D_HIGH; d++) s += DIST_W'(longint'(hv[p][d] - qh[d]) * longint'(hv[p][d] - qh[d]));
    return s;
  endfunction
  function automatic dist_t dlo(int p);
    dist_t s = '0;
    for (int d = 0; d < D_LOW; d++) s += DIST_W'(longint'(lv[p][d] - ql[d]) * longint'(lv[p][d] - ql[d]));
    return s;
  endfunction

  task automatic put_words(longint byte_addr, int unsigned w[$]);
    for (int r = 0; r < (w.size() + 15) / 16; r++) begin
      row_t row = '0;
      for (int t = 0; t < 16; t++)
        if (16 * r + t < w.size()) row[32*t +: 32] = w[16*r + t];
      mem[(byte_addr >> 6) + r] = row;
    end
  endtask

  task automatic build_db();
    layer_base[0] = 40'h00_0000_0000;
    layer_base[1] = 40'h01_0000_0000;
    layer_base[2] = 40'h02_0000_0000;
    for (int l = 3; l < N_LAYERS; l++) layer_base[l] = 40'h03_0000_0000 + 40'(l) * 40'h4000_0000;
    raw_base = 40'h08_0000_0000;
    for (int i = 0; i < NP0; i++) begin
      lvl[i] = (i % 16 == 0) ? 2 : (i % 4 == 0) ? 1 : 0;
      for (int d = 0; d < D_HIGH; d++) hv[i][d] = $urandom % 256;
      for (int d = 0; d < D_LOW; d++) begin
        lv[i][d] = -1020;
        for (int t = 0; t < 8; t++) lv[i][d] += hv[i][8*d + t];
      end
    end
    // Chain: point c sits at position c on a line, layer 0 only; its neighbours
    // are the next 32 points. A query far beyond the end makes every expansion
    // accept 16 new points, which overfills C and the visited-list clear log.
    for (int i = NP0; i < NP; i++) begin
      lvl[i] = 0;
      for (int d = 0; d < D_HIGH; d++) hv[i][d] = 0;
      for (int d = 0; d < D_LOW; d++) lv[i][d] = 0;
      hv[i][0] = i - NP0;
      lv[i][0] = i - NP0;
      for (int s = 0; s < 32; s++) nb[i][0][s] = (i + 1 + s < NP) ? i + 1 + s : -1;
    end
    begin
      int coll;
      coll = 0;
      for (int i = 0; i < NP0; i++)
        for (int c = NP0; c < NP; c++)
          if (gidx(i) == gidx(c)) coll++;
      check(coll == 0, "chain and random indices collide");
    end
    for (int i = 0; i < NP; i++) begin
      int unsigned w[$];
      w = {};
      for (int d = 0; d < D_HIGH; d++) w.push_back(hv[i][d]);
      put_words(longint'(raw_base) + gidx(i) * 512, w);
      for (int l = 0; l <= lvl[i]; l++) begin
        int members[$];
        int m, n;
        m = m_at(l);
        if (i < NP0) begin
          members = {};
          for (int j = 0; j < NP0; j++) if (j != i && lvl[j] >= l) members.push_back(j);
          members.shuffle();
          n = (members.size() < m) ? members.size() : m;
          if (n > 3 && ($urandom % 3) == 0) n = n - 1 - ($urandom % 3);   // some padding
          for (int s = 0; s < 32; s++) nb[i][l][s] = (s < n) ? members[s] : -1;
        end
        w = {};
        for (int s = 0; s < m; s++) w.push_back((nb[i][l][s] < 0) ? 32'hFFFF_FFFF : 32'(gidx(nb[i][l][s])));
        for (int s = 0; s < m; s++)
          for (int d = 0; d < D_LOW; d++)
            w.push_back((nb[i][l][s] < 0) ? 32'($urandom) : 32'(lv[nb[i][l][s]][d]));
        put_words(longint'(layer_base[l]) + gidx(i) * m * 64, w);
      end
    end
  endtask

  // ---------------- reference search ----------------
  typedef struct { int p; dist_t d; } ent_t;
  int  r_iters, r_breaks, r_merges, r_vhits, r_hd, r_rmf, r_empty_stops, r_filtered, r_kcuts, r_cfull;
  ent_t rF[$];

  function automatic int max_slot(ent_t q[$]);
    int b = 0;
    for (int i = 1; i < q.size(); i++) if (q[i].d > q[b].d) b = i;
    return b;
  endfunction

  task automatic ref_search(int epp, int top);
    ent_t C[$], L[$], e;
    bit   V[int];
    dist_t thr, tmax;
    bit   tany;
    rF = '{};
    e.p = epp; e.d = dh(epp); rF.push_back(e); r_hd++;
    for (int l = top; l >= 0; l--) begin
      V.delete(); C = {};
      foreach (rF[i]) begin V[rF[i].p] = 1; C.push_back(rF[i]); end
      thr = DIST_MAX;
      forever begin
        int b, ef;
        ent_t c;
        ef = ef_of(l);
        if (C.size() == 0) begin r_empty_stops++; break; end
        b = 0;
        for (int i = 1; i < C.size(); i++) if (C[i].d < C[b].d) b = i;
        c = C[b]; C.delete(b);
        if (c.d > rF[max_slot(rF)].d) begin r_breaks++; break; end
        r_iters++;
        if (m_at(l) > 16) r_merges++;
        L = {};
        for (int s = 0; s < m_at(l); s++) begin
          int p;
          p = nb[c.p][l][s];
          if (p >= 0) begin
            e.p = p; e.d = dlo(p);
            if (e.d < thr) L.push_back(e); else r_filtered++;
          end
        end
        L.sort(x) with (x.d);
        if (L.size() > k_of(l)) r_kcuts++;
        while (L.size() > k_of(l)) L.pop_back();
        tany = 0; tmax = '0;
        foreach (L[j]) begin
          ent_t mm;
          if (V.exists(L[j].p)) begin r_vhits++; continue; end
          V[L[j].p] = 1;
          mm.p = L[j].p; mm.d = dh(L[j].p); r_hd++;
          if (mm.d < rF[max_slot(rF)].d || rF.size() < ef) begin
            if (!tany || L[j].d > tmax) tmax = L[j].d;
            tany = 1;
            if (C.size() < C_CAP) C.push_back(mm);
            else begin
              r_cfull++;
              b = max_slot(C);
              if (mm.d < C[b].d) C[b] = mm;
            end
            rF.push_back(mm);
            if (rF.size() > ef) begin rF.delete(max_slot(rF)); r_rmf++; end
          end
        end
        thr = tany ? tmax : DIST_MAX;
      end
    end
  endtask

  // ---------------- test ----------------
  int sweeps = 0, replays = 0;
  always @(negedge clk) begin
    if (dut.u_visit.swept) sweeps++;
    if (!dut.u_visit.busy && dut.v_clear && !dut.u_visit.log_ovf) replays++;
  end

  initial begin
    q_we = 0; q_hi = 0; q_addr = '0; q_data = '0; start = 0; ep = '0; top_layer = TOP;
    build_db();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    while (busy) @(posedge clk);             // reset sweep of the visited bitmap
    for (int q = 0; q < NQ; q++) begin
      int ri[$], hi_[$];
      dist_t rd[$], hd_[$];
      int r_it0, r_hd0, r_vh0, r_rm0, r_br0, r_mg0;
      int epp, top;
      bit chain;
      ri = {}; hi_ = {}; rd = {}; hd_ = {};
      chain = (q == NQ - 2);
      if (chain) begin
        epp = NP0; top = 0;
        for (int d = 0; d < D_HIGH; d++) qh[d] = 0;
        for (int d = 0; d < D_LOW; d++) ql[d] = 0;
        qh[0] = CQ; ql[0] = CQ;
      end else begin
        epp = 0; top = TOP;
        for (int d = 0; d < D_HIGH; d++) qh[d] = $urandom % 256;
        for (int d = 0; d < D_LOW; d++) begin
          ql[d] = -1020;
          for (int t = 0; t < 8; t++) ql[d] += qh[8*d + t];
        end
      end
      @(negedge clk);
      for (int d = 0; d < D_HIGH; d++) begin
        q_we = 1; q_hi = 1; q_addr = 7'(d); q_data = qh[d]; @(negedge clk);
      end
      for (int d = 0; d < D_LOW; d++) begin
        q_we = 1; q_hi = 0; q_addr = 7'(d); q_data = ql[d]; @(negedge clk);
      end
      q_we = 0;
      r_it0 = r_iters; r_hd0 = r_hd; r_vh0 = r_vhits; r_rm0 = r_rmf; r_br0 = r_breaks; r_mg0 = r_merges;
      ref_search(epp, top);
      ep = 32'(gidx(epp)); top_layer = 3'(top); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      foreach (rF[i]) begin ri.push_back(int'(gidx(rF[i].p))); rd.push_back(rF[i].d); end
      for (int s = 0; s < 16; s++) if (res_valid[s]) begin hi_.push_back(int'(res_idx[s])); hd_.push_back(res_dist[s]); end
      ri.sort(); hi_.sort(); rd.sort(); hd_.sort();
      check(hi_.size() == ri.size(), $sformatf("q%0d |F| %0d vs %0d", q, hi_.size(), ri.size()));
      check(hi_ == ri, $sformatf("q%0d result indices differ", q));
      check(hd_ == rd, $sformatf("q%0d result distances differ", q));
      check(stats.iters == 32'(r_iters - r_it0), $sformatf("q%0d iters %0d vs %0d", q, stats.iters, r_iters - r_it0));
      check(stats.hd_fetches == 32'(r_hd - r_hd0), $sformatf("q%0d hd %0d vs %0d", q, stats.hd_fetches, r_hd - r_hd0));
      check(stats.visit_hits == 32'(r_vhits - r_vh0), $sformatf("q%0d vhits %0d vs %0d", q, stats.visit_hits, r_vhits - r_vh0));
      check(stats.rmf == 32'(r_rmf - r_rm0), $sformatf("q%0d rmf %0d vs %0d", q, stats.rmf, r_rmf - r_rm0));
      check(stats.breaks == 32'(r_breaks - r_br0), $sformatf("q%0d breaks %0d vs %0d", q, stats.breaks, r_breaks - r_br0));
      check(stats.merges == 32'(r_merges - r_mg0), $sformatf("q%0d merges %0d vs %0d", q, stats.merges, r_merges - r_mg0));
      $display("query %0d: %0d cycles, %0d iterations, %0d vectors fetched, %0d visited hits, %0d removals",
               q, stats.cycles, stats.iters, stats.hd_fetches, stats.visit_hits, stats.rmf);
      @(negedge clk);
    end
    $display("mechanisms: breaks=%0d empty_stops=%0d merges=%0d visit_hits=%0d rmf=%0d filtered=%0d k_cuts=%0d c_full=%0d/%0d replay_clears=%0d sweeps=%0d",
             r_breaks, r_empty_stops, r_merges, r_vhits, r_rmf, r_filtered, r_kcuts, r_cfull, dut.c_overflows, replays, sweeps);
    check(r_breaks > 0, "distance stop never happened");
    check(r_empty_stops > 0, "empty-list stop never happened");
    check(r_merges > 0, "layer-0 merge never happened");
    check(r_vhits > 0, "visited hit never happened");
    check(r_rmf > 0, "F removal never happened");
    check(r_filtered > 0, "threshold filter never rejected a neighbour");
    check(replays > 0, "log-based visited clear never happened");
    check(r_kcuts > 0, "top-k cut never dropped a survivor");
    check(r_cfull > 0, "candidate list never overflowed");
    check(dut.c_overflows == 32'(r_cfull), "candidate overflow count differs from the reference");
    check(sweeps > 1, "visited sweep after a log overflow never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
