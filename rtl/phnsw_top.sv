// phnsw_top: the pHNSW search processor.
//
// A single-query accelerator for HNSW nearest-neighbour search with PCA filtering.
// Each visited node's neighbour list is fetched together with the neighbours' 15-dim
// PCA vectors in one sequential burst; distances in that space (Dist.L) and a
// parallel top-k sort (kSort.L) pick the k most promising neighbours, and only those
// have their 128-dim vectors fetched and compared exactly (Dist.H). The controller
// (phnsw_ctrl) sequences the search; the units follow the published block diagram:
// DMA and AGU to off-chip memory, an SPM buffer, two Move units with their two
// buses (the two SPM read ports and register-file write ports), the register
// files, Dist.L, kSort.L, Dist.H, Min.H (in the candidate list), RMF (in the final
// list) and Visit&Raw (the visited bitmap).
//
// Using it: after reset, wait for `busy` to fall (the visited bitmap is swept), write
// the 128-dim query (q_hi=1, q_addr 0..127) and its 15-dim PCA projection (q_hi=0,
// q_addr 0..14) through the q_* port, set the memory map (`layer_base`, `raw_base`),
// then pulse `start` with the entry point `ep` and its layer `top_layer`. When `done`
// pulses, res_* hold the ef(0)=10 nearest points found (unordered) with their squared
// distances, and `stats` holds the event counts of the search.
//
// Off-chip memory (not part of this design) is reached through a request channel
// (valid/ready, 64-byte-aligned byte address) and an in-order response channel of
// one 64-byte burst per request. Database layout: see agu.sv and phnsw_pkg.sv.
module phnsw_top
  import phnsw_pkg::*;
#(
  parameter int N_POINTS  = 1 << 20,   // visited bitmap size (SIFT1M)
  parameter int C_SIZE    = 64,        // candidate list capacity
  parameter int LOG_DEPTH = 256        // visited-list clear log
) (
  input  logic         clk,
  input  logic         rst_n,
  // query load
  input  logic         q_we,
  input  logic         q_hi,
  input  logic [6:0]   q_addr,
  input  elem_t        q_data,
  // search control
  input  addr_t        layer_base [N_LAYERS],
  input  addr_t        raw_base,
  input  logic         start,
  input  idx_t         ep,
  input  logic [2:0]   top_layer,
  output logic         busy,
  output logic         done,
  output stats_t       stats,
  output idx_t         res_idx  [16],
  output dist_t        res_dist [16],
  output logic [15:0]  res_valid,
  // off-chip memory
  output logic         mem_req_valid,
  input  logic         mem_req_ready,
  output addr_t        mem_req_addr,
  input  logic         mem_rsp_valid,
  input  row_t         mem_rsp_data
);
  // controller <-> units
  logic        c_clear, c_ins, c_pop, c_empty;
  idx_t        c_ins_idx, c_min_idx;
  dist_t       c_ins_dist, c_min_dist;
  logic [$clog2(C_SIZE):0] c_count;
  logic [31:0] c_overflows;
  logic        f_clear, f_ins, f_rm_start, f_rm_done;
  idx_t        f_ins_idx;
  dist_t       f_ins_dist, f_max_dist;
  logic [4:0]  f_count;
  logic        v_tas, v_clear, v_visited, v_done, v_busy, v_swept;
  idx_t        v_idx;
  logic        a_req, a_hi, a_ack;
  idx_t        a_idx;
  logic [2:0]  a_layer;
  addr_t       a_addr;
  logic        d_start, d_done;
  logic [5:0]  d_row;
  logic [6:0]  d_nbeats;
  logic        ma_start, mb_start, ma_done, mb_done;
  logic [5:0]  ma_src, mb_src;
  logic [4:0]  ma_dst, mb_dst;
  logic [6:0]  ma_n, mb_n;
  logic        dl_start, dl_done, ks_start, ks_merge, ks_done, dh_start, dh_done;
  dist_t       ks_thr, dh_dist;
  logic [4:0]  ks_k, ks_out_cnt;
  idx_t        ks_out_idx [N_SORT];
  dist_t       ks_out_dist[N_SORT];
  dist_t       dl_dist [N_SORT];
  logic [N_SORT-1:0] lo_valid;
  logic        ctrl_busy;

  // SPM, the two buses and the register files
  logic        spm_we, rf_we_a, rf_we_b;
  logic [5:0]  spm_waddr, spm_ra, spm_rb;
  row_t        spm_wdata, spm_da, spm_db, rf_data_a, rf_data_b;
  logic [4:0]  rf_row_a, rf_row_b;
  elem_t       q_high [D_HIGH];
  elem_t       q_low  [D_LOW];
  idx_t        lo_idx [N_SORT];
  elem_t       lo_pts [N_SORT][D_LOW];
  elem_t       hi_vec [D_HIGH];

  phnsw_ctrl u_ctrl (
    .clk, .rst_n, .start, .ep, .top_layer, .busy(ctrl_busy), .done, .stats,
    .c_clear, .c_ins, .c_pop, .c_ins_idx, .c_ins_dist, .c_min_idx, .c_min_dist, .c_empty,
    .f_clear, .f_ins, .f_rm_start, .f_ins_idx, .f_ins_dist, .f_rm_done, .f_max_dist,
    .f_count, .f_e_idx(res_idx), .f_e_dist(res_dist), .f_e_valid(res_valid),
    .v_tas, .v_clear, .v_idx, .v_visited, .v_done, .v_busy,
    .a_req, .a_hi, .a_idx, .a_layer, .a_ack,
    .d_start, .d_row, .d_nbeats, .d_done,
    .ma_start, .mb_start, .ma_src, .mb_src, .ma_dst, .mb_dst, .ma_n, .mb_n, .ma_done, .mb_done,
    .dl_start, .dl_done, .ks_start, .ks_merge, .ks_thr, .ks_k, .ks_done,
    .ks_out_idx, .ks_out_dist, .ks_out_cnt, .dh_start, .dh_done, .dh_dist
  );

  assign busy = ctrl_busy || v_busy;

  cand_list #(.N(C_SIZE)) u_clist (
    .clk, .rst_n, .clear(c_clear), .ins(c_ins), .ins_idx(c_ins_idx), .ins_dist(c_ins_dist),
    .pop(c_pop), .min_idx(c_min_idx), .min_dist(c_min_dist), .empty(c_empty),
    .count(c_count), .overflows(c_overflows)
  );

  final_list #(.N(16)) u_flist (
    .clk, .rst_n, .clear(f_clear), .ins(f_ins), .ins_idx(f_ins_idx), .ins_dist(f_ins_dist),
    .rm_start(f_rm_start), .rm_done(f_rm_done), .max_dist(f_max_dist), .count(f_count),
    .e_idx(res_idx), .e_dist(res_dist), .e_valid(res_valid)
  );

  visit_raw #(.N_POINTS(N_POINTS), .LOG_DEPTH(LOG_DEPTH)) u_visit (
    .clk, .rst_n, .tas(v_tas), .idx(v_idx), .visited(v_visited), .done(v_done),
    .clear(v_clear), .busy(v_busy), .swept(v_swept)
  );

  agu u_agu (
    .clk, .rst_n, .req(a_req), .hi(a_hi), .idx(a_idx), .layer(a_layer),
    .layer_base, .raw_base, .addr(a_addr), .ack(a_ack)
  );

  dma #(.SPM_ROWS(64)) u_dma (
    .clk, .rst_n, .start(d_start), .addr(a_addr), .row(d_row), .nbeats(d_nbeats),
    .done(d_done), .mem_req_valid, .mem_req_ready, .mem_req_addr, .mem_rsp_valid,
    .mem_rsp_data, .spm_we, .spm_waddr, .spm_wdata
  );

  spm #(.ROWS(64)) u_spm (
    .clk, .we(spm_we), .waddr(spm_waddr), .wdata(spm_wdata),
    .raddr_a(spm_ra), .rdata_a(spm_da), .raddr_b(spm_rb), .rdata_b(spm_db)
  );

  // Move A drives bus A (SPM port A -> register-file port A), Move B bus B.
  move_unit #(.SPM_ROWS(64), .RF_ROWS(24)) u_move_a (
    .clk, .rst_n, .start(ma_start), .src_row(ma_src), .dst_row(ma_dst), .nrows(ma_n),
    .done(ma_done), .spm_raddr(spm_ra), .spm_rdata(spm_da),
    .rf_we(rf_we_a), .rf_row(rf_row_a), .rf_data(rf_data_a)
  );
  move_unit #(.SPM_ROWS(64), .RF_ROWS(24)) u_move_b (
    .clk, .rst_n, .start(mb_start), .src_row(mb_src), .dst_row(mb_dst), .nrows(mb_n),
    .done(mb_done), .spm_raddr(spm_rb), .spm_rdata(spm_db),
    .rf_we(rf_we_b), .rf_row(rf_row_b), .rf_data(rf_data_b)
  );

  regfile #(.ROWS(24)) u_rf (
    .clk, .rst_n,
    .we_a(rf_we_a), .row_a(rf_row_a), .data_a(rf_data_a),
    .we_b(rf_we_b), .row_b(rf_row_b), .data_b(rf_data_b),
    .q_we, .q_hi, .q_addr, .q_data,
    .q_high, .q_low, .lo_idx, .lo_pts, .hi_vec
  );

  dist_l #(.LANES(N_SORT), .D(D_LOW)) u_dist_l (
    .clk, .rst_n, .start(dl_start), .q(q_low), .pts(lo_pts), .dval(dl_dist), .done(dl_done)
  );

  always_comb
    for (int i = 0; i < N_SORT; i++) lo_valid[i] = (lo_idx[i] != INVALID_IDX);

  ksort_l #(.N(N_SORT), .N_MUX(4)) u_ksort (
    .clk, .rst_n, .start(ks_start), .merge(ks_merge), .dist_in(dl_dist), .idx_in(lo_idx),
    .valid_in(lo_valid), .thr(ks_thr), .k(ks_k), .out_dist(ks_out_dist),
    .out_idx(ks_out_idx), .out_cnt(ks_out_cnt), .done(ks_done)
  );

  dist_h #(.D(D_HIGH), .LANES(16)) u_dist_h (
    .clk, .rst_n, .start(dh_start), .q(q_high), .x(hi_vec), .dval(dh_dist), .done(dh_done)
  );
endmodule
