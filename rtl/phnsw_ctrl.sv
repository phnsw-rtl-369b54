// phnsw_ctrl: search controller of the pHNSW processor.
//
// Runs the PCA-filtered HNSW search for one query, layer by layer from `top_layer`
// down to 0, by issuing operations to the units around it:
//
//   for each layer l:   V <- F (visited list cleared and seeded), C <- F
//     loop:  c <- nearest of C (Min.H); stop the layer if C is empty or
//            dist(c) > furthest of F
//            fetch c's neighbour-list entry of layer l (AGU, DMA); for each batch
//            of 16 neighbours: Move indices and PCA vectors to the register files,
//            Dist.L, kSort.L (keeps the k nearest below the threshold f_pca; the
//            second batch of layer 0 is merged with the first)
//            for each of the k survivors m, nearest first: test-and-set V;
//            if new: fetch its 128-dim vector (AGU, DMA, Move), Dist.H;
//            if nearer than the furthest of F or |F| < ef: insert in C and F,
//            and if |F| > ef remove the furthest (RMF)
//            f_pca <- furthest PCA distance among the survivors accepted
//   result: the entries of F after layer 0
//
// This follows the published algorithm (PCA filtering, per-layer k and ef, the
// three lists) and its five-step dataflow. The published processor runs it as a
// program of 32-bit custom instructions whose encoding is not given; this controller
// is a state machine that issues the same unit operations in the same order. The
// ALU and CMP work (counters, address steps, the distance tests) is folded in here.
// Own choices: f_pca restarts at "no limit" for every layer and whenever no survivor
// was accepted; the list of accepted survivors restarts every iteration.
//
// Interface: load the query into the register files, then pulse `start` with `ep`
// (entry point, a member of `top_layer`); `done` pulses when F holds the answer.
module phnsw_ctrl
  import phnsw_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  idx_t              ep,
  input  logic [2:0]        top_layer,
  output logic              busy,
  output logic              done,
  output stats_t            stats,
  // candidate list C
  output logic              c_clear, c_ins, c_pop,
  output idx_t              c_ins_idx,
  output dist_t             c_ins_dist,
  input  idx_t              c_min_idx,
  input  dist_t             c_min_dist,
  input  logic              c_empty,
  // final list F
  output logic              f_clear, f_ins, f_rm_start,
  output idx_t              f_ins_idx,
  output dist_t             f_ins_dist,
  input  logic              f_rm_done,
  input  dist_t             f_max_dist,
  input  logic [4:0]        f_count,
  input  idx_t              f_e_idx [16],
  input  dist_t             f_e_dist[16],
  input  logic [15:0]       f_e_valid,
  // visited list
  output logic              v_tas, v_clear,
  output idx_t              v_idx,
  input  logic              v_visited, v_done, v_busy,
  // address generation and DMA
  output logic              a_req, a_hi,
  output idx_t              a_idx,
  output logic [2:0]        a_layer,
  input  logic              a_ack,
  output logic              d_start,
  output logic [5:0]        d_row,
  output logic [6:0]        d_nbeats,
  input  logic              d_done,
  // Move units (A and B)
  output logic              ma_start, mb_start,
  output logic [5:0]        ma_src, mb_src,
  output logic [4:0]        ma_dst, mb_dst,
  output logic [6:0]        ma_n, mb_n,
  input  logic              ma_done, mb_done,
  // distance and sort units
  output logic              dl_start,
  input  logic              dl_done,
  output logic              ks_start, ks_merge,
  output dist_t             ks_thr,
  output logic [4:0]        ks_k,
  input  logic              ks_done,
  input  idx_t              ks_out_idx  [N_SORT],
  input  dist_t             ks_out_dist [N_SORT],
  input  logic [4:0]        ks_out_cnt,
  output logic              dh_start,
  input  logic              dh_done,
  input  dist_t             dh_dist
);
  localparam int SPM_HI_ROW = 32;            // SPM rows 32..39 hold a 128-dim vector
  localparam int RF_HI_ROW  = 16;            // register-file rows 16..23

  typedef enum logic [4:0] {
    S_IDLE, S_INIT, S_EP_INS, S_LAYER, S_LAYER_CLR, S_SEED, S_SEED_V,
    S_POP, S_NB_AGU, S_NB_AGUW, S_NB_DMA, S_BATCH, S_BATCH_MV, S_DL, S_KS,
    S_M, S_M_V, S_CMP, S_RMF_GO, S_RMF_W, S_ITER_END, S_LAYER_END,
    S_HD_AGU, S_HD_AGUW, S_HD_DMA, S_HD_MV, S_HD_DIST
  } state_e;

  state_e      state, hd_ret;
  logic [2:0]  layer;
  logic        batch;
  logic [4:0]  j, fslot;
  idx_t        hd_idx;
  dist_t       thr_pca, tmp_max;
  logic        tmp_any, ma_seen, mb_seen;

  int          m_l, k_l, ef_l;
  always_comb begin
    m_l  = m_of(int'(layer));
    k_l  = k_of(int'(layer));
    ef_l = ef_of(int'(layer));
  end

  // Operation strobes, decoded from the state.
  always_comb begin
    c_clear = 1'b0; c_ins = 1'b0; c_pop = 1'b0;
    c_ins_idx = hd_idx; c_ins_dist = dh_dist;
    f_clear = 1'b0; f_ins = 1'b0; f_rm_start = 1'b0;
    f_ins_idx = hd_idx; f_ins_dist = dh_dist;
    v_tas = 1'b0; v_clear = 1'b0; v_idx = hd_idx;
    a_req = 1'b0; a_hi = 1'b0; a_idx = hd_idx; a_layer = layer;
    d_start = 1'b0; d_row = '0; d_nbeats = '0;
    ma_start = 1'b0; ma_src = '0; ma_dst = '0; ma_n = 7'd1;
    mb_start = 1'b0; mb_src = '0; mb_dst = '0; mb_n = 7'd1;
    dl_start = 1'b0; dh_start = 1'b0;
    ks_start = 1'b0; ks_merge = batch; ks_thr = thr_pca; ks_k = 5'(k_l);
    unique case (state)
      S_IDLE:      if (start) f_clear = 1'b1;
      S_EP_INS:    f_ins = 1'b1;
      S_LAYER:     if (!v_busy) v_clear = 1'b1;
      S_LAYER_CLR: c_clear = 1'b1;
      S_SEED:      if (fslot < 16 && f_e_valid[fslot[3:0]]) begin
                     v_tas = 1'b1; v_idx = f_e_idx[fslot[3:0]];
                   end
      S_SEED_V:    if (v_done) begin
                     c_ins = 1'b1; c_ins_idx = f_e_idx[fslot[3:0]];
                     c_ins_dist = f_e_dist[fslot[3:0]];
                   end
      S_POP:       if (!c_empty) c_pop = 1'b1;
      S_NB_AGU:    begin a_req = 1'b1; a_idx = hd_idx; end
      S_NB_AGUW:   if (a_ack) begin
                     d_start = 1'b1; d_row = '0; d_nbeats = 7'(m_l);
                   end
      S_BATCH:     begin
                     ma_start = 1'b1; ma_src = 6'(batch); ma_dst = '0; ma_n = 7'd1;
                     mb_start = 1'b1; mb_src = 6'(m_l / 16 + 15 * int'(batch));
                     mb_dst = 5'd1; mb_n = 7'd15;
                   end
      S_BATCH_MV:  if ((ma_seen || ma_done) && (mb_seen || mb_done)) dl_start = 1'b1;
      S_DL:        if (dl_done) ks_start = 1'b1;
      S_M:         if (j < ks_out_cnt) begin v_tas = 1'b1; v_idx = ks_out_idx[j[3:0]]; end
      S_CMP:       if (dh_dist < f_max_dist || int'(f_count) < ef_l) begin
                     c_ins = 1'b1; f_ins = 1'b1;
                   end
      S_RMF_GO:    f_rm_start = 1'b1;
      S_HD_AGU:    begin a_req = 1'b1; a_hi = 1'b1; end
      S_HD_AGUW:   if (a_ack) begin
                     d_start = 1'b1; d_row = 6'(SPM_HI_ROW); d_nbeats = 7'(HI_ROWS);
                   end
      S_HD_DMA:    if (d_done) begin
                     mb_start = 1'b1; mb_src = 6'(SPM_HI_ROW); mb_dst = 5'(RF_HI_ROW);
                     mb_n = 7'(HI_ROWS);
                   end
      S_HD_MV:     if (mb_done) dh_start = 1'b1;
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      hd_ret  <= S_IDLE;
      layer   <= '0;
      batch   <= 1'b0;
      j       <= '0;
      fslot   <= '0;
      hd_idx  <= '0;
      thr_pca <= DIST_MAX;
      tmp_max <= '0;
      tmp_any <= 1'b0;
      ma_seen <= 1'b0;
      mb_seen <= 1'b0;
      done    <= 1'b0;
      stats   <= '0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) stats.cycles <= stats.cycles + 1;
      unique case (state)
        S_IDLE: if (start) begin
          stats  <= '0;
          layer  <= top_layer;
          hd_idx <= ep;
          hd_ret <= S_EP_INS;
          state  <= S_INIT;
        end
        S_INIT:      if (!v_busy) state <= S_HD_AGU;     // dist(ep, q)
        S_EP_INS:    state <= S_LAYER;                    // F <- {ep}
        S_LAYER:     if (!v_busy) state <= S_LAYER_CLR;   // V <- {}
        S_LAYER_CLR: if (!v_busy) begin                   // C <- {}
          fslot   <= '0;
          thr_pca <= DIST_MAX;
          state   <= S_SEED;
        end
        S_SEED: begin                                     // V, C <- F
          if (fslot == 16)                  state <= S_POP;
          else if (f_e_valid[fslot[3:0]])   state <= S_SEED_V;
          else                              fslot <= fslot + 1'b1;
        end
        S_SEED_V: if (v_done) begin
          fslot <= fslot + 1'b1;
          state <= S_SEED;
        end
        S_POP: begin
          if (c_empty) begin
            state <= S_LAYER_END;
          end else if (c_min_dist > f_max_dist) begin     // Dist(c,q) > Dist(f,q)
            stats.breaks <= stats.breaks + 1;
            state <= S_LAYER_END;
          end else begin
            stats.iters <= stats.iters + 1;
            hd_idx <= c_min_idx;
            state  <= S_NB_AGU;
          end
        end
        S_NB_AGU:  state <= S_NB_AGUW;
        S_NB_AGUW: if (a_ack) state <= S_NB_DMA;
        S_NB_DMA:  if (d_done) begin
          batch <= 1'b0;
          state <= S_BATCH;
        end
        S_BATCH: begin
          ma_seen <= 1'b0;
          mb_seen <= 1'b0;
          state   <= S_BATCH_MV;
        end
        S_BATCH_MV: begin
          if (ma_done) ma_seen <= 1'b1;
          if (mb_done) mb_seen <= 1'b1;
          if ((ma_seen || ma_done) && (mb_seen || mb_done)) state <= S_DL;
        end
        S_DL: if (dl_done) state <= S_KS;
        S_KS: if (ks_done) begin
          if (batch) stats.merges <= stats.merges + 1;
          if (!batch && m_l > N_SORT) begin
            batch <= 1'b1;
            state <= S_BATCH;
          end else begin
            j       <= '0;
            tmp_any <= 1'b0;
            tmp_max <= '0;
            state   <= S_M;
          end
        end
        S_M: begin
          if (j >= ks_out_cnt) state <= S_ITER_END;
          else begin
            hd_idx <= ks_out_idx[j[3:0]];
            state  <= S_M_V;
          end
        end
        S_M_V: if (v_done) begin
          if (v_visited) begin
            stats.visit_hits <= stats.visit_hits + 1;
            j     <= j + 1'b1;
            state <= S_M;
          end else begin
            hd_ret <= S_CMP;
            state  <= S_HD_AGU;
          end
        end
        S_CMP: begin
          if (dh_dist < f_max_dist || int'(f_count) < ef_l) begin
            tmp_any <= 1'b1;
            if (!tmp_any || ks_out_dist[j[3:0]] > tmp_max) tmp_max <= ks_out_dist[j[3:0]];
            if (int'(f_count) + 1 > ef_l) state <= S_RMF_GO;
            else begin
              j     <= j + 1'b1;
              state <= S_M;
            end
          end else begin
            j     <= j + 1'b1;
            state <= S_M;
          end
        end
        S_RMF_GO: begin
          stats.rmf <= stats.rmf + 1;
          state     <= S_RMF_W;
        end
        S_RMF_W: if (f_rm_done) begin
          j     <= j + 1'b1;
          state <= S_M;
        end
        S_ITER_END: begin
          thr_pca <= tmp_any ? tmp_max : DIST_MAX;
          state   <= S_POP;
        end
        S_LAYER_END: begin
          if (layer == 0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            layer <= layer - 1'b1;
            state <= S_LAYER;
          end
        end
        // Fetch the 128-dim vector of hd_idx and compute its distance to q.
        S_HD_AGU: begin
          stats.hd_fetches <= stats.hd_fetches + 1;
          state <= S_HD_AGUW;
        end
        S_HD_AGUW: if (a_ack)   state <= S_HD_DMA;
        S_HD_DMA:  if (d_done)  state <= S_HD_MV;
        S_HD_MV:   if (mb_done) state <= S_HD_DIST;
        S_HD_DIST: if (dh_done) state <= hd_ret;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
