// ksort_l: fully parallel top-k sorter for low-dimensional distances (kSort.L).
//
// How it sorts: every element is compared with every other in an N x N comparator
// matrix; the number of '>' results in an element's row is its rank, i.e. its
// position in ascending order. Output position p is then filled by an N-input
// multiplexer that selects the element whose rank equals p. Four such multiplexers
// fill four positions per clock. This rank-and-select scheme, the 16x16 matrix, the
// four 16-input multiplexers and the 7-cycle latency follow the published design;
// the split of those 7 cycles (load, compare, count, 4 x select) is this
// implementation's reading of it.
//
// Filtering: an element takes part only if `valid_in` is set and its distance is
// below `thr` (the furthest element kept in the previous iteration). Elements that do
// not take part carry an "absent" bit above the distance so they rank last. Of the
// survivors the first min(k, survivors) are reported (`out_cnt`). Equal keys are
// ordered by slot so all ranks differ.
//
// Merge (this implementation's extension for the 32-neighbour layer 0, which the
// 16-wide sorter cannot take at once): with `merge` set, the new batch is sorted as
// above and then combined with the previous result A by taking min(A[j], B[N-1-j])
// for every j. For two ascending lists this selects the N smallest of their union
// (bitonic half-cleaner), which are sorted again and cut to k. A merge takes 14
// cycles.
//
// Interface: pulse `start` with inputs valid; inputs may change after that cycle.
// `done` pulses 7 (merge: 14) cycles later; `out_*` then hold the result until the
// next completion.
module ksort_l
  import phnsw_pkg::*;
#(
  parameter int N     = N_SORT,
  parameter int N_MUX = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic                   merge,
  input  dist_t                  dist_in [N],
  input  idx_t                   idx_in  [N],
  input  logic  [N-1:0]          valid_in,
  input  dist_t                  thr,
  input  logic  [$clog2(N):0]    k,
  output dist_t                  out_dist[N],
  output idx_t                   out_idx [N],
  output logic  [$clog2(N):0]    out_cnt,
  output logic                   done
);
  localparam int CW     = $clog2(N) + 1;
  localparam int GROUPS = N / N_MUX;
  typedef logic [DIST_W:0] key_t;            // {absent, distance}
  localparam key_t ABSENT = '1;

  typedef enum logic [2:0] {IDLE, CMP, COUNT, SELECT, MLOAD} phase_e;
  phase_e phase;
  logic [$clog2(GROUPS > 1 ? GROUPS : 2)-1:0] grp;
  logic second;                              // a merge pass follows

  key_t          key   [N];
  idx_t          idx   [N];
  logic [N-1:0]  gt    [N];
  logic [CW-1:0] rank  [N];
  logic [CW-1:0] nvalid;
  key_t          w_key [N], w_nx_key[N];
  idx_t          w_idx [N], w_nx_idx[N];
  key_t          a_key [N];
  logic [CW-1:0] cnt_nx;
  key_t          ld_key[N], mg_key[N];
  idx_t          mg_idx[N];
  logic [CW-1:0] ld_nv, mg_nv;

  // Keys of a new batch (filtered) and of a merge of A with the sorted batch B.
  always_comb begin
    ld_nv = '0;
    mg_nv = '0;
    for (int i = 0; i < N; i++) begin
      logic v;
      v         = valid_in[i] && (dist_in[i] < thr);
      ld_key[i] = v ? {1'b0, dist_in[i]} : ABSENT;
      ld_nv     = ld_nv + CW'(v);
      if (a_key[i] <= w_key[N-1-i]) begin
        mg_key[i] = a_key[i];
        mg_idx[i] = out_idx[i];
      end else begin
        mg_key[i] = w_key[N-1-i];
        mg_idx[i] = w_idx[N-1-i];
      end
      mg_nv = mg_nv + CW'(!mg_key[i][DIST_W]);
    end
  end

  // Select stage: positions grp*N_MUX .. grp*N_MUX+N_MUX-1 of this clock.
  always_comb begin
    for (int p = 0; p < N; p++) begin
      w_nx_key[p] = w_key[p];
      w_nx_idx[p] = w_idx[p];
    end
    for (int m = 0; m < N_MUX; m++) begin
      int p;
      p = int'(grp) * N_MUX + m;
      w_nx_key[p] = '0;
      w_nx_idx[p] = '0;
      for (int i = 0; i < N; i++) begin
        if (int'(rank[i]) == p) begin
          w_nx_key[p] = w_nx_key[p] | key[i];
          w_nx_idx[p] = w_nx_idx[p] | idx[i];
        end
      end
    end
    cnt_nx = (nvalid < k) ? nvalid : k;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= IDLE;
      grp     <= '0;
      second  <= 1'b0;
      nvalid  <= '0;
      out_cnt <= '0;
      done    <= 1'b0;
      for (int i = 0; i < N; i++) begin
        key[i] <= ABSENT; idx[i] <= '0; gt[i] <= '0; rank[i] <= '0;
        w_key[i] <= ABSENT; w_idx[i] <= '0; a_key[i] <= ABSENT;
        out_dist[i] <= '0; out_idx[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (phase)
        IDLE: if (start) begin
          for (int i = 0; i < N; i++) begin
            key[i] <= ld_key[i];
            idx[i] <= idx_in[i];
          end
          nvalid <= ld_nv;
          second <= merge;
          phase  <= CMP;
        end
        CMP: begin                           // N x N comparator matrix
          for (int i = 0; i < N; i++)
            for (int j = 0; j < N; j++)
              gt[i][j] <= (key[i] > key[j]) || (key[i] == key[j] && i > j);
          phase <= COUNT;
        end
        COUNT: begin                         // rank = number of '>' in the row
          for (int i = 0; i < N; i++) rank[i] <= CW'($countones(gt[i]));
          grp   <= '0;
          phase <= SELECT;
        end
        SELECT: begin
          for (int p = 0; p < N; p++) begin
            w_key[p] <= w_nx_key[p];
            w_idx[p] <= w_nx_idx[p];
          end
          grp <= grp + 1'b1;
          if (int'(grp) == GROUPS - 1) begin
            if (second) begin
              phase <= MLOAD;
            end else begin
              for (int p = 0; p < N; p++) begin
                a_key[p]    <= (CW'(p) < cnt_nx) ? w_nx_key[p] : ABSENT;
                out_dist[p] <= (CW'(p) < cnt_nx) ? w_nx_key[p][DIST_W-1:0] : DIST_MAX;
                out_idx[p]  <= (CW'(p) < cnt_nx) ? w_nx_idx[p] : INVALID_IDX;
              end
              out_cnt <= cnt_nx;
              done    <= 1'b1;
              phase   <= IDLE;
            end
          end
        end
        MLOAD: begin                         // bitonic half-clean of A and B
          for (int j = 0; j < N; j++) begin
            key[j] <= mg_key[j];
            idx[j] <= mg_idx[j];
          end
          nvalid <= mg_nv;
          second <= 1'b0;
          phase  <= CMP;
        end
        default: phase <= IDLE;
      endcase
    end
  end
endmodule
