// final_list: final (result) list F of the layer search.
//
// Holds up to N (index, high-dim distance) pairs. `max_dist` is the furthest entry,
// used by the comparisons of the search loop; `count` is |F|. `ins` adds an entry in
// the lowest free slot. `rm_start` launches the RMF unit, which scans the slots over
// N/2 cycles for the furthest entry and frees it; `rm_done` pulses when that entry is
// gone. The entries are visible on `e_*` for the result read-out.
//
// Timing: `ins` and `clear` act at the next edge; `rm_done` pulses N/2+2 cycles
// after `rm_start` (the RMF start cycle, N/2 scan cycles, the freeing edge). No `ins` may be issued while a removal runs.
module final_list
  import phnsw_pkg::*;
#(
  parameter int N = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               ins,
  input  idx_t               ins_idx,
  input  dist_t              ins_dist,
  input  logic               rm_start,
  output logic               rm_done,
  output dist_t              max_dist,
  output logic [$clog2(N):0] count,
  output idx_t               e_idx  [N],
  output dist_t              e_dist [N],
  output logic [N-1:0]       e_valid
);
  localparam int SW = $clog2(N);
  logic [SW-1:0] free_slot, rm_slot;
  logic          has_free, rm_found, rm_fin, rm_busy;

  rmf #(.N(N), .PER_CYCLE(2)) u_rmf (
    .clk, .rst_n, .start(rm_start), .dval(e_dist), .valid(e_valid),
    .slot(rm_slot), .found(rm_found), .done(rm_fin)
  );

  always_comb begin
    free_slot = '0;
    has_free  = 1'b0;
    for (int i = N - 1; i >= 0; i--)
      if (!e_valid[i]) begin
        free_slot = SW'(i);
        has_free  = 1'b1;
      end
    max_dist = '0;
    for (int i = 0; i < N; i++)
      if (e_valid[i] && e_dist[i] > max_dist) max_dist = e_dist[i];
  end

  assign count = ($clog2(N)+1)'($countones(e_valid));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid <= '0;
      rm_done <= 1'b0;
      rm_busy <= 1'b0;
      for (int i = 0; i < N; i++) begin
        e_idx[i]  <= '0;
        e_dist[i] <= '0;
      end
    end else begin
      rm_done <= 1'b0;
      if (rm_start) rm_busy <= 1'b1;
      if (clear) begin
        e_valid <= '0;
      end else if (ins && has_free) begin
        e_valid[free_slot] <= 1'b1;
        e_idx[free_slot]   <= ins_idx;
        e_dist[free_slot]  <= ins_dist;
      end
      if (rm_fin) begin
        if (rm_found) e_valid[rm_slot] <= 1'b0;
        rm_done <= 1'b1;
        rm_busy <= 1'b0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(ins && rm_busy))
    else $error("final_list: insert during a removal");
endmodule
