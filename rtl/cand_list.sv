// cand_list: candidate list C of the layer search.
//
// Holds up to N (index, high-dim distance) pairs in registers. The nearest entry is
// found combinationally by a Min.H unit and is always visible on `min_*`; `pop`
// frees it. `ins` adds an entry in the lowest free slot. When the list is full, a new
// entry replaces the furthest one if it is nearer, and is dropped otherwise
// (`overflows` counts both cases). The capacity and this overflow policy are this
// implementation's choices; the published design does not size the list.
//
// Timing: `ins`, `pop` and `clear` act at the next clock edge; only one of them may
// be asserted per cycle.
module cand_list
  import phnsw_pkg::*;
#(
  parameter int N = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        ins,
  input  idx_t        ins_idx,
  input  dist_t       ins_dist,
  input  logic        pop,
  output idx_t        min_idx,
  output dist_t       min_dist,
  output logic        empty,
  output logic [$clog2(N):0] count,
  output logic [31:0] overflows
);
  localparam int SW = $clog2(N);
  idx_t          idx  [N];
  dist_t         dval [N];
  logic [N-1:0]  valid;
  logic [SW-1:0] min_slot, free_slot, max_slot;
  logic          any, has_free;

  min_h #(.N(N)) u_min (.dval(dval), .valid(valid), .min_slot(min_slot), .any(any));

  always_comb begin
    free_slot = '0;
    has_free  = 1'b0;
    for (int i = N - 1; i >= 0; i--)
      if (!valid[i]) begin
        free_slot = SW'(i);
        has_free  = 1'b1;
      end
    max_slot = '0;
    for (int i = 1; i < N; i++)
      if (dval[i] > dval[max_slot]) max_slot = SW'(i);
  end

  assign empty    = !any;
  assign min_idx  = idx[min_slot];
  assign min_dist = dval[min_slot];
  assign count    = ($clog2(N)+1)'($countones(valid));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid     <= '0;
      overflows <= '0;
      for (int i = 0; i < N; i++) begin
        idx[i]  <= '0;
        dval[i] <= '0;
      end
    end else if (clear) begin
      valid <= '0;
    end else if (ins) begin
      if (has_free) begin
        valid[free_slot] <= 1'b1;
        idx[free_slot]   <= ins_idx;
        dval[free_slot]  <= ins_dist;
      end else begin
        overflows <= overflows + 1;
        if (ins_dist < dval[max_slot]) begin
          idx[max_slot]  <= ins_idx;
          dval[max_slot] <= ins_dist;
        end
      end
    end else if (pop && any) begin
      valid[min_slot] <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(ins && pop))
    else $error("cand_list: insert and pop in the same cycle");
endmodule
