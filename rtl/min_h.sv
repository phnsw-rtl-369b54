// min_h: minimum finder over the candidate list (Min.H).
//
// Purely combinational: returns the slot holding the smallest distance among the
// occupied slots, so a nearest-candidate lookup completes within the one cycle the
// published instruction table gives Min.H. Ties resolve to the lowest slot (this
// implementation's choice). `any` is low when no slot is occupied.
module min_h
  import phnsw_pkg::*;
#(
  parameter int N = 64
) (
  input  dist_t                 dval [N],
  input  logic  [N-1:0]         valid,
  output logic  [$clog2(N)-1:0] min_slot,
  output logic                  any
);
  dist_t best;
  always_comb begin
    best     = DIST_MAX;
    min_slot = '0;
    any      = 1'b0;
    for (int i = 0; i < N; i++) begin
      if (valid[i] && (!any || dval[i] < best)) begin
        best     = dval[i];
        min_slot = ($clog2(N))'(i);
        any      = 1'b1;
      end
    end
  end
endmodule
