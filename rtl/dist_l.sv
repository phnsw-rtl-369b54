// dist_l: low-dimensional distance unit (Dist.L).
//
// Computes the squared Euclidean distance between the 15-dimensional PCA query and
// the 15-dimensional vectors of LANES neighbours at once, one dimension per clock:
// each lane holds one subtract-square-accumulate datapath. Following the published
// design, the unit works on 16 neighbours in parallel; the one-dimension-per-cycle
// schedule is this implementation's choice.
//
// Interface: pulse `start` for one cycle with `q` and `pts` valid; both must stay
// stable until `done`. Timing: `done` pulses D+1 cycles after `start` (16 at the
// default: one cycle to clear the accumulators, then one per dimension), and `dval`
// then holds the result until the next `start`.
module dist_l
  import phnsw_pkg::*;
#(
  parameter int LANES = N_SORT,
  parameter int D     = D_LOW
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  elem_t q   [D],
  input  elem_t pts [LANES][D],
  output dist_t dval[LANES],
  output logic  done
);
  localparam int CW = (D > 1) ? $clog2(D) : 1;
  logic          busy;
  logic [CW-1:0] d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      d    <= '0;
      done <= 1'b0;
      for (int i = 0; i < LANES; i++) dval[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        d    <= '0;
        for (int i = 0; i < LANES; i++) dval[i] <= '0;
      end else if (busy) begin
        for (int i = 0; i < LANES; i++)
          dval[i] <= dval[i] + DIST_W'(sqdiff(pts[i][d], q[d]));
        if (int'(d) == D - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        d <= d + 1'b1;
      end
    end
  end
endmodule
