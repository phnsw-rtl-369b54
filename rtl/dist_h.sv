// dist_h: high-dimensional distance unit (Dist.H).
//
// Computes the squared Euclidean distance between the 128-dimensional query and one
// 128-dimensional point. Points are handled one after another, as in the published
// design; within a point LANES dimensions are summed per clock (16 by default, a
// choice of this implementation), so a point takes D/LANES accumulation steps.
//
// Interface: pulse `start` with `q` and `x` valid and stable until `done`.
// Timing: `done` pulses D/LANES+1 cycles after `start` (9 at the default: one cycle
// to clear the accumulator, then 8 steps); `dval` holds the result until the next
// `start`.
module dist_h
  import phnsw_pkg::*;
#(
  parameter int D     = D_HIGH,
  parameter int LANES = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  elem_t q[D],
  input  elem_t x[D],
  output dist_t dval,
  output logic  done
);
  localparam int STEPS = D / LANES;
  localparam int CW    = (STEPS > 1) ? $clog2(STEPS) : 1;
  logic          busy;
  logic [CW-1:0] s;
  dist_t         part;

  always_comb begin
    part = '0;
    for (int l = 0; l < LANES; l++)
      part = part + DIST_W'(sqdiff(x[int'(s)*LANES + l], q[int'(s)*LANES + l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      s    <= '0;
      dval <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        s    <= '0;
        dval <= '0;
      end else if (busy) begin
        dval <= dval + part;
        if (int'(s) == STEPS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        s <= s + 1'b1;
      end
    end
  end
endmodule
