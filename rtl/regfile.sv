// regfile: register files feeding the distance units.
//
// Holds the operands of Dist.L and Dist.H as 24 rows of 16 32-bit words, written a
// whole row at a time by the two Move units (ports A and B, in parallel):
//   row 0       indices of the current batch of 16 neighbours
//   rows 1..15  their 15-dimensional vectors, point after point (240 words)
//   rows 16..23 one 128-dimensional vector
// The query, in both its 128- and 15-dimensional forms, is written word by word by the
// host before a search. Outputs are the views the distance units use. This row map
// is this implementation's choice; the published design gives only the register
// files' purpose (temporary data sized by the 15 and 128 dimensions).
// Timing: writes take effect at the next clock edge; if both ports address the same
// row, port B wins.
module regfile
  import phnsw_pkg::*;
#(
  parameter int ROWS = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we_a,
  input  logic [$clog2(ROWS)-1:0] row_a,
  input  row_t                    data_a,
  input  logic                    we_b,
  input  logic [$clog2(ROWS)-1:0] row_b,
  input  row_t                    data_b,
  input  logic                    q_we,
  input  logic                    q_hi,        // 1: 128-dim query, 0: 15-dim query
  input  logic [6:0]              q_addr,
  input  elem_t                   q_data,
  output elem_t                   q_high [D_HIGH],
  output elem_t                   q_low  [D_LOW],
  output idx_t                    lo_idx [N_SORT],
  output elem_t                   lo_pts [N_SORT][D_LOW],
  output elem_t                   hi_vec [D_HIGH]
);
  localparam int LO_ROW = 1;
  localparam int HI_ROW = 16;
  row_t rows [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) rows[r] <= '0;
      for (int d = 0; d < D_HIGH; d++) q_high[d] <= '0;
      for (int d = 0; d < D_LOW; d++)  q_low[d]  <= '0;
    end else begin
      if (we_a) rows[row_a] <= data_a;
      if (we_b) rows[row_b] <= data_b;
      if (q_we) begin
        if (q_hi) q_high[q_addr] <= q_data;
        else if (int'(q_addr) < D_LOW) q_low[q_addr[3:0]] <= q_data;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N_SORT; i++) begin
      lo_idx[i] = rows[0][32*i +: 32];
      for (int d = 0; d < D_LOW; d++) begin
        int w;
        w = 16 * LO_ROW + D_LOW * i + d;
        lo_pts[i][d] = rows[w / 16][32 * (w % 16) +: 32];
      end
    end
    for (int d = 0; d < D_HIGH; d++)
      hi_vec[d] = rows[HI_ROW + d / 16][32 * (d % 16) +: 32];
  end
endmodule
