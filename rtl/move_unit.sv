// move_unit: row mover from the scratchpad to the register files (Move).
//
// Copies `nrows` consecutive SPM rows starting at `src_row` into register-file rows
// starting at `dst_row`, one 512-bit row per clock over its own SPM read port and
// register-file write port. The design has two of these so that two transfers run in
// parallel, as in the published design; the row width is this implementation's
// choice.
//
// Timing: row t is read in cycle t+1 after `start` and written in cycle t+2; `done`
// is high together with the last write, nrows+1 cycles after `start`. `nrows` must
// not be zero.
module move_unit
  import phnsw_pkg::*;
#(
  parameter int SPM_ROWS = 64,
  parameter int RF_ROWS  = 24
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(SPM_ROWS)-1:0] src_row,
  input  logic [$clog2(RF_ROWS)-1:0]  dst_row,
  input  logic [$clog2(SPM_ROWS):0]   nrows,
  output logic                        done,     // combinational, with last write
  output logic [$clog2(SPM_ROWS)-1:0] spm_raddr,
  input  row_t                        spm_rdata,
  output logic                        rf_we,
  output logic [$clog2(RF_ROWS)-1:0]  rf_row,
  output row_t                        rf_data
);
  localparam int CW = $clog2(SPM_ROWS) + 1;
  logic                       busy, rd_d, last_d;
  logic [CW-1:0]              t, n;
  logic [$clog2(SPM_ROWS)-1:0] src;
  logic [$clog2(RF_ROWS)-1:0]  dst, dst_d;

  assign spm_raddr = src + t[CW-2:0];
  assign rf_we     = rd_d;
  assign rf_row    = dst_d;
  assign rf_data   = spm_rdata;
  assign done      = rd_d && last_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      rd_d  <= 1'b0;
      t     <= '0;
      n     <= '0;
      src   <= '0;
      dst   <= '0;
      dst_d <= '0;
      last_d <= 1'b0;
    end else begin
      rd_d   <= 1'b0;
      last_d <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        t    <= '0;
        n    <= nrows;
        src  <= src_row;
        dst  <= dst_row;
      end else if (busy) begin
        rd_d  <= 1'b1;                       // row src+t arrives next cycle
        dst_d <= dst + ($clog2(RF_ROWS))'(t);
        t     <= t + 1'b1;
        if (t == n - 1'b1) begin
          busy   <= 1'b0;
          last_d <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start && !busy |-> nrows != 0)
    else $error("move_unit: empty transfer");
endmodule
