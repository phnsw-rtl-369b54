// spm: scratchpad buffer for data fetched from off-chip memory.
//
// ROWS rows of one 64-byte burst each. The DMA writes through the single write port;
// the two Move units read through two independent read ports (one per BUS), so both
// can stream rows in the same cycle. Reads are synchronous: data appears one cycle
// after the address. Rows 0..31 take a neighbour-list entry (indices and PCA
// vectors), rows 32..39 one 128-dimensional vector. The published design has a
// single 128 KB SPM that also holds the visited list; here the visited list is a
// separate array (visit_raw) and this buffer is sized for one entry plus one vector.
module spm
  import phnsw_pkg::*;
#(
  parameter int ROWS = 64
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  row_t                    wdata,
  input  logic [$clog2(ROWS)-1:0] raddr_a,
  output row_t                    rdata_a,
  input  logic [$clog2(ROWS)-1:0] raddr_b,
  output row_t                    rdata_b
);
  row_t mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end
endmodule
