// agu: address generation unit.
//
// Turns a point index into the byte address of its data in off-chip memory:
//   high-dim vector:      raw_base + idx * 512              (128 dims x 4 bytes)
//   neighbour-list entry: layer_base[layer] + idx * m * 64   (m indices + m 15-dim
//                                                             vectors, 64 bytes each)
// where m is 32 in layer 0 and 16 above. Each layer table has one entry slot per
// point index, a layout this implementation chooses; the published design gives the
// content of an entry (indices followed by PCA vectors) but not its placement.
// Timing: the address is registered; `ack` pulses one cycle after `req`.
module agu
  import phnsw_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        hi,
  input  idx_t        idx,
  input  logic [2:0]  layer,
  input  addr_t       layer_base [N_LAYERS],
  input  addr_t       raw_base,
  output addr_t       addr,
  output logic        ack
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr <= '0;
      ack  <= 1'b0;
    end else begin
      ack <= req;
      if (req) begin
        if (hi)               addr <= raw_base + (addr_t'(idx) << 9);
        else if (layer == 0)  addr <= layer_base[0] + (addr_t'(idx) << $clog2(M_L0 * 64));
        else                  addr <= layer_base[layer] + (addr_t'(idx) << $clog2(M_UP * 64));
      end
    end
  end
endmodule
