// rmf: furthest-entry finder of the final list (RMF, "remove from F-list").
//
// Scans the N slots of the final list PER_CYCLE slots per clock and reports the slot
// with the largest distance, which the final list then frees. With the defaults
// (16 slots, 2 per clock) the scan takes the 8 cycles the published instruction
// table gives RMF; the slot count and scan width are this implementation's choice.
// Ties resolve to the lowest slot.
//
// Interface: pulse `start`; `dval`/`valid` must stay stable until `done`.
// Timing: `done` pulses N/PER_CYCLE cycles after `start` with `slot` and `found`.
module rmf
  import phnsw_pkg::*;
#(
  parameter int N         = 16,
  parameter int PER_CYCLE = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  dist_t                 dval [N],
  input  logic  [N-1:0]         valid,
  output logic  [$clog2(N)-1:0] slot,
  output logic                  found,
  output logic                  done
);
  localparam int STEPS = N / PER_CYCLE;
  localparam int CW    = (STEPS > 1) ? $clog2(STEPS) : 1;
  localparam int SW    = $clog2(N);

  logic          busy;
  logic [CW-1:0] s;
  dist_t         best, nbest;
  logic [SW-1:0] nslot;
  logic          nfound;

  // Fold this cycle's slots into the running maximum.
  always_comb begin
    nbest  = best;
    nslot  = slot;
    nfound = found;
    for (int p = 0; p < PER_CYCLE; p++) begin
      int i;
      i = int'(s) * PER_CYCLE + p;
      if (valid[i] && (!nfound || dval[i] > nbest)) begin
        nbest  = dval[i];
        nslot  = SW'(i);
        nfound = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      s     <= '0;
      best  <= '0;
      slot  <= '0;
      found <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy  <= 1'b1;
        s     <= '0;
        best  <= '0;
        slot  <= '0;
        found <= 1'b0;
      end else if (busy) begin
        best  <= nbest;
        slot  <= nslot;
        found <= nfound;
        if (int'(s) == STEPS - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        s <= s + 1'b1;
      end
    end
  end
endmodule
