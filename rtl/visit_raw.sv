// visit_raw: visited list V (Visit&Raw unit).
//
// One bit per point of the database in a bitmap of N_POINTS bits (1M bits for the
// SIFT1M database in the published design), stored as 32-bit words. A test-and-set
// request reads the point's bit: if it is already set the answer comes after one
// cycle; otherwise the bit is written and the answer comes after two cycles, the
// "1 or 2 cycles" of the published instruction table. That instruction also covers
// reading raw data from the scratchpad; here the Move units do those reads, and
// this unit keeps only the visited state.
//
// Clearing (this implementation's choice; the published design does not say how V
// is reset between layers): every word that receives a bit is also written to a log
// of LOG_DEPTH entries. `clear` zeroes just the logged words, one per cycle; if the
// log overflowed, the whole bitmap is swept instead (N_POINTS/32 cycles). Reset
// starts with a full sweep, since the bitmap has no reset of its own.
//
// Interface: `tas` with `idx` is accepted when `busy` is low; `done` pulses with
// `visited` (the bit's value before the request). `clear` is accepted when `busy` is
// low and `busy` stays high until the bitmap is clean.
module visit_raw
  import phnsw_pkg::*;
#(
  parameter int N_POINTS  = 1 << 20,
  parameter int LOG_DEPTH = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  tas,
  input  idx_t  idx,
  output logic  visited,
  output logic  done,
  input  logic  clear,
  output logic  busy,
  output logic  swept          // pulses when a full sweep (reset or overflow) ends
);
  localparam int WORDS = N_POINTS / 32;
  localparam int WA    = $clog2(WORDS);
  localparam int LA    = $clog2(LOG_DEPTH);

  typedef enum logic [2:0] {SWEEP, REPLAY, IDLE, WRITE} state_e;
  state_e          state;
  logic [31:0]     bits [WORDS];
  logic [WA-1:0]   vlog [LOG_DEPTH];
  logic [LA:0]     log_cnt;
  logic            log_ovf;
  logic [WA-1:0]   ptr, pw;
  logic [4:0]      pb;
  logic [WA-1:0]   w;
  logic [4:0]      b;

  assign w    = idx[WA+4:5];
  assign b    = idx[4:0];
  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= SWEEP;
      ptr     <= '0;
      pw      <= '0;
      pb      <= '0;
      log_cnt <= '0;
      log_ovf <= 1'b0;
      visited <= 1'b0;
      done    <= 1'b0;
      swept   <= 1'b0;
    end else begin
      done  <= 1'b0;
      swept <= 1'b0;
      unique case (state)
        SWEEP: begin
          bits[ptr] <= '0;
          ptr       <= ptr + 1'b1;
          if (int'(ptr) == WORDS - 1) begin
            state   <= IDLE;
            log_cnt <= '0;
            log_ovf <= 1'b0;
            swept   <= 1'b1;
          end
        end
        REPLAY: begin
          if (log_cnt == 0) begin
            state <= IDLE;
          end else begin
            bits[vlog[LA'(log_cnt - 1'b1)]] <= '0;
            log_cnt <= log_cnt - 1'b1;
          end
        end
        IDLE: begin
          if (clear) begin
            ptr   <= '0;
            state <= log_ovf ? SWEEP : REPLAY;
          end else if (tas) begin
            if (bits[w][b]) begin
              visited <= 1'b1;
              done    <= 1'b1;
            end else begin
              pw    <= w;
              pb    <= b;
              state <= WRITE;
            end
          end
        end
        WRITE: begin
          bits[pw][pb] <= 1'b1;
          if (int'(log_cnt) < LOG_DEPTH) begin
            vlog[LA'(log_cnt)] <= pw;
            log_cnt <= log_cnt + 1'b1;
          end else begin
            log_ovf <= 1'b1;
          end
          visited <= 1'b0;
          done    <= 1'b1;
          state   <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
