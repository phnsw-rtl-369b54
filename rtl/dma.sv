// dma: burst reader from off-chip memory into the scratchpad.
//
// Reads `nbeats` consecutive 64-byte bursts starting at byte address `addr` and
// writes them to consecutive SPM rows starting at `row`. Requests go out on a
// valid/ready channel, one per accepted cycle, without waiting for data; the memory
// returns one 512-bit response per request, in request order, on `mem_rsp_valid`
// (no back-pressure on responses). The channel protocol is this implementation's
// choice; the published design only says the DMA fetches indices and raw data.
//
// Timing: `done` pulses in the cycle after the last response is written.
module dma
  import phnsw_pkg::*;
#(
  parameter int SPM_ROWS = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  addr_t                       addr,
  input  logic [$clog2(SPM_ROWS)-1:0] row,
  input  logic [$clog2(SPM_ROWS):0]   nbeats,
  output logic                        done,
  output logic                        mem_req_valid,
  input  logic                        mem_req_ready,
  output addr_t                       mem_req_addr,
  input  logic                        mem_rsp_valid,
  input  row_t                        mem_rsp_data,
  output logic                        spm_we,
  output logic [$clog2(SPM_ROWS)-1:0] spm_waddr,
  output row_t                        spm_wdata
);
  localparam int CW = $clog2(SPM_ROWS) + 1;
  logic          busy;
  addr_t         base;
  logic [CW-1:0] n, issued, recvd;
  logic [CW-2:0] row0;

  assign mem_req_valid = busy && (issued < n);
  assign mem_req_addr  = base + (addr_t'(issued) << 6);
  assign spm_we        = busy && mem_rsp_valid;
  assign spm_waddr     = row0 + recvd[CW-2:0];
  assign spm_wdata     = mem_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      base   <= '0;
      n      <= '0;
      issued <= '0;
      recvd  <= '0;
      row0   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= (nbeats != 0);
        done   <= (nbeats == 0);
        base   <= addr;
        n      <= nbeats;
        row0   <= row;
        issued <= '0;
        recvd  <= '0;
      end else if (busy) begin
        if (mem_req_valid && mem_req_ready) issued <= issued + 1'b1;
        if (mem_rsp_valid) begin
          recvd <= recvd + 1'b1;
          if (recvd == n - 1'b1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> busy && (recvd < issued))
    else $error("dma: response without an outstanding request");
endmodule
