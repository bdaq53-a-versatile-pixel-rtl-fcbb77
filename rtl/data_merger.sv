// data_merger: tags the words of every data source and merges them into the
// common output FIFO.
//
// Sources 0..N_LANES-1 are the Aurora lane buffers; source N_LANES is the
// trigger (TLU) path and source N_LANES+1 the TDC. Each source offers a 64-bit
// payload with src_valid and takes src_ready; for a lane, src_sub marks a
// control (user-K) frame. The merger builds the 72-bit word
// {data type header, channel ID, payload}: lanes get type AURORA_DATA or
// AURORA_USERK and their lane number as channel ID, the trigger path type
// TRIGGER, the TDC type TDC (channel ID 0 for both). A round-robin arbiter
// grants one source per clock, starting its search after the source granted
// last, and only while the FIFO is not full; the write into the FIFO happens
// in the same cycle as src_ready (combinational grant, no extra latency).
// From the paper: words of the Aurora receivers and other modules are tagged
// with a data type header (Aurora words with a channel ID) before they are
// merged into one FIFO. The header codes and the round-robin order are this
// design's choices.
module data_merger
  import bdaq_pkg::*;
#(
  parameter int unsigned N_LANES = 7
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [N_LANES+1:0] src_valid,
  input  logic [N_LANES+1:0] src_sub,
  input  logic [63:0] src_payload [N_LANES+2],
  output logic [N_LANES+1:0] src_ready,
  output logic        fifo_wr,
  output daq_word_t   fifo_din,
  input  logic        fifo_full
);
  localparam int unsigned NS = N_LANES + 2;
  localparam int unsigned SW = $clog2(NS);

  logic [SW-1:0] last, pick;
  logic          found;

  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= NS; k++) begin
      int idx;
      idx = (int'(last) + k) % NS;
      if (!found && src_valid[idx]) begin
        found = 1'b1;
        pick  = SW'(idx);
      end
    end
  end

  always_comb begin
    src_ready = '0;
    fifo_wr   = found && !fifo_full;
    if (fifo_wr) src_ready[pick] = 1'b1;
    fifo_din.payload = src_payload[pick];
    if (int'(pick) < N_LANES) begin
      fifo_din.wtype = src_sub[pick] ? WT_AURORA_USERK : WT_AURORA_DATA;
      fifo_din.chan  = 4'(pick);
    end else if (int'(pick) == N_LANES) begin
      fifo_din.wtype = WT_TRIGGER;
      fifo_din.chan  = 4'd0;
    end else begin
      fifo_din.wtype = WT_TDC;
      fifo_din.chan  = 4'd0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) last <= SW'(NS - 1);
    else if (fifo_wr) last <= pick;
  end

  initial assert (N_LANES >= 1 && N_LANES <= 16) else $error("data_merger: N_LANES must be 1..16");
endmodule
