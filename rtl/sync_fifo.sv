// sync_fifo: first-in first-out buffer in block RAM, one clock.
//
// Used once per receiver lane and once as the common output buffer in front
// of the Ethernet transmit path. The storage array is written and read
// synchronously, so it maps onto block RAM. The read side is first-word
// fall-through: a word sits on dout with dout_valid high and leaves when the
// reader raises rd_ready in the same cycle (valid/ready handshake). A word
// written into an empty FIFO appears on dout two cycles later. The writer must
// not write while full is high; such a write is dropped and counted by
// overflow. level counts every word held, including the one on dout.
// The buffer function comes from the paper; depth, width, the handshake and
// the overflow behaviour are this design's choices.
module sync_fifo #(
  parameter int unsigned WIDTH = 72,
  parameter int unsigned DEPTH = 8192
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           din,
  output logic                       full,
  output logic [WIDTH-1:0]           dout,
  output logic                       dout_valid,
  input  logic                       rd_ready,
  output logic [$clog2(DEPTH+2)-1:0] level,
  output logic                       overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      mem_count;
  logic             do_wr, do_load;

  assign full    = (mem_count == (AW+1)'(DEPTH));
  assign do_wr   = wr_en && !full;
  assign do_load = (mem_count != '0) && (!dout_valid || rd_ready);

  always_ff @(posedge clk) begin
    if (do_wr)   mem[wptr] <= din;
    if (do_load) dout      <= mem[rptr];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr       <= '0;
      rptr       <= '0;
      mem_count  <= '0;
      dout_valid <= 1'b0;
      overflow   <= 1'b0;
    end else begin
      if (do_wr)   wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_load) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      mem_count <= mem_count + (AW+1)'(do_wr) - (AW+1)'(do_load);
      if (do_load)       dout_valid <= 1'b1;
      else if (rd_ready) dout_valid <= 1'b0;
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  assign level = $bits(level)'(mem_count) + $bits(level)'(dout_valid);

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two");
endmodule
