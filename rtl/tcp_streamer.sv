// tcp_streamer: moves the common FIFO into the TCP transmit port of the
// Ethernet core and reports the FIFO state on the control bus.
//
// Each 72-bit tagged word is sent as 9 bytes, most significant byte first
// (so the header byte {type, channel} leads). A byte is written (tcp_tx_wr
// with tcp_tx_data) in every clock in which a TCP connection is open and the
// core's transmit buffer is not full, so a word takes 9 clocks at best. The
// next word is taken from the FIFO (rd_ready) in the clock its last byte is
// written, so a full FIFO drains without gaps.
// Registers (offsets from BASEADDR): 0,1 R FIFO level (16 bit);
// 2 R bit0 FIFO overflow seen; 4..7 R bytes sent (32 bit, wraps).
// From the paper: data leave the common FIFO over TCP. Byte order, the
// register map and the transmit handshake (that of the SiTCP core) are this
// design's choices.
module tcp_streamer
  import bdaq_pkg::*;
#(
  parameter logic [15:0] BASEADDR = FIFO_BASE,
  parameter int unsigned LW       = 14
) (
  input  logic        clk,
  input  logic        rst,
  input  bus_req_t    bus,
  output logic [7:0]  rdata,
  input  daq_word_t   fifo_dout,
  input  logic        fifo_valid,
  output logic        fifo_ready,
  input  logic [LW-1:0] fifo_level,
  input  logic        fifo_overflow,
  input  logic        tcp_open,
  input  logic        tcp_tx_full,
  output logic        tcp_tx_wr,
  output logic [7:0]  tcp_tx_data
);
  logic [3:0]  bidx;
  logic        can_send;
  logic [31:0] sent;
  logic [71:0] wbits;

  assign wbits      = fifo_dout;
  assign can_send   = fifo_valid && tcp_open && !tcp_tx_full;
  assign tcp_tx_wr  = can_send;
  assign tcp_tx_data = wbits[71 - 8*bidx -: 8];
  assign fifo_ready = can_send && bidx == 4'(DAQ_WORD_BYTES - 1);

  always_ff @(posedge clk) begin
    if (rst) begin
      bidx <= '0;
      sent <= '0;
    end else if (can_send) begin
      bidx <= (bidx == 4'(DAQ_WORD_BYTES - 1)) ? '0 : bidx + 4'd1;
      sent <= sent + 32'd1;
    end
  end

  logic sel;
  logic [3:0] off;
  logic [15:0] lvl16;
  assign sel   = bus.addr[15:4] == BASEADDR[15:4];
  assign off   = bus.addr[3:0];
  assign lvl16 = 16'(fifo_level);

  always_ff @(posedge clk) begin
    if (rst) rdata <= '0;
    else begin
      rdata <= '0;
      if (bus.rd && sel) begin
        unique case (off)
          4'd0:    rdata <= lvl16[7:0];
          4'd1:    rdata <= lvl16[15:8];
          4'd2:    rdata <= {7'd0, fifo_overflow};
          4'd4:    rdata <= sent[7:0];
          4'd5:    rdata <= sent[15:8];
          4'd6:    rdata <= sent[23:16];
          4'd7:    rdata <= sent[31:24];
          default: rdata <= '0;
        endcase
      end
    end
  end

  // a word must stay on the FIFO output until its last byte is sent
  a_word_held: assert property (@(posedge clk) disable iff (rst)
    (bidx != '0) |-> fifo_valid);
endmodule
