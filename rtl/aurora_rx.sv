// aurora_rx: receiver for one Aurora 64b/66b data lane of an RD53 chip.
//
// The transceiver (GTX) recovers the serial lane at 640 Mbit/s or 1.28 Gbit/s
// and hands over parallel words of W bits (rx_valid high once per word; for a
// 1.28 Gbit/s lane, W = 32 and a 160 MHz core clock, one word every 4th
// clock). Inside:
//   gearbox     collects the words and cuts them into 66-bit blocks
//               {2-bit sync header, 64-bit payload}; the earliest bit of a
//               word is rx_data[W-1], and header and payload go MSB first.
//               A slip request drops one bit to move the block boundary.
//   block sync  while unlocked, every block whose header is neither 01 nor 10
//               causes a slip; LOCK_COUNT valid headers in a row give lock.
//               While locked, BAD_LIMIT invalid headers within a window of 64
//               blocks drop the lock.
//   descrambler self-synchronous, polynomial x^58 + x^39 + 1, over the
//               payload bits in transmission order.
//   decoder     header 01: data frame; header 10: control frame whose first
//               payload byte is the block type; idle blocks (type 0x78) are
//               dropped, all other control frames are passed on as user-K
//               frames (the chip sends register read-back in them).
// Frames leave on frame_valid/frame_userk/frame_data, one cycle after the
// block is cut, only while locked and enabled. There is no back-pressure: the
// lane FIFO behind it must keep up (a 66-bit block takes >= 2 words).
//
// Registers (offsets from BASEADDR): 0 bit0 enable (RW, 1 after reset),
// bit1 locked (R), bit2 overflow of the lane FIFO behind it (R, input); 1 R header-error count (saturating, write clears);
// 2,3 R received frame count (16 bit, wraps).
// From the paper: Aurora receivers on the transceiver channels, one per lane.
// Gearbox, lock rules (those of the 64b/66b standard), bit order, the idle
// filter and the registers are this design's choices.
module aurora_rx
  import bdaq_pkg::*;
#(
  parameter logic [15:0] BASEADDR   = RX_BASE,
  parameter int unsigned W          = 32,
  parameter int unsigned LOCK_COUNT = 64,
  parameter int unsigned BAD_LIMIT  = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  bus_req_t    bus,
  output logic [7:0]  rdata,
  input  logic [W-1:0] rx_data,
  input  logic        rx_valid,
  input  logic        fifo_overflow,
  output logic        frame_valid,
  output logic        frame_userk,
  output logic [63:0] frame_data,
  output logic        locked
);
  localparam int unsigned GB = 66 + W;  // gearbox capacity
  localparam int unsigned CW = $clog2(GB + 1);

  // ---------------- gearbox ----------------
  logic [GB-1:0] gbuf, gbuf_n;
  logic [CW-1:0] gcnt, gcnt_n;
  logic          slip;
  logic          blk_valid_n, blk_valid;
  logic [65:0]   blk_n, blk;

  always_comb begin
    gbuf_n      = gbuf;
    gcnt_n      = gcnt;
    blk_valid_n = 1'b0;
    blk_n       = '0;
    if (slip && gcnt_n != '0) gcnt_n = gcnt_n - 1'b1;
    if (rx_valid) begin
      gbuf_n = {gbuf_n[GB-W-1:0], rx_data};
      gcnt_n = gcnt_n + CW'(W);
    end
    if (gcnt_n >= CW'(66)) begin
      blk_n       = 66'(gbuf_n >> (gcnt_n - CW'(66)));
      blk_valid_n = 1'b1;
      gcnt_n      = gcnt_n - CW'(66);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      gbuf      <= '0;
      gcnt      <= '0;
      blk_valid <= 1'b0;
      blk       <= '0;
    end else begin
      gbuf      <= gbuf_n;
      gcnt      <= gcnt_n;
      blk_valid <= blk_valid_n;
      blk       <= blk_n;
    end
  end

  // ---------------- block synchronisation ----------------
  logic        hdr_ok;
  logic [$clog2(LOCK_COUNT+1)-1:0] good_cnt;
  logic [$clog2(BAD_LIMIT+1)-1:0]  bad_cnt;
  logic [5:0]  win_cnt;
  logic        enable;
  logic [7:0]  err_cnt;
  logic [15:0] frame_cnt;

  assign hdr_ok = (blk[65:64] == AURORA_HDR_DATA) || (blk[65:64] == AURORA_HDR_CTRL);

  always_ff @(posedge clk) begin
    if (rst) begin
      locked   <= 1'b0;
      good_cnt <= '0;
      bad_cnt  <= '0;
      win_cnt  <= '0;
      slip     <= 1'b0;
    end else begin
      slip <= 1'b0;
      if (blk_valid) begin
        if (!locked) begin
          if (hdr_ok) begin
            if (good_cnt == $bits(good_cnt)'(LOCK_COUNT - 1)) begin
              locked  <= 1'b1;
              bad_cnt <= '0;
              win_cnt <= '0;
            end
            good_cnt <= good_cnt + 1'b1;
          end else begin
            good_cnt <= '0;
            slip     <= 1'b1;
          end
        end else begin
          win_cnt <= win_cnt + 6'd1;
          if (!hdr_ok) begin
            if (bad_cnt == $bits(bad_cnt)'(BAD_LIMIT - 1)) begin
              locked   <= 1'b0;
              good_cnt <= '0;
            end
            bad_cnt <= bad_cnt + 1'b1;
          end else if (win_cnt == 6'd63) begin
            bad_cnt <= '0;
          end
        end
      end
    end
  end

  // ---------------- descrambler ----------------
  logic [57:0] scr, scr_n;
  logic [63:0] plain;

  always_comb begin
    scr_n = scr;
    for (int i = 63; i >= 0; i--) begin
      plain[i] = blk[i] ^ scr_n[38] ^ scr_n[57];
      scr_n    = {scr_n[56:0], blk[i]};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) scr <= '0;
    else if (blk_valid) scr <= scr_n;
  end

  // ---------------- frame decoder ----------------
  logic is_ctrl, is_idle;
  assign is_ctrl = blk[65:64] == AURORA_HDR_CTRL;
  assign is_idle = is_ctrl && plain[63:56] == AURORA_BTF_IDLE;

  always_ff @(posedge clk) begin
    if (rst) begin
      frame_valid <= 1'b0;
      frame_userk <= 1'b0;
      frame_data  <= '0;
    end else begin
      frame_valid <= blk_valid && locked && hdr_ok && !is_idle && enable;
      frame_userk <= is_ctrl;
      frame_data  <= plain;
    end
  end

  // ---------------- bus registers ----------------
  logic sel;
  logic [3:0] off;
  assign sel = bus.addr[15:4] == BASEADDR[15:4];
  assign off = bus.addr[3:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      enable    <= 1'b1;
      err_cnt   <= '0;
      frame_cnt <= '0;
      rdata     <= '0;
    end else begin
      if (blk_valid && locked && !hdr_ok && err_cnt != 8'hFF) err_cnt <= err_cnt + 8'd1;
      if (frame_valid) frame_cnt <= frame_cnt + 16'd1;
      if (bus.wr && sel && off == 4'd0) enable <= bus.wdata[0];
      if (bus.wr && sel && off == 4'd1) err_cnt <= '0;
      rdata <= '0;
      if (bus.rd && sel) begin
        unique case (off)
          4'd0:    rdata <= {5'd0, fifo_overflow, locked, enable};
          4'd1:    rdata <= err_cnt;
          4'd2:    rdata <= frame_cnt[7:0];
          4'd3:    rdata <= frame_cnt[15:8];
          default: rdata <= '0;
        endcase
      end
    end
  end

  initial assert (W >= 2 && W <= 64) else $error("aurora_rx: W out of range");
endmodule
