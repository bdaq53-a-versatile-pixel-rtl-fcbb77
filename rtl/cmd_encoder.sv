// cmd_encoder: RD53 command stream generator.
//
// The chips receive one serial command line. Software fills a command memory
// over the control bus with the bytes of a command sequence (already encoded
// as 8-bit RD53 symbols, two per 16-bit frame), sets its length and a repeat
// count and starts it. The encoder runs with one output bit per clock (160 MHz
// clock -> 160 Mbit/s command line), MSB first, in 16-bit frames, so one frame
// spans 4 bunch crossings (BX) of the 40 MHz machine clock. At every frame
// boundary it chooses the next frame:
//   1. a trigger frame, if ext_trig was seen during the frame just sent and
//      triggers are enabled: {trigger symbol of the 4-bit BX pattern, tag
//      symbol}; each clock of the frame belongs to BX slot bcnt/4, the earliest
//      slot being the pattern MSB; the tag is a 5-bit counter;
//   2. the next frame of the command sequence, while one is running;
//   3. the sync frame 0x817E otherwise.
// A trigger pulse is therefore sent at most one frame (16 clocks) plus the
// remainder of its own frame after it arrived. A trigger frame delays the
// sequence by one frame and does not drop it.
//
// Registers (offsets from BASEADDR): 0 W bit0 start / R bit0 ready;
// 1 config bit0 trigger enable; 2,3 sequence size in bytes (low, high; an odd
// last byte is not sent); 4,5 repetitions (0 counts as 1); 6 R trigger tag;
// 0x800.. command memory, MEM_BYTES bytes, read and write.
// From the paper: an RD53-specific command encoder fed from the control bus,
// through which triggers from the TLU and HitOr paths reach the chip. The
// memory-driven sequencer, the register map, the memory size and the symbol
// tables (RD53A protocol) are this design's.
module cmd_encoder
  import bdaq_pkg::*;
#(
  parameter logic [15:0] BASEADDR  = CMD_BASE,
  parameter int unsigned MEM_BYTES = 2048
) (
  input  logic     clk,
  input  logic     rst,
  input  bus_req_t bus,
  output logic [7:0] rdata,
  input  logic     ext_trig,
  output logic     cmd_out,
  output logic     busy,
  output logic     trig_sent
);
  localparam int unsigned MW = $clog2(MEM_BYTES) - 1;  // frame index width

  // ---------------- bus registers ----------------
  logic        sel, mem_sel;
  logic [11:0] off;
  logic        trig_en;
  logic [15:0] size_q, reps_q;
  logic        start;
  logic [4:0]  tag;

  assign sel     = bus.addr[15:12] == BASEADDR[15:12];
  assign off     = bus.addr[11:0];
  assign mem_sel = sel && off[11] && ({2'b0, off[10:0]} < 13'(MEM_BYTES));

  logic [7:0] mem_hi [MEM_BYTES/2];
  logic [7:0] mem_lo [MEM_BYTES/2];
  logic [MW-1:0] bus_idx;
  logic [7:0]    bus_hi_q, bus_lo_q;
  logic          bus_odd_q, mem_rd_q;
  logic [7:0]    reg_rd_q;

  assign bus_idx = MW'(off[10:1]);

  always_ff @(posedge clk) begin
    if (bus.wr && mem_sel && !off[0]) mem_hi[bus_idx] <= bus.wdata;
    if (bus.wr && mem_sel &&  off[0]) mem_lo[bus_idx] <= bus.wdata;
    bus_hi_q <= mem_hi[bus_idx];
    bus_lo_q <= mem_lo[bus_idx];
  end

  logic running;

  always_ff @(posedge clk) begin
    if (rst) begin
      trig_en  <= 1'b0;
      size_q   <= '0;
      reps_q   <= '0;
      start    <= 1'b0;
      reg_rd_q <= '0;
      mem_rd_q <= 1'b0;
      bus_odd_q <= 1'b0;
    end else begin
      start    <= 1'b0;
      reg_rd_q <= '0;
      mem_rd_q <= bus.rd && mem_sel;
      bus_odd_q <= off[0];
      if (bus.wr && sel) begin
        unique case (off)
          12'h000: start <= bus.wdata[0];
          12'h001: trig_en <= bus.wdata[0];
          12'h002: size_q[7:0]  <= bus.wdata;
          12'h003: size_q[15:8] <= bus.wdata;
          12'h004: reps_q[7:0]  <= bus.wdata;
          12'h005: reps_q[15:8] <= bus.wdata;
          default: ;
        endcase
      end
      if (bus.rd && sel) begin
        unique case (off)
          12'h000: reg_rd_q <= {7'd0, !running};
          12'h001: reg_rd_q <= {7'd0, trig_en};
          12'h002: reg_rd_q <= size_q[7:0];
          12'h003: reg_rd_q <= size_q[15:8];
          12'h004: reg_rd_q <= reps_q[7:0];
          12'h005: reg_rd_q <= reps_q[15:8];
          12'h006: reg_rd_q <= {3'd0, tag};
          default: reg_rd_q <= '0;
        endcase
      end
    end
  end

  assign rdata = mem_rd_q ? (bus_odd_q ? bus_lo_q : bus_hi_q) : reg_rd_q;

  // ---------------- sequencer and serializer ----------------
  logic [3:0]    bcnt;
  logic [15:0]   shreg;
  logic [3:0]    pat;
  logic [3:0]    pat_now;
  logic [MW-1:0] rd_idx, word_idx;
  logic [15:0]   word_q;
  logic [15:0]   rep_cnt, reps_eff;
  logic [15:0]   nframes;
  logic          frame_end, word_ok, send_trig, send_word, last_frame;

  always_ff @(posedge clk) begin
    word_q   <= {mem_hi[rd_idx], mem_lo[rd_idx]};
    word_idx <= rd_idx;
  end

  assign nframes   = {1'b0, size_q[15:1]};
  assign reps_eff  = (reps_q == '0) ? 16'd1 : reps_q;
  assign frame_end = (bcnt == 4'd15);
  assign word_ok   = (word_idx == rd_idx);
  always_comb begin
    pat_now = pat;
    if (ext_trig && trig_en) pat_now[3 - bcnt[3:2]] = 1'b1;
  end
  assign send_trig  = frame_end && (pat_now != '0);
  assign send_word  = frame_end && !send_trig && running && word_ok;
  assign last_frame = (16'(rd_idx) == nframes - 16'd1);

  always_ff @(posedge clk) begin
    if (rst) begin
      bcnt      <= '0;
      shreg     <= SYNC_FRAME;
      pat       <= '0;
      tag       <= '0;
      running   <= 1'b0;
      rd_idx    <= '0;
      rep_cnt   <= '0;
      trig_sent <= 1'b0;
    end else begin
      bcnt      <= bcnt + 4'd1;
      trig_sent <= 1'b0;
      pat       <= frame_end ? '0 : pat_now;
      if (start && !running && nframes != '0) begin
        running <= 1'b1;
        rd_idx  <= '0;
        rep_cnt <= '0;
      end
      if (frame_end) begin
        if (send_trig) begin
          shreg     <= {trig_sym(pat_now), data_sym(tag)};
          tag       <= tag + 5'd1;
          trig_sent <= 1'b1;
        end else if (send_word) begin
          shreg <= word_q;
          if (last_frame) begin
            rd_idx <= '0;
            if (rep_cnt + 16'd1 >= reps_eff) running <= 1'b0;
            rep_cnt <= rep_cnt + 16'd1;
          end else begin
            rd_idx <= rd_idx + 1'b1;
          end
        end else begin
          shreg <= SYNC_FRAME;
        end
      end else begin
        shreg <= {shreg[14:0], 1'b0};
      end
    end
  end

  assign cmd_out = shreg[15];
  assign busy    = running;

  initial assert (MEM_BYTES <= 2048 && MEM_BYTES >= 4 && (MEM_BYTES & (MEM_BYTES - 1)) == 0)
    else $error("cmd_encoder: MEM_BYTES must be a power of two up to 2048");
endmodule
