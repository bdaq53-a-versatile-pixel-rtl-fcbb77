// tlu_controller: trigger input stage for an external Trigger Logic Unit (TLU)
// and for the HitOr self-trigger.
//
// Accepted triggers leave as a one-clock pulse on trig_out (to the command
// encoder, which turns it into an RD53 trigger command) and as a 64-bit
// trigger word {time stamp[31:0], trigger number[31:0]} for the data stream
// (word_valid/word_ready). The time stamp is a free-running clock counter.
// The TLU inputs pass a two-flop synchroniser first (2 clocks latency).
// Three TLU handshake modes (register 0, bits 1:0):
//   0 no handshake   every rising edge of tlu_trigger is a trigger; the
//                    number is the internal trigger counter.
//   1 simple         on the rising edge the trigger is sent and tlu_busy is
//                    raised; busy falls once tlu_trigger is low again and
//                    veto is low.
//   2 trigger data   as 1, but after tlu_trigger has fallen the controller
//                    clocks NBITS bits of the TLU trigger number out of the
//                    TLU: tlu_clock pulses with CLKDIV clocks high and CLKDIV
//                    low, the bit on tlu_trigger is sampled at each falling
//                    edge, LSB first. The word then carries that number; busy
//                    falls after the last bit (and while veto is low).
// The self-trigger (self_trig, a one-clock pulse) is accepted in the idle
// state when enabled and veto is low, and numbered with the internal counter.
// A trigger word that is still waiting when the next one is made is replaced
// and counted as lost.
// Registers (offsets from BASEADDR): 0 bits1:0 mode, bit2 TLU enable,
// bit3 self-trigger enable; 1 NBITS (1..31, default 15); 2 CLKDIV (default 8);
// 4..7 R accepted trigger count; 8 R lost trigger words (saturating).
// From the paper: a TLU controller supporting the three handshake methods of
// the TLU, and triggers from the HitOr. Bit timing, register map and word
// layout are this design's choices.
module tlu_controller
  import bdaq_pkg::*;
#(
  parameter logic [15:0] BASEADDR = TLU_BASE
) (
  input  logic        clk,
  input  logic        rst,
  input  bus_req_t    bus,
  output logic [7:0]  rdata,
  input  logic        tlu_trigger,
  output logic        tlu_busy,
  output logic        tlu_clock,
  input  logic        self_trig,
  input  logic        veto,
  output logic        trig_out,
  output logic        word_valid,
  input  logic        word_ready,
  output logic [63:0] word_payload
);
  typedef enum logic [1:0] {M_NONE = 2'd0, M_SIMPLE = 2'd1, M_DATA = 2'd2} mode_t;
  typedef enum logic [2:0] {S_IDLE, S_WAIT_LOW, S_CLK_HI, S_CLK_LO, S_RELEASE} state_t;

  logic [1:0]  mode_q;
  logic        tlu_en, self_en;
  logic [4:0]  nbits;
  logic [7:0]  clkdiv;
  logic [31:0] trig_cnt, tstamp, tlu_num, stamp_q;
  logic [7:0]  lost;
  logic [4:0]  bit_i;
  logic [7:0]  div_cnt;
  logic [1:0]  sync;
  logic        trig_s, trig_d;
  state_t      state;
  logic        new_word;
  logic [63:0] new_payload;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync   <= '0;
      trig_d <= 1'b0;
      tstamp <= '0;
    end else begin
      sync   <= {sync[0], tlu_trigger};
      trig_d <= trig_s;
      tstamp <= tstamp + 32'd1;
    end
  end
  assign trig_s = sync[1];

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      tlu_busy   <= 1'b0;
      tlu_clock  <= 1'b0;
      trig_out   <= 1'b0;
      trig_cnt   <= '0;
      tlu_num    <= '0;
      stamp_q    <= '0;
      bit_i      <= '0;
      div_cnt    <= '0;
      new_word   <= 1'b0;
      new_payload <= '0;
    end else begin
      trig_out <= 1'b0;
      new_word <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (tlu_en && trig_s && !trig_d && !veto) begin
            trig_out <= 1'b1;
            trig_cnt <= trig_cnt + 32'd1;
            stamp_q  <= tstamp;
            if (mode_t'(mode_q) == M_NONE) begin
              new_word    <= 1'b1;
              new_payload <= {tstamp, trig_cnt};
            end else begin
              tlu_busy <= 1'b1;
              state    <= S_WAIT_LOW;
              if (mode_t'(mode_q) == M_SIMPLE) begin
                new_word    <= 1'b1;
                new_payload <= {tstamp, trig_cnt};
              end
            end
          end else if (self_en && self_trig && !veto) begin
            trig_out    <= 1'b1;
            trig_cnt    <= trig_cnt + 32'd1;
            new_word    <= 1'b1;
            new_payload <= {tstamp, trig_cnt};
          end
        end
        S_WAIT_LOW: begin
          if (!trig_s) begin
            if (mode_t'(mode_q) == M_DATA) begin
              state   <= S_CLK_HI;
              tlu_num <= '0;
              bit_i   <= '0;
              div_cnt <= '0;
              tlu_clock <= 1'b1;
            end else begin
              state <= S_RELEASE;
            end
          end
        end
        S_CLK_HI: begin
          div_cnt <= div_cnt + 8'd1;
          if (div_cnt == clkdiv - 8'd1) begin
            // falling edge of tlu_clock: sample the bit the TLU presents
            tlu_clock <= 1'b0;
            tlu_num[bit_i] <= trig_s;
            div_cnt <= '0;
            state   <= S_CLK_LO;
          end
        end
        S_CLK_LO: begin
          div_cnt <= div_cnt + 8'd1;
          if (div_cnt == clkdiv - 8'd1) begin
            div_cnt <= '0;
            if (bit_i == nbits - 5'd1) begin
              new_word    <= 1'b1;
              new_payload <= {stamp_q, tlu_num};
              state       <= S_RELEASE;
            end else begin
              bit_i     <= bit_i + 5'd1;
              tlu_clock <= 1'b1;
              state     <= S_CLK_HI;
            end
          end
        end
        S_RELEASE: begin
          if (!veto) begin
            tlu_busy <= 1'b0;
            state    <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // output word register
  always_ff @(posedge clk) begin
    if (rst) begin
      word_valid   <= 1'b0;
      word_payload <= '0;
      lost         <= '0;
    end else begin
      if (new_word) begin
        if (word_valid && !word_ready && lost != 8'hFF) lost <= lost + 8'd1;
        word_valid   <= 1'b1;
        word_payload <= new_payload;
      end else if (word_ready) begin
        word_valid <= 1'b0;
      end
    end
  end

  // bus registers
  logic sel;
  logic [3:0] off;
  assign sel = bus.addr[15:4] == BASEADDR[15:4];
  assign off = bus.addr[3:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      mode_q  <= '0;
      tlu_en  <= 1'b0;
      self_en <= 1'b0;
      nbits   <= 5'd15;
      clkdiv  <= 8'd8;
      rdata   <= '0;
    end else begin
      if (bus.wr && sel) begin
        unique case (off)
          4'd0: {self_en, tlu_en, mode_q} <= bus.wdata[3:0];
          4'd1: nbits  <= (bus.wdata[4:0] == '0) ? 5'd1 : bus.wdata[4:0];
          4'd2: clkdiv <= (bus.wdata == '0) ? 8'd1 : bus.wdata;
          default: ;
        endcase
      end
      rdata <= '0;
      if (bus.rd && sel) begin
        unique case (off)
          4'd0:    rdata <= {4'd0, self_en, tlu_en, mode_q};
          4'd1:    rdata <= {3'd0, nbits};
          4'd2:    rdata <= clkdiv;
          4'd4:    rdata <= trig_cnt[7:0];
          4'd5:    rdata <= trig_cnt[15:8];
          4'd6:    rdata <= trig_cnt[23:16];
          4'd7:    rdata <= trig_cnt[31:24];
          4'd8:    rdata <= lost;
          default: rdata <= '0;
        endcase
      end
    end
  end

  a_busy_in_handshake: assert property (@(posedge clk) disable iff (rst)
    (state == S_CLK_HI || state == S_CLK_LO) |-> tlu_busy);
endmodule
