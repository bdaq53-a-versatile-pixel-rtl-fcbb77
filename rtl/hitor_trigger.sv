// hitor_trigger: self-trigger state machine driven by the chip's HitOr lines.
//
// HitOr is the OR of all pixel discriminators of a chip (RD53A has 4 lines).
// The enabled lines (mask) are ORed, synchronised by two flops and edge
// detected. A rising edge that is not vetoed is accepted: it starts the veto
// window (VETO clocks, during which further edges are ignored and counted as
// vetoed) and enters a delay line, so that trig_out pulses exactly DELAY+3
// clocks after the HitOr edge at the input (2 synchroniser clocks, 1 edge
// register, DELAY line clocks). The delay sets when the trigger command meets
// the chip's trigger latency buffer. The delay line holds one bit per clock,
// so several accepted hits can be in flight when VETO < DELAY.
// Registers (offsets from BASEADDR): 0 bit0 enable, bits 7:4 HitOr mask;
// 1 DELAY (0..MAX_DELAY-1 clocks); 2,3 VETO (16 bit, clocks); 4,5 R accepted
// count; 6,7 R vetoed count (16 bit, wrap).
// From the paper: triggers generated from HitOr pulses, sent to the chip with
// the correct latency, with a configurable veto. Synchroniser, delay line and
// registers are this design's choices.
module hitor_trigger
  import bdaq_pkg::*;
#(
  parameter logic [15:0] BASEADDR  = HTRIG_BASE,
  parameter int unsigned MAX_DELAY = 256
) (
  input  logic       clk,
  input  logic       rst,
  input  bus_req_t   bus,
  output logic [7:0] rdata,
  input  logic [3:0] hitor,
  output logic       trig_out
);
  logic        enable;
  logic [3:0]  mask;
  logic [7:0]  delay;
  logic [15:0] veto_len, veto_cnt, acc_cnt, vet_cnt;
  logic [1:0]  sync;
  logic        hit_d, edge_q, accept;
  logic [MAX_DELAY-1:0] dline;

  always_ff @(posedge clk) begin
    if (rst) begin
      sync   <= '0;
      hit_d  <= 1'b0;
      edge_q <= 1'b0;
    end else begin
      sync   <= {sync[0], |(hitor & mask)};
      hit_d  <= sync[1];
      edge_q <= sync[1] && !hit_d;
    end
  end

  assign accept = edge_q && enable && veto_cnt == '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      veto_cnt <= '0;
      dline    <= '0;
      acc_cnt  <= '0;
      vet_cnt  <= '0;
    end else begin
      dline <= {dline[MAX_DELAY-2:0], accept};
      if (accept) begin
        veto_cnt <= veto_len;
        acc_cnt  <= acc_cnt + 16'd1;
      end else begin
        if (veto_cnt != '0) veto_cnt <= veto_cnt - 16'd1;
        if (edge_q && enable) vet_cnt <= vet_cnt + 16'd1;
      end
    end
  end

  assign trig_out = (delay == 8'd0) ? accept : dline[delay - 8'd1];

  logic sel;
  logic [3:0] off;
  assign sel = bus.addr[15:4] == BASEADDR[15:4];
  assign off = bus.addr[3:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      enable   <= 1'b0;
      mask     <= 4'hF;
      delay    <= '0;
      veto_len <= '0;
      rdata    <= '0;
    end else begin
      if (bus.wr && sel) begin
        unique case (off)
          4'd0: {mask, enable} <= {bus.wdata[7:4], bus.wdata[0]};
          4'd1: delay <= bus.wdata;
          4'd2: veto_len[7:0]  <= bus.wdata;
          4'd3: veto_len[15:8] <= bus.wdata;
          default: ;
        endcase
      end
      rdata <= '0;
      if (bus.rd && sel) begin
        unique case (off)
          4'd0:    rdata <= {mask, 3'd0, enable};
          4'd1:    rdata <= delay;
          4'd2:    rdata <= veto_len[7:0];
          4'd3:    rdata <= veto_len[15:8];
          4'd4:    rdata <= acc_cnt[7:0];
          4'd5:    rdata <= acc_cnt[15:8];
          4'd6:    rdata <= vet_cnt[7:0];
          4'd7:    rdata <= vet_cnt[15:8];
          default: rdata <= '0;
        endcase
      end
    end
  end

  initial assert (MAX_DELAY == 256) else $error("hitor_trigger: the 8-bit DELAY register needs MAX_DELAY = 256");
endmodule
