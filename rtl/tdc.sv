// tdc: measures the length of HitOr pulses with 640 MHz sampling.
//
// An input deserialiser (outside the core) samples the HitOr line at 640 MHz
// and hands over S = 4 samples per 160 MHz clock; samples[S-1] is the
// earliest. The TDC walks through the samples in time order: a 0->1 step
// starts a pulse, every 1 sample inside it adds one unit of 1/640 MHz
// (1.5625 ns), and the 1->0 step ends it. The result word is
// {rising-edge time [31:0] in 1/640 MHz units, event number [15:0],
// overflow, 3'b0, width [11:0]}; widths above 4095 saturate and set the
// overflow bit. The word is offered on word_valid one clock after the clock
// holding the falling edge. If a second pulse ends in the same clock, or a word
// is still waiting when the next is made, the newer one replaces it and the
// loss is counted.
// Registers (offsets from BASEADDR): 0 bit0 enable; 1,2 R event count
// (16 bit); 3 R lost count (saturating).
// From the paper: the HitOr pulse width is sampled with a 640 MHz clock for a
// finer charge measurement than the chip's 4-bit ToT. Word layout, time stamp
// and loss handling are this design's choices.
module tdc
  import bdaq_pkg::*;
#(
  parameter logic [15:0] BASEADDR = TDC_BASE,
  parameter int unsigned S        = 4
) (
  input  logic         clk,
  input  logic         rst,
  input  bus_req_t     bus,
  output logic [7:0]   rdata,
  input  logic [S-1:0] samples,
  output logic         word_valid,
  input  logic         word_ready,
  output logic [63:0]  word_payload
);
  logic        enable;
  logic        in_pulse, prev;
  logic [11:0] width;
  logic        ovf;
  logic [31:0] fine_time, t_start;
  logic [15:0] evt;
  logic [7:0]  lost;

  // next-state of the sample walk
  logic        in_pulse_n, prev_n, ovf_n;
  logic [11:0] width_n;
  logic [31:0] t_start_n;
  logic [1:0]  ends;
  logic [11:0] done_width;
  logic        done_ovf;
  logic [31:0] done_start;

  always_comb begin
    in_pulse_n = in_pulse;
    prev_n     = prev;
    width_n    = width;
    ovf_n      = ovf;
    t_start_n  = t_start;
    ends       = '0;
    done_width = '0;
    done_ovf   = 1'b0;
    done_start = '0;
    for (int i = S - 1; i >= 0; i--) begin
      if (!in_pulse_n) begin
        if (samples[i] && !prev_n && enable) begin
          in_pulse_n = 1'b1;
          width_n    = 12'd1;
          ovf_n      = 1'b0;
          t_start_n  = fine_time + 32'(S - 1 - i);
        end
      end else if (samples[i]) begin
        if (width_n == 12'hFFF) ovf_n = 1'b1;
        else width_n = width_n + 12'd1;
      end else begin
        in_pulse_n = 1'b0;
        if (ends != 2'd3) ends = ends + 2'd1;
        done_width = width_n;
        done_ovf   = ovf_n;
        done_start = t_start_n;
      end
      prev_n = samples[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      in_pulse  <= 1'b0;
      prev      <= 1'b0;
      width     <= '0;
      ovf       <= 1'b0;
      t_start   <= '0;
      fine_time <= '0;
      evt       <= '0;
      lost      <= '0;
      word_valid   <= 1'b0;
      word_payload <= '0;
    end else begin
      in_pulse  <= in_pulse_n;
      prev      <= prev_n;
      width     <= width_n;
      ovf       <= ovf_n;
      t_start   <= t_start_n;
      fine_time <= fine_time + 32'(S);
      if (ends != '0) begin
        evt <= evt + 16'(ends);
        if ((ends > 2'd1 || (word_valid && !word_ready)) && lost != 8'hFF) lost <= lost + 8'd1;
        word_valid   <= 1'b1;
        word_payload <= {done_start, evt + 16'(ends) - 16'd1, done_ovf, 3'd0, done_width};
      end else if (word_ready) begin
        word_valid <= 1'b0;
      end
    end
  end

  logic sel;
  logic [3:0] off;
  assign sel = bus.addr[15:4] == BASEADDR[15:4];
  assign off = bus.addr[3:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      enable <= 1'b0;
      rdata  <= '0;
    end else begin
      if (bus.wr && sel && off == 4'd0) enable <= bus.wdata[0];
      rdata <= '0;
      if (bus.rd && sel) begin
        unique case (off)
          4'd0:    rdata <= {7'd0, enable};
          4'd1:    rdata <= evt[7:0];
          4'd2:    rdata <= evt[15:8];
          4'd3:    rdata <= lost;
          default: rdata <= '0;
        endcase
      end
    end
  end
endmodule
