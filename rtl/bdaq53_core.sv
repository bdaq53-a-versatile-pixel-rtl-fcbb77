// bdaq53_core: core firmware of the pixel readout system.
//
// Everything that is independent of the board's I/O: the bus master, the
// command encoder, N_LANES Aurora lane receivers with their FIFOs, the TLU
// controller, the HitOr trigger, the TDC, the I2C controller, the data merger,
// the common FIFO and the TCP streamer. The transceivers, the command output
// serialiser, the clock PLL and the Ethernet core stay outside; the core talks
// to them through plain ports, so it can also be placed in a simulation
// testbench next to a chip model. One clock (nominally 160 MHz) runs it all.
//
// Control: register accesses from the Ethernet core's UDP port (rbcp_*) go
// through bus_master onto one control bus; every slave answers reads with
// registered data that is zero unless addressed, and the core ORs the answers.
// Data: each lane receiver writes its frames into its own FIFO
// (LANE_FIFO_DEPTH words of 65 bits: user-K flag and payload); the data merger
// takes words from the lane FIFOs, the trigger words of the TLU controller and
// the TDC words, tags them with type and channel, and writes them into the
// common FIFO (OUT_FIFO_DEPTH words of 72 bits), which the TCP streamer sends
// to the PC. Triggers: the HitOr trigger feeds the TLU controller's
// self-trigger input; every trigger the TLU controller accepts goes to the
// command encoder as a trigger command. The TLU controller is vetoed while the
// common FIFO has fewer than VETO_MARGIN free words.
// Address map: see bdaq_pkg (lane n at RX_BASE + 16*n).
// The lane FIFOs' full and level outputs are left unconnected on purpose: a
// lane receiver cannot be stalled (the chip keeps sending), so a full lane FIFO
// only drops frames, which the sticky overflow flag in the lane's status
// register reports.
// The block set and the data and control flow follow the paper's functional
// block diagram; FIFO depths, clocking and the veto source are this design's.
module bdaq53_core
  import bdaq_pkg::*;
#(
  parameter int unsigned N_LANES         = 7,
  parameter int unsigned LANE_FIFO_DEPTH = 1024,
  parameter int unsigned OUT_FIFO_DEPTH  = 8192,
  parameter int unsigned CMD_MEM_BYTES   = 2048,
  parameter int unsigned VETO_MARGIN     = 64,
  parameter int unsigned I2C_CLK_DIV     = 400
) (
  input  logic        clk,
  input  logic        rst,
  // UDP register access (Ethernet core)
  input  logic        rbcp_act,
  input  logic [31:0] rbcp_addr,
  input  logic        rbcp_we,
  input  logic        rbcp_re,
  input  logic [7:0]  rbcp_wd,
  output logic        rbcp_ack,
  output logic [7:0]  rbcp_rd,
  // TCP data stream (Ethernet core)
  input  logic        tcp_open,
  input  logic        tcp_tx_full,
  output logic        tcp_tx_wr,
  output logic [7:0]  tcp_tx_data,
  // chip command line (to the output serialiser)
  output logic        cmd_out,
  // chip data lanes (from the transceivers)
  input  logic [31:0] rx_data [N_LANES],
  input  logic [N_LANES-1:0] rx_valid,
  // HitOr lines and their 640 MHz samples
  input  logic [3:0]  hitor,
  input  logic [3:0]  hitor_samples,
  // Trigger Logic Unit
  input  logic        tlu_trigger,
  output logic        tlu_busy,
  output logic        tlu_clock,
  // I2C to the reference clock (open drain)
  output logic        i2c_scl_oe,
  output logic        i2c_sda_oe,
  input  logic        i2c_sda_in,
  // status
  output logic [N_LANES-1:0] rx_locked,
  output logic        cmd_busy,
  output logic        trig_sent
);
  localparam int unsigned NS  = N_LANES + 2;
  localparam int unsigned OLW = $clog2(OUT_FIFO_DEPTH + 2);
  localparam int unsigned LLW = $clog2(LANE_FIFO_DEPTH + 2);

  bus_req_t   bus;
  logic [7:0] rd_cmd, rd_tlu, rd_htrig, rd_tdc, rd_i2c, rd_fifo, bus_rdata;
  logic [7:0] rd_rx [N_LANES];

  bus_master u_bus_master (
    .clk, .rst, .rbcp_act, .rbcp_addr, .rbcp_we, .rbcp_re, .rbcp_wd,
    .rbcp_ack, .rbcp_rd, .bus, .bus_rdata
  );

  always_comb begin
    bus_rdata = rd_cmd | rd_tlu | rd_htrig | rd_tdc | rd_i2c | rd_fifo;
    for (int i = 0; i < N_LANES; i++) bus_rdata |= rd_rx[i];
  end

  // ---------------- triggers and commands ----------------
  logic hit_trig, trig, veto;

  hitor_trigger #(.BASEADDR(HTRIG_BASE)) u_hitor_trigger (
    .clk, .rst, .bus, .rdata(rd_htrig), .hitor, .trig_out(hit_trig)
  );

  logic [NS-1:0] src_valid, src_ready, src_sub;
  logic [63:0]   src_payload [NS];

  tlu_controller #(.BASEADDR(TLU_BASE)) u_tlu (
    .clk, .rst, .bus, .rdata(rd_tlu), .tlu_trigger, .tlu_busy, .tlu_clock,
    .self_trig(hit_trig), .veto, .trig_out(trig),
    .word_valid(src_valid[N_LANES]), .word_ready(src_ready[N_LANES]),
    .word_payload(src_payload[N_LANES])
  );
  assign src_sub[N_LANES] = 1'b0;

  cmd_encoder #(.BASEADDR(CMD_BASE), .MEM_BYTES(CMD_MEM_BYTES)) u_cmd (
    .clk, .rst, .bus, .rdata(rd_cmd), .ext_trig(trig), .cmd_out,
    .busy(cmd_busy), .trig_sent
  );

  // ---------------- TDC ----------------
  tdc #(.BASEADDR(TDC_BASE)) u_tdc (
    .clk, .rst, .bus, .rdata(rd_tdc), .samples(hitor_samples),
    .word_valid(src_valid[N_LANES+1]), .word_ready(src_ready[N_LANES+1]),
    .word_payload(src_payload[N_LANES+1])
  );
  assign src_sub[N_LANES+1] = 1'b0;

  // ---------------- I2C ----------------
  i2c_master #(.BASEADDR(I2C_BASE), .CLK_DIV(I2C_CLK_DIV)) u_i2c (
    .clk, .rst, .bus, .rdata(rd_i2c), .scl_oe(i2c_scl_oe), .sda_oe(i2c_sda_oe),
    .sda_in(i2c_sda_in)
  );

  // ---------------- Aurora lanes ----------------
  for (genvar n = 0; n < N_LANES; n++) begin : g_lane
    logic        fv, fk;
    logic [63:0] fd;
    logic [64:0] lane_dout;
    logic        lane_full, lane_ovf;
    logic [LLW-1:0] lane_level;

    aurora_rx #(.BASEADDR(RX_BASE + 16'(16 * n))) u_rx (
      .clk, .rst, .bus, .rdata(rd_rx[n]), .rx_data(rx_data[n]),
      .rx_valid(rx_valid[n]), .fifo_overflow(lane_ovf), .frame_valid(fv), .frame_userk(fk),
      .frame_data(fd), .locked(rx_locked[n])
    );

    sync_fifo #(.WIDTH(65), .DEPTH(LANE_FIFO_DEPTH)) u_lane_fifo (
      .clk, .rst, .wr_en(fv), .din({fk, fd}), .full(lane_full),
      .dout(lane_dout), .dout_valid(src_valid[n]), .rd_ready(src_ready[n]),
      .level(lane_level), .overflow(lane_ovf)
    );
    assign src_sub[n]     = lane_dout[64];
    assign src_payload[n] = lane_dout[63:0];
  end

  // ---------------- merge, buffer, send ----------------
  logic      out_wr, out_full, out_valid, out_ready, out_ovf;
  daq_word_t out_din, out_dout;
  logic [OLW-1:0] out_level;

  data_merger #(.N_LANES(N_LANES)) u_merger (
    .clk, .rst, .src_valid, .src_sub, .src_payload, .src_ready,
    .fifo_wr(out_wr), .fifo_din(out_din), .fifo_full(out_full)
  );

  sync_fifo #(.WIDTH(72), .DEPTH(OUT_FIFO_DEPTH)) u_out_fifo (
    .clk, .rst, .wr_en(out_wr), .din(out_din), .full(out_full),
    .dout(out_dout), .dout_valid(out_valid), .rd_ready(out_ready),
    .level(out_level), .overflow(out_ovf)
  );

  assign veto = out_level > OLW'(OUT_FIFO_DEPTH - VETO_MARGIN);

  tcp_streamer #(.BASEADDR(FIFO_BASE), .LW(OLW)) u_tcp (
    .clk, .rst, .bus, .rdata(rd_fifo), .fifo_dout(out_dout),
    .fifo_valid(out_valid), .fifo_ready(out_ready), .fifo_level(out_level),
    .fifo_overflow(out_ovf), .tcp_open, .tcp_tx_full, .tcp_tx_wr, .tcp_tx_data
  );
endmodule
