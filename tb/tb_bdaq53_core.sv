// tb_bdaq53_core: end-to-end test of the readout core at its default size
// (7 lanes, 1024-word lane FIFOs, 8192-word common FIFO, 2048-byte command
// memory, 100 kHz I2C).
// Around the core: seven chip-lane models (Aurora 64b/66b, 1.28 Gbit/s, each
// starting at a different bit offset), a register-access driver for the UDP
// port, a TCP receiver that rebuilds the 9-byte words, a command-line frame
// decoder, an I2C target, a TLU and HitOr/TDC stimulus. Everything is
// configured through the UDP register port only. The test runs:
//   1. lock of all lanes, then 300 frames per lane (every 5th a user-K
//      frame) -> every frame arrives once, in order, with type and channel;
//   2. a command sequence from the command memory appears on the command line;
//   3. TLU triggers (no handshake, simple and trigger-data handshake) and a HitOr
//      self-trigger each give a trigger command on the command line and a
//      trigger word in the data stream;
//   4. a HitOr pulse on the TDC input gives a TDC word with its width;
//   5. an I2C write to the reference-clock chip;
//   6. TCP back-pressure: 1300 frames per lane while the TCP buffer is full
//      fill the common FIFO until the veto blocks a TLU trigger; after release
//      all frames arrive, none lost.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_bdaq53_core;
  import bdaq_pkg::*;
  localparam int NL = 7;
  logic clk = 1'b0, rst = 1'b1;
  always #3.125ns clk = ~clk;   // 160 MHz
  int checks = 0, failures = 0;

  logic        rbcp_act = 1'b0, rbcp_we = 1'b0, rbcp_re = 1'b0, rbcp_ack;
  logic [31:0] rbcp_addr = '0;
  logic [7:0]  rbcp_wd = '0, rbcp_rd;
  logic        tcp_open = 1'b1, tcp_tx_full = 1'b0, tcp_tx_wr;
  logic [7:0]  tcp_tx_data;
  logic        cmd_out;
  logic [31:0] rx_data [NL];
  logic [NL-1:0] rx_valid, rx_locked;
  logic [3:0]  hitor = '0, hitor_samples = '0;
  logic        tlu_trigger = 1'b0, tlu_busy, tlu_clock;
  logic        i2c_scl_oe, i2c_sda_oe, i2c_sda_in, t_sda_oe;
  logic        cmd_busy, trig_sent;

  bdaq53_core dut (.*);

  assign i2c_sda_in = !(i2c_sda_oe || t_sda_oe);
  i2c_target_model #(.ADDR(7'h68)) clkchip (.clk, .scl(!i2c_scl_oe), .sda(i2c_sda_in), .sda_oe(t_sda_oe));

  // ---------------- chip lanes ----------------
  int phase = 0;
  localparam int NFR1 = 300, NFR2 = 1300;
  for (genvar n = 0; n < NL; n++) begin : g_lane
    aurora_tx_model #(.PERIOD(4), .SEED(n + 3)) tx (.clk, .rx_data(rx_data[n]), .rx_valid(rx_valid[n]));
    initial begin
      tx.skip_bits(5 * n + 3);
      wait (phase == 1);
      for (int i = 0; i < NFR1; i++) begin
        if (i % 5 == 4) tx.send_ctrl({8'hD2, 8'(n), 48'(i)});
        else            tx.send_data({8'h00, 8'(n), 48'(i)});
        if (i % 7 == 0) tx.send_idle();
      end
      wait (phase == 6);
      for (int i = NFR1; i < NFR1 + NFR2; i++) begin
        if (i % 5 == 4) tx.send_ctrl({8'hD2, 8'(n), 48'(i)});
        else            tx.send_data({8'h00, 8'(n), 48'(i)});
      end
    end
  end

  // ---------------- checks and counters ----------------
  int m_lock = 0, m_data = 0, m_userk = 0, m_seq = 0, m_trig_cmd = 0, m_trig_tlu = 0,
      m_trig_data = 0, m_trig_self = 0, m_tdc = 0, m_i2c = 0, m_backpressure = 0,
      m_veto = 0, m_interleave = 0, m_trig_simple = 0;
  int exp_i [NL];
  int n_trig_words = 0, last_tdc_width = -1, last_chan = -1;
  logic [31:0] last_trig_num;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // TCP receiver
  logic [71:0] acc;
  int nb = 0;
  always @(posedge clk) if (!rst) begin
    if (tcp_tx_full && dut.u_tcp.fifo_valid) m_backpressure++;
    if (tcp_tx_wr) begin
      acc = {acc[63:0], tcp_tx_data};
      nb++;
      if (nb == 9) begin
        daq_word_t w;
        nb = 0;
        w = acc;
        case (w.wtype)
          WT_AURORA_DATA, WT_AURORA_USERK: begin
            int n, i;
            n = int'(w.chan);
            i = exp_i[n];
            checks++;
            if (w.payload != {(i % 5 == 4) ? 8'hD2 : 8'h00, 8'(n), 48'(i)} ||
                (w.wtype == WT_AURORA_USERK) != (i % 5 == 4)) begin
              failures++;
              $display("FAIL: lane %0d frame %0d: type %0d payload %h", n, i, w.wtype, w.payload);
            end
            exp_i[n] = i + 1;
            if (w.wtype == WT_AURORA_USERK) m_userk++; else m_data++;
            if (last_chan >= 0 && last_chan != n) m_interleave++;
            last_chan = n;
          end
          WT_TRIGGER: begin
            n_trig_words++;
            last_trig_num = w.payload[31:0];
          end
          WT_TDC: begin
            m_tdc++;
            last_tdc_width = int'(w.payload[11:0]);
          end
          default: begin
            checks++; failures++;
            $display("FAIL: unknown word type %0d", w.wtype);
          end
        endcase
      end
    end
  end

  // command line: frames from the first clock after reset
  logic [15:0] cur = '0;
  logic [15:0] frames[$];
  int cyc = 0;
  always @(posedge clk) if (!rst) begin
    cur = {cur[14:0], cmd_out};
    if (cyc % 16 == 15) begin
      frames.push_back(cur);
      if (cur[15:8] inside {8'h2B, 8'h2D, 8'h2E, 8'h33, 8'h35, 8'h36, 8'h39, 8'h3A,
                            8'h3C, 8'h4B, 8'h4D, 8'h4E, 8'h53, 8'h55, 8'h56})
        m_trig_cmd++;
    end
    cyc++;
  end

  // ---------------- register access over the UDP port ----------------
  task automatic reg_wr(input logic [15:0] a, input logic [7:0] d);
    @(negedge clk); rbcp_act = 1'b1; rbcp_we = 1'b1; rbcp_addr = {16'h0, a}; rbcp_wd = d;
    @(negedge clk); rbcp_we = 1'b0;
    while (!rbcp_ack) @(negedge clk);
    rbcp_act = 1'b0;
  endtask

  task automatic reg_rd(input logic [15:0] a, output logic [7:0] d);
    @(negedge clk); rbcp_act = 1'b1; rbcp_re = 1'b1; rbcp_addr = {16'h0, a};
    @(negedge clk); rbcp_re = 1'b0;
    while (!rbcp_ack) @(negedge clk);
    d = rbcp_rd;
    rbcp_act = 1'b0;
  endtask

  task automatic tlu_pulse();
    @(negedge clk); tlu_trigger = 1'b1;
    repeat (8) @(negedge clk); tlu_trigger = 1'b0;
    repeat (8) @(negedge clk);
  endtask

  function automatic int total_frames();
    int s = 0;
    for (int n = 0; n < NL; n++) s += exp_i[n];
    return s;
  endfunction

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] d, d1;
    int n0, t0;
    for (int n = 0; n < NL; n++) exp_i[n] = 0;
    repeat (4) @(negedge clk);
    rst = 1'b0;

    // 1. lock and lane traffic
    t0 = 0;
    while (rx_locked != '1 && t0 < 20000) begin @(negedge clk); t0++; end
    chk(rx_locked == '1, $sformatf("lanes locked: %b", rx_locked));
    for (int n = 0; n < NL; n++) begin
      reg_rd(RX_BASE + 16'(16 * n), d);
      if (d[1]) m_lock++;
    end
    phase = 1;
    while (total_frames() < NL * NFR1 && t0 < 100000) begin @(negedge clk); t0++; end
    for (int n = 0; n < NL; n++) chk(exp_i[n] == NFR1, $sformatf("lane %0d: %0d frames", n, exp_i[n]));

    // 2. command sequence: 2 frames, 3 repetitions
    reg_wr(CMD_BASE + 16'h800, 8'h69); reg_wr(CMD_BASE + 16'h801, 8'h69);
    reg_wr(CMD_BASE + 16'h802, 8'h5A); reg_wr(CMD_BASE + 16'h803, 8'h6A);
    reg_wr(CMD_BASE + 2, 8'd4);
    reg_wr(CMD_BASE + 4, 8'd3);
    n0 = frames.size();
    reg_wr(CMD_BASE, 8'h01);
    repeat (300) @(negedge clk);
    for (int i = n0; i + 5 < frames.size(); i++)
      if (frames[i] == 16'h6969 && frames[i+1] == 16'h5A6A && frames[i+2] == 16'h6969 &&
          frames[i+3] == 16'h5A6A && frames[i+4] == 16'h6969 && frames[i+5] == 16'h5A6A)
        m_seq++;
    chk(m_seq == 1, "command sequence not on the command line");

    // 3a. TLU, no handshake
    reg_wr(CMD_BASE + 1, 8'h01);              // triggers on
    reg_wr(TLU_BASE, 8'b0100);
    n0 = m_trig_cmd;
    for (int i = 0; i < 3; i++) tlu_pulse();
    repeat (100) @(negedge clk);
    chk(m_trig_cmd == n0 + 3, $sformatf("%0d trigger commands for 3 TLU triggers", m_trig_cmd - n0));
    chk(n_trig_words == 3 && last_trig_num == 32'd2, "trigger words (no handshake)");
    m_trig_tlu += m_trig_cmd - n0;

    // 3a'. TLU, simple handshake: BUSY rises with the trigger, falls after it
    reg_wr(TLU_BASE, 8'b0101);
    n0 = m_trig_cmd;
    @(negedge clk); tlu_trigger = 1'b1;
    t0 = 0;
    while (!tlu_busy && t0 < 100) begin @(negedge clk); t0++; end
    chk(tlu_busy, "BUSY not raised (simple handshake)");
    repeat (10) @(negedge clk);
    chk(tlu_busy, "BUSY dropped while TRIGGER is high (simple handshake)");
    tlu_trigger = 1'b0;
    t0 = 0;
    while (tlu_busy && t0 < 100) begin @(negedge clk); t0++; end
    chk(!tlu_busy, "BUSY not released (simple handshake)");
    repeat (100) @(negedge clk);
    chk(m_trig_cmd == n0 + 1, "trigger command (simple handshake)");
    chk(n_trig_words == 4 && last_trig_num == 32'd3, "trigger word (simple handshake)");
    if (m_trig_cmd == n0 + 1 && !tlu_busy) m_trig_simple++;

    // 3b. TLU, trigger data handshake, number 0x2A5F
    begin
      logic [14:0] num;
      num = 15'h2A5F;
      reg_wr(TLU_BASE, 8'b0110);
      n0 = m_trig_cmd;
      @(negedge clk); tlu_trigger = 1'b1;
      repeat (8) @(negedge clk); tlu_trigger = 1'b0;
      for (int b = 0; b < 15; b++) begin
        t0 = 0;
        while (!tlu_clock && t0 < 1000) begin @(negedge clk); t0++; end
        tlu_trigger = num[b];
        while (tlu_clock) @(negedge clk);
      end
      while (tlu_busy) @(negedge clk);
      tlu_trigger = 1'b0;
      repeat (100) @(negedge clk);
      chk(m_trig_cmd == n0 + 1, "trigger command (data handshake)");
      chk(n_trig_words == 5 && last_trig_num == 32'h2A5F, $sformatf("TLU number %h", last_trig_num));
      if (last_trig_num == 32'h2A5F) m_trig_data++;
    end

    // 3c. HitOr self-trigger, delay 20
    reg_wr(TLU_BASE, 8'b1000);
    reg_wr(HTRIG_BASE + 1, 8'd20);
    reg_wr(HTRIG_BASE, 8'hF1);
    n0 = m_trig_cmd;
    @(negedge clk); hitor[2] = 1'b1;
    repeat (5) @(negedge clk); hitor[2] = 1'b0;
    repeat (100) @(negedge clk);
    chk(m_trig_cmd == n0 + 1 && n_trig_words == 6, "HitOr self-trigger");
    m_trig_self += m_trig_cmd - n0;

    // 4. TDC: pulse of 4*37+2 = 150 samples
    reg_wr(TDC_BASE, 8'h01);
    @(negedge clk); hitor_samples = 4'b0011;
    @(negedge clk); hitor_samples = 4'b1111;
    repeat (37) @(negedge clk);
    hitor_samples = 4'b0000;
    repeat (50) @(negedge clk);
    chk(last_tdc_width == 150 && m_tdc == 1, $sformatf("TDC width %0d", last_tdc_width));

    // 5. I2C write of two bytes to the clock chip
    reg_wr(I2C_BASE + 1, {7'h68, 1'b0});
    reg_wr(I2C_BASE + 2, 8'd2);
    reg_wr(I2C_BASE + 16, 8'h3C); reg_wr(I2C_BASE + 17, 8'hE1);
    reg_wr(I2C_BASE, 8'h01);
    d = 8'h00;
    while (!d[0]) begin repeat (200) @(negedge clk); reg_rd(I2C_BASE, d); end
    chk(d[1] == 1'b0 && clkchip.mem[0] == 8'h3C && clkchip.mem[1] == 8'hE1, "I2C write");
    if (clkchip.n_writes == 2) m_i2c++;

    // 6. back-pressure and veto
    reg_wr(TLU_BASE, 8'b0100);
    tcp_tx_full = 1'b1;
    phase = 6;
    t0 = 0;
    while (!dut.veto && t0 < 200000) begin @(negedge clk); t0++; end
    n0 = n_trig_words;
    d = 8'h00;
    reg_rd(TLU_BASE + 4, d);
    tlu_pulse();
    reg_rd(TLU_BASE + 4, d1);
    if (dut.veto && d1 == d) m_veto++;
    reg_rd(FIFO_BASE + 1, d);
    chk(d >= 8'h1F, $sformatf("common FIFO level high byte %h while blocked", d));
    repeat (2000) @(negedge clk);
    tcp_tx_full = 1'b0;
    t0 = 0;
    while (total_frames() < NL * (NFR1 + NFR2) && t0 < 1_000_000) begin @(negedge clk); t0++; end
    for (int n = 0; n < NL; n++) chk(exp_i[n] == NFR1 + NFR2, $sformatf("lane %0d: %0d frames after back-pressure", n, exp_i[n]));
    reg_rd(FIFO_BASE + 2, d);
    chk(d[0] == 1'b0, "common FIFO overflowed");
    for (int n = 0; n < NL; n++) begin
      reg_rd(RX_BASE + 16'(16 * n), d);
      chk(d[2] == 1'b0, $sformatf("lane %0d FIFO overflowed", n));
    end

    $display("mechanisms: lock=%0d data=%0d userk=%0d interleave=%0d sequence=%0d trig_cmd=%0d tlu=%0d tlu_simple=%0d tlu_data=%0d self=%0d tdc=%0d i2c=%0d backpressure=%0d veto=%0d",
             m_lock, m_data, m_userk, m_interleave, m_seq, m_trig_cmd, m_trig_tlu, m_trig_simple, m_trig_data,
             m_trig_self, m_tdc, m_i2c, m_backpressure, m_veto);
    chk(m_lock == NL, "not every lane locked");
    chk(m_data > 0, "no data frame");
    chk(m_userk > 0, "no user-K frame");
    chk(m_interleave > 0, "lanes never interleaved");
    chk(m_seq > 0, "no command sequence");
    chk(m_trig_cmd > 0, "no trigger command");
    chk(m_trig_tlu > 0, "no TLU trigger");
    chk(m_trig_simple > 0, "no TLU simple handshake");
    chk(m_trig_data > 0, "no TLU data handshake");
    chk(m_trig_self > 0, "no HitOr self-trigger");
    chk(m_tdc > 0, "no TDC word");
    chk(m_i2c > 0, "no I2C transfer");
    chk(m_backpressure > 0, "no TCP back-pressure");
    chk(m_veto > 0, "veto never blocked a trigger");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
