// tb_tlu_controller: self-checking test of the TLU controller with a TLU
// model in the testbench. Checks, for each handshake mode: one trig_out pulse
// per TLU trigger; busy behaviour (never in mode 0; raised on the trigger and
// dropped only after the TLU trigger fell in mode 1; held through the data
// transfer in mode 2); in mode 2 the 15-bit trigger number clocked out of the
// TLU arrives in the trigger word; trigger numbers from the internal counter
// in modes 0 and 1; veto blocks triggers and delays the busy release; the
// HitOr self-trigger is accepted only when enabled.
module tb_tlu_controller;
  import bdaq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t    bus = '0;
  logic [7:0]  rdata;
  logic        tlu_trigger = 1'b0, tlu_busy, tlu_clock, self_trig = 1'b0, veto = 1'b0;
  logic        trig_out, word_valid, word_ready = 1'b1;
  logic [63:0] word_payload;

  tlu_controller dut (.*);

  int n_trig = 0, n_words = 0;
  logic [31:0] last_num;
  always @(posedge clk) if (!rst) begin
    if (trig_out) n_trig++;
    if (word_valid && word_ready) begin n_words++; last_num = word_payload[31:0]; end
  end

  // TLU model: in data handshake, present bit k of the number after the k-th
  // rising edge of tlu_clock (bit 0 first)
  logic [14:0] tlu_num = '0;
  int          tlu_bit = 0;
  logic        tclk_d = 1'b0;
  bit          data_mode = 0;
  always @(posedge clk) begin
    tclk_d <= tlu_clock;
    if (data_mode && tlu_clock && !tclk_d) begin
      tlu_trigger <= tlu_num[tlu_bit];
      tlu_bit     <= tlu_bit + 1;
    end
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [7:0] d);
    @(negedge clk); bus.addr = a; bus.wdata = d; bus.wr = 1'b1;
    @(negedge clk); bus.wr = 1'b0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n0, busy_seen;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // mode 0, TLU enabled
    wr(TLU_BASE, 8'b0100);
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); tlu_trigger = 1'b1;
      repeat (3) @(negedge clk); tlu_trigger = 1'b0;
      repeat (6) @(negedge clk);
      chk(!tlu_busy, "busy in mode 0");
    end
    chk(n_trig == 10 && n_words == 10, $sformatf("mode 0: %0d triggers %0d words", n_trig, n_words));
    chk(last_num == 32'd9, "mode 0 trigger number");

    // veto blocks triggers
    veto = 1'b1;
    @(negedge clk); tlu_trigger = 1'b1; repeat (4) @(negedge clk); tlu_trigger = 1'b0;
    repeat (6) @(negedge clk);
    chk(n_trig == 10, "trigger accepted under veto");
    veto = 1'b0;

    // mode 1: simple handshake
    wr(TLU_BASE, 8'b0101);
    for (int i = 0; i < 5; i++) begin
      n0 = n_trig;
      @(negedge clk); tlu_trigger = 1'b1;
      repeat (4) @(negedge clk);
      chk(tlu_busy && n_trig == n0 + 1, "mode 1: busy and trigger");
      veto = (i == 2);
      repeat (20) @(negedge clk);
      chk(tlu_busy, "mode 1: busy dropped while TLU trigger high");
      tlu_trigger = 1'b0;
      repeat (6) @(negedge clk);
      chk(tlu_busy == (i == 2), "mode 1: busy after TLU trigger fell");
      veto = 1'b0;
      repeat (4) @(negedge clk);
      chk(!tlu_busy, "mode 1: busy not released");
    end
    chk(last_num == 32'd14, "mode 1 trigger number");

    // mode 2: trigger data handshake
    wr(TLU_BASE, 8'b0110);
    data_mode = 1;
    for (int i = 0; i < 5; i++) begin
      n0 = n_words;
      tlu_num = 15'($urandom);
      tlu_bit = 0;
      @(negedge clk); tlu_trigger = 1'b0;      // TLU returns the line low
      repeat (4) @(negedge clk); tlu_trigger = 1'b1;
      repeat (8) @(negedge clk); tlu_trigger = 1'b0;
      busy_seen = 0;
      for (int t = 0; t < 400; t++) begin
        @(negedge clk);
        if (tlu_busy) busy_seen++;
      end
      chk(busy_seen > 15 * 16, $sformatf("mode 2: busy for %0d clocks", busy_seen));
      chk(!tlu_busy, "mode 2: busy not released");
      chk(tlu_bit == 15, $sformatf("mode 2: %0d TLU clock pulses", tlu_bit));
      chk(n_words == n0 + 1 && last_num == 32'(tlu_num), $sformatf("mode 2: number %h expected %h", last_num, tlu_num));
    end
    data_mode = 0;
    @(negedge clk); tlu_trigger = 1'b0;

    // self-trigger, disabled then enabled
    n0 = n_trig;
    @(negedge clk); self_trig = 1'b1; @(negedge clk); self_trig = 1'b0;
    repeat (3) @(negedge clk);
    chk(n_trig == n0, "self-trigger accepted while disabled");
    wr(TLU_BASE, 8'b1000);
    @(negedge clk); self_trig = 1'b1; @(negedge clk); self_trig = 1'b0;
    repeat (3) @(negedge clk);
    chk(n_trig == n0 + 1, "self-trigger not accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
