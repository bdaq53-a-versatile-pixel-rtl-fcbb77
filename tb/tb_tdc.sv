// tb_tdc: self-checking test of the HitOr pulse-width TDC.
// A sample stream (4 samples per clock, earliest in bit 3) carries pulses of
// random width (1..300 samples) at random positions, one of 5000 samples
// (saturates at 4095 with overflow set) and two short pulses ending in the
// same clock (one word lost and counted). Checks every word's width, rising
// edge time (in samples since reset), event number and overflow bit, that
// no word comes while disabled, and the event/lost registers.
module tb_tdc;
  import bdaq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t    bus = '0;
  logic [7:0]  rdata;
  logic [3:0]  samples = '0;
  logic        word_valid, word_ready = 1'b1;
  logic [63:0] word_payload;

  tdc dut (.*);

  typedef struct { int start; int width; bit after_lost; } pulse_t;
  pulse_t exp_q[$];
  bit     stream[$];
  int     n_words = 0, evt = 0;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (!rst && word_valid && word_ready) begin
    n_words++;
    if (exp_q.size() == 0) begin
      checks++; failures++; $display("FAIL: unexpected TDC word %h", word_payload);
    end else begin
      pulse_t p;
      int w;
      p = exp_q.pop_front();
      w = (p.width > 4095) ? 4095 : p.width;
      if (p.after_lost) evt++;              // the replaced pulse used a number
      chk(word_payload[11:0] == 12'(w), $sformatf("width %0d expected %0d", word_payload[11:0], w));
      chk(word_payload[15] == (p.width > 4095), "overflow bit");
      chk(word_payload[63:32] == 32'(p.start), $sformatf("start %0d expected %0d", word_payload[63:32], p.start));
      chk(word_payload[31:16] == 16'(evt), "event number");
      evt++;
    end
  end

  task automatic add_pulse(input int gap, input int width, input bit expect_word);
    pulse_t p;
    for (int i = 0; i < gap; i++) stream.push_back(1'b0);
    p.start = stream.size();
    p.width = width;
    p.after_lost = (gap == 1 && width == 1);
    for (int i = 0; i < width; i++) stream.push_back(1'b1);
    if (expect_word) exp_q.push_back(p);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pos = 0;
  initial begin
    logic [7:0] d;
    // disabled: 3 pulses that must not produce words (evt count does not move)
    add_pulse(10, 5, 0); add_pulse(10, 5, 0); add_pulse(10, 5, 0);
    for (int i = 0; i < 80; i++) stream.push_back(1'b0);
    for (int i = 0; i < 40; i++) add_pulse(8 + $urandom % 30, 1 + $urandom % 300, 1);
    add_pulse(20, 5000, 1);
    // two pulses ending in one clock: the second replaces the first
    for (int i = 0; i < 4; i++) stream.push_back(1'b0);
    while (stream.size() % 4 != 0) stream.push_back(1'b0);
    add_pulse(0, 1, 0);
    add_pulse(1, 1, 1);
    stream.push_back(1'b0);
    for (int i = 0; i < 40; i++) add_pulse(8 + $urandom % 30, 1 + $urandom % 40, 1);
    for (int i = 0; i < 20; i++) stream.push_back(1'b0);

    repeat (2) @(negedge clk);
    rst = 1'b0;
    // feed four samples per clock; enable after the first 96 samples
    while (pos + 4 <= stream.size()) begin
      samples = {stream[pos], stream[pos + 1], stream[pos + 2], stream[pos + 3]};
      pos += 4;
      if (pos == 100) begin
        bus.addr = TDC_BASE; bus.wdata = 8'h01; bus.wr = 1'b1;
      end else begin
        bus.wr = 1'b0;
      end
      @(negedge clk);
    end
    samples = '0;
    repeat (5) @(negedge clk);
    chk(exp_q.size() == 0, $sformatf("%0d pulses not measured", exp_q.size()));
    @(negedge clk); bus.addr = TDC_BASE + 1; bus.rd = 1'b1;
    @(negedge clk); bus.rd = 1'b0; d = rdata;
    chk(d == 8'(n_words + 1), $sformatf("event register %0d for %0d words + 1 lost", d, n_words));
    @(negedge clk); bus.addr = TDC_BASE + 3; bus.rd = 1'b1;
    @(negedge clk); bus.rd = 1'b0; d = rdata;
    chk(d == 8'd1, $sformatf("lost register %0d", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
