// tb_tcp_streamer: self-checking test of the FIFO-to-TCP byte streamer.
// A queue in the testbench stands in for the FIFO output. Checks: every word
// leaves as 9 bytes, most significant first, and is taken from the FIFO only
// after its last byte; nothing is written while the TCP buffer is full or the
// connection is closed; with no back-pressure 50 words take exactly 450
// clocks; the sent-byte counter and FIFO level/overflow registers read back.
module tb_tcp_streamer;
  import bdaq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t   bus = '0;
  logic [7:0] rdata, tcp_tx_data;
  daq_word_t  fifo_dout;
  logic       fifo_valid, fifo_ready, tcp_tx_wr;
  logic [13:0] fifo_level;
  logic       fifo_overflow = 1'b1, tcp_open = 1'b0, tcp_tx_full = 1'b0;

  tcp_streamer dut (.*);

  logic [71:0] q[$];
  logic [71:0] sent_q[$];
  logic [7:0]  bytes[$];
  always_comb begin
    fifo_valid = q.size() != 0;
    fifo_dout  = (q.size() != 0) ? q[0] : '0;
    fifo_level = 14'(q.size());
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n_wr = 0;
  always @(posedge clk) if (!rst) begin
    if (tcp_tx_wr) begin
      n_wr++;
      bytes.push_back(tcp_tx_data);
      if (tcp_tx_full || !tcp_open) begin failures++; $display("FAIL: write while full/closed"); end
    end
    if (fifo_ready) begin
      sent_q.push_back(q[0]);
      q.pop_front();
    end
  end

  task automatic rd(input logic [15:0] a, output logic [7:0] d);
    @(negedge clk); bus.addr = a; bus.rd = 1'b1;
    @(negedge clk); bus.rd = 1'b0;
    d = rdata;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] d0, d1, d2, d3;
    int t0;
    for (int i = 0; i < 50; i++) q.push_back({$urandom, $urandom, 8'(i)});
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (20) @(negedge clk);
    chk(n_wr == 0, "bytes sent while the connection is closed");
    rd(FIFO_BASE, d0); rd(FIFO_BASE + 1, d1); rd(FIFO_BASE + 2, d2);
    chk({d1, d0} == 16'd50 && d2 == 8'd1, "level / overflow registers");
    @(negedge clk); tcp_open = 1'b1; t0 = 0;
    while (q.size() != 0) begin @(negedge clk); t0++; end
    chk(t0 == 450, $sformatf("50 words took %0d clocks", t0));
    // with random back-pressure
    for (int i = 0; i < 200; i++) q.push_back({$urandom, $urandom, 8'(i)});
    while (q.size() != 0) begin
      @(negedge clk);
      tcp_tx_full = ($urandom % 3) == 0;
      if ($urandom % 50 == 0) tcp_open = 1'b0; else tcp_open = 1'b1;
    end
    tcp_tx_full = 1'b0;
    repeat (5) @(negedge clk);
    chk(bytes.size() == 9 * sent_q.size() && sent_q.size() == 250, $sformatf("%0d bytes for %0d words", bytes.size(), sent_q.size()));
    for (int w = 0; w < sent_q.size(); w++) begin
      logic [71:0] r;
      for (int b = 0; b < 9; b++) r = {r[63:0], bytes[9 * w + b]};
      chk(r == sent_q[w], $sformatf("word %0d: %h expected %h", w, r, sent_q[w]));
    end
    rd(FIFO_BASE + 4, d0); rd(FIFO_BASE + 5, d1); rd(FIFO_BASE + 6, d2); rd(FIFO_BASE + 7, d3);
    chk({d3, d2, d1, d0} == 32'(n_wr), "sent-byte counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
