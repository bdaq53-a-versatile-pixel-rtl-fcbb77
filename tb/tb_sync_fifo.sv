// tb_sync_fifo: self-checking test of the block-RAM FIFO (DEPTH 16, 16 bit).
// Checks the two-clock fall-through latency, order against a queue model
// under random reads and writes, the level output, full, and the overflow
// flag after writing into a full FIFO.
module tb_sync_fifo;
  localparam int W = 16, D = 16;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 1'b0, rd_ready = 1'b0;
  logic [W-1:0] din = '0, dout;
  logic full, dout_valid, overflow;
  logic [$clog2(D+2)-1:0] level;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] q[$];

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // latency: written word appears on dout two clocks later
    @(negedge clk); wr_en = 1'b1; din = 16'hABCD;
    @(negedge clk); wr_en = 1'b0;
    chk(!dout_valid, "word visible after one clock");
    @(negedge clk);
    chk(dout_valid && dout == 16'hABCD, "word not visible after two clocks");
    chk(level == 1, "level after one write");
    rd_ready = 1'b1;
    @(negedge clk); rd_ready = 1'b0;
    chk(!dout_valid && level == 0, "FIFO not empty after the read");

    // random traffic against a queue model
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      chk(level == q.size(), $sformatf("level %0d, model %0d", level, q.size()));
      chk(full == (q.size() - int'(dout_valid) == D), "full flag");
      if (dout_valid) chk(dout == q[0], $sformatf("data %h, model %h", dout, q[0]));
      rd_ready = ($urandom % 3) != 0;
      wr_en    = ($urandom % 2) != 0;
      din      = W'($urandom);
      if (rd_ready && dout_valid) void'(q.pop_front());
      if (wr_en && !full) q.push_back(din);
    end
    @(negedge clk); wr_en = 1'b0; rd_ready = 1'b1;
    while (q.size() != 0) begin
      if (dout_valid) begin chk(dout == q[0], "drain data"); void'(q.pop_front()); end
      @(negedge clk);
    end
    rd_ready = 1'b0;
    chk(!overflow, "overflow set without an overflowing write");
    // fill completely, then one more write
    for (int i = 0; i < D + 2; i++) begin
      @(negedge clk); wr_en = 1'b1; din = W'(i);
    end
    @(negedge clk); wr_en = 1'b0;
    @(negedge clk);
    chk(full, "not full after D+2 writes");
    chk(level == D + 1, $sformatf("level %0d when full", level));
    chk(overflow, "overflow flag not set");
    rd_ready = 1'b1;
    for (int i = 0; i < D + 1; i++) begin
      chk(dout_valid && dout == W'(i), $sformatf("full-drain word %0d", i));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
