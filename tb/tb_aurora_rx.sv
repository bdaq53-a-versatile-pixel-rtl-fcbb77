// tb_aurora_rx: self-checking test of one Aurora 64b/66b lane receiver.
// The lane model starts 23 bits off the block boundary and sends idle
// blocks; the receiver must slip into place and lock. Then random data
// frames, user-K control frames and idles are sent: the receiver must return
// exactly the data and user-K frames, in order, with the right flag, and no
// idles. 16 blocks with invalid headers must drop the lock; the receiver must
// lock again and deliver frames afterwards. Also checked: the register view
// (locked, frame count, header-error count), the disable bit, and the frame
// rate (a block every 66/32 words).
// A second receiver runs next to it at 640 Mbit/s (one 32-bit word every 8
// clocks): it must lock from a 41-bit offset and deliver 200 back-to-back data
// frames in order at one frame per 16.5 clocks.
module tb_aurora_rx;
  import bdaq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t    bus = '0;
  logic [7:0]  rdata;
  logic [31:0] rx_data;
  logic        rx_valid, frame_valid, frame_userk, locked;
  logic [63:0] frame_data;
  logic        fifo_overflow = 1'b0;

  aurora_tx_model #(.PERIOD(4), .SEED(7)) tx (.clk, .rx_data, .rx_valid);
  aurora_rx dut (.*);

  // 640 Mbit/s lane
  logic [31:0] rx_data_s;
  logic        rx_valid_s, fv_s, fk_s, locked_s;
  logic [63:0] fd_s;
  logic [7:0]  rdata_s;
  aurora_tx_model #(.PERIOD(8), .SEED(11)) tx_s (.clk, .rx_data(rx_data_s), .rx_valid(rx_valid_s));
  aurora_rx #(.BASEADDR(RX_BASE + 16'h10)) dut_s (
    .clk, .rst, .bus, .rdata(rdata_s), .rx_data(rx_data_s), .rx_valid(rx_valid_s),
    .fifo_overflow(1'b0), .frame_valid(fv_s), .frame_userk(fk_s), .frame_data(fd_s),
    .locked(locked_s));
  logic [63:0] got_s[$];
  int first_s = -1, last_s = 0;
  bit slow_done = 1'b0;
  always @(posedge clk) if (fv_s && !rst) begin
    if (first_s < 0) first_s = cyc;
    last_s = cyc;
    got_s.push_back(fk_s ? ~fd_s : fd_s);
  end

  typedef struct { logic k; logic [63:0] d; } frame_t;
  frame_t exp_q[$];
  int n_got = 0, first_got = -1, last_got = 0, cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (frame_valid && !rst) begin
      n_got++;
      if (first_got < 0) first_got = cyc;
      last_got = cyc;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected frame %h", frame_data);
      end else begin
        frame_t e;
        e = exp_q.pop_front();
        if (e.k != frame_userk || e.d != frame_data) begin
          failures++;
          $display("FAIL: frame %0d got k=%b %h expected k=%b %h", n_got, frame_userk, frame_data, e.k, e.d);
        end
      end
    end
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic rd(input logic [15:0] a, output logic [7:0] d);
    @(negedge clk); bus.addr = a; bus.rd = 1'b1;
    @(negedge clk); bus.rd = 1'b0;
    d = rdata;
  endtask

  task automatic wr(input logic [15:0] a, input logic [7:0] d);
    @(negedge clk); bus.addr = a; bus.wdata = d; bus.wr = 1'b1;
    @(negedge clk); bus.wr = 1'b0;
  endtask

  task automatic wait_drain();
    while (tx.queued_bits() > 40) @(negedge clk);
    repeat (40) @(negedge clk);
  endtask

  task automatic send_mix(input int n);
    for (int i = 0; i < n; i++) begin
      frame_t e;
      int r;
      r = $urandom % 4;
      e.d = {$urandom, $urandom};
      if (r == 0) begin
        tx.send_idle();
      end else if (r == 1) begin
        e.d[63:56] = 8'hD2;
        e.k = 1'b1;
        exp_q.push_back(e);
        tx.send_ctrl(e.d);
      end else begin
        e.k = 1'b0;
        exp_q.push_back(e);
        tx.send_data(e.d);
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] sent [200];
    @(negedge rst);
    tx_s.skip_bits(41);
    for (int i = 0; i < 600; i++) tx_s.send_idle();
    while (tx_s.queued_bits() > 40) @(negedge clk);
    repeat (80) @(negedge clk);
    chk(locked_s, "640 Mbit/s lane: no lock after 600 idle blocks");
    chk(got_s.size() == 0, "640 Mbit/s lane: idle blocks were passed on");
    for (int i = 0; i < 200; i++) begin
      sent[i] = {32'(i), $urandom};
      tx_s.send_data(sent[i]);
    end
    while (tx_s.queued_bits() > 40) @(negedge clk);
    repeat (80) @(negedge clk);
    chk(got_s.size() == 200, $sformatf("640 Mbit/s lane: %0d of 200 frames", got_s.size()));
    for (int i = 0; i < 200 && i < got_s.size(); i++)
      chk(got_s[i] == sent[i], $sformatf("640 Mbit/s lane: frame %0d got %h expected %h", i, got_s[i], sent[i]));
    // 199 block intervals of 66 bits at 32 bits per 8 clocks = 16.5 clocks
    chk(last_s - first_s >= 3280 && last_s - first_s <= 3290,
        $sformatf("640 Mbit/s lane: 200 frames took %0d clocks", last_s - first_s));
    slow_done = 1'b1;
  end

  initial begin
    logic [7:0] d, d2;
    int n0;
    tx.skip_bits(23);
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // idles only: lock must come
    for (int i = 0; i < 600; i++) tx.send_idle();
    wait_drain();
    chk(locked, "no lock after 600 idle blocks");
    chk(n_got == 0, "idle blocks were passed on");
    rd(RX_BASE, d);
    chk(d[1:0] == 2'b11, "status register: locked and enabled");

    // mixed traffic, rate check on back-to-back data frames
    send_mix(300);
    wait_drain();
    chk(exp_q.size() == 0, $sformatf("%0d frames missing", exp_q.size()));
    n0 = n_got;
    first_got = -1;
    for (int i = 0; i < 200; i++) begin
      frame_t e;
      e.k = 1'b0; e.d = {32'(i), $urandom};
      exp_q.push_back(e); tx.send_data(e.d);
    end
    wait_drain();
    // 199 block intervals of 66 bits at 32 bits per 4 clocks = 8.25 clocks
    chk(last_got - first_got >= 1640 && last_got - first_got <= 1645,
        $sformatf("200 frames took %0d clocks", last_got - first_got));
    rd(RX_BASE + 2, d); rd(RX_BASE + 3, d2);
    chk({d2, d} == 16'(n_got), $sformatf("frame counter %0d, seen %0d", {d2, d}, n_got));

    // loss of lock after 16 bad headers
    for (int i = 0; i < 16; i++) tx.send_bad({$urandom, $urandom});
    for (int i = 0; i < 10; i++) tx.send_idle();
    wait_drain();
    chk(!locked, "lock kept after 16 invalid headers");
    rd(RX_BASE + 1, d);
    chk(d == 8'd16, $sformatf("header error count %0d", d));
    wr(RX_BASE + 1, 8'h00);
    rd(RX_BASE + 1, d);
    chk(d == 8'd0, "header error count not cleared");
    for (int i = 0; i < 200; i++) tx.send_idle();
    wait_drain();
    chk(locked, "no relock");
    send_mix(100);
    wait_drain();
    chk(exp_q.size() == 0, "frames missing after relock");

    // 15 bad headers spread over 64 blocks do not drop the lock
    for (int i = 0; i < 15; i++) begin tx.send_bad(64'h0); tx.send_idle(); end
    wait_drain();
    chk(locked, "lock lost after 15 invalid headers");

    // disabled lane delivers nothing
    wr(RX_BASE, 8'h00);
    n0 = n_got;
    for (int i = 0; i < 20; i++) tx.send_data({$urandom, $urandom});
    wait_drain();
    chk(n_got == n0, "disabled lane delivered frames");
    wait (slow_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
