// tb_cmd_encoder: self-checking test of the RD53 command encoder.
// The serial output is cut into 16-bit frames (frame 0 starts with the first
// clock after reset). Checks: sync frames while idle; a 3-frame sequence
// repeated twice appears back to back (one frame per 16 clocks) and exactly
// twice; memory read-back and the ready flag over the bus; trigger pulses in
// chosen bunch-crossing slots give the trigger frame {pattern symbol, tag
// symbol} in the next frame; a trigger during a running sequence delays it
// (4 repetitions) by one frame without losing any of it; disabled triggers are ignored.
module tb_cmd_encoder;
  import bdaq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t   bus = '0;
  logic [7:0] rdata;
  logic       ext_trig = 1'b0, cmd_out, busy, trig_sent;

  cmd_encoder #(.MEM_BYTES(64)) dut (.*);

  // independent copies of the RD53A symbol tables
  localparam logic [7:0] DSYM [32] = '{8'h6A, 8'h6C, 8'h71, 8'h72, 8'h74, 8'h8B, 8'h8D, 8'h8E,
                                       8'h93, 8'h95, 8'h96, 8'h99, 8'h9A, 8'h9C, 8'hA3, 8'hA5,
                                       8'hA6, 8'hA9, 8'hAA, 8'hAC, 8'hB1, 8'hB2, 8'hB4, 8'hC3,
                                       8'hC5, 8'hC6, 8'hC9, 8'hCA, 8'hCC, 8'hD1, 8'hD2, 8'hD4};
  localparam logic [7:0] TSYM [16] = '{8'h00, 8'h2B, 8'h2D, 8'h2E, 8'h33, 8'h35, 8'h36, 8'h39,
                                       8'h3A, 8'h3C, 8'h4B, 8'h4D, 8'h4E, 8'h53, 8'h55, 8'h56};

  // frame collector
  logic [15:0] frames[$];
  logic [15:0] cur = '0;
  int          cyc = 0, n_trig_sent = 0;
  always @(posedge clk) if (!rst) begin
    cur = {cur[14:0], cmd_out};
    if (cyc % 16 == 15) frames.push_back(cur);
    cyc++;
    if (trig_sent) n_trig_sent++;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [15:0] a, input logic [7:0] d);
    @(negedge clk); bus.addr = a; bus.wdata = d; bus.wr = 1'b1;
    @(negedge clk); bus.wr = 1'b0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [7:0] d);
    @(negedge clk); bus.addr = a; bus.rd = 1'b1;
    @(negedge clk); bus.rd = 1'b0;
    d = rdata;
  endtask

  // send a trigger pattern in the frame that starts at the next frame boundary;
  // returns that frame's index
  task automatic trig_frame(input logic [3:0] p, output int f);
    while (cyc % 16 != 0) @(negedge clk);
    f = cyc / 16;
    for (int s = 0; s < 4; s++)
      for (int k = 0; k < 4; k++) begin
        ext_trig = (k == 1) && p[3 - s];
        @(negedge clk);
      end
    ext_trig = 1'b0;
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] seq [3] = '{16'h5A5A, 16'h1234, 16'hC3C3};

  initial begin
    logic [7:0] d;
    int f, first, n_seq, n0;
    @(negedge clk); @(negedge clk);
    rst = 1'b0;
    repeat (100) @(negedge clk);
    foreach (frames[i]) chk(frames[i] == SYNC_FRAME, "idle frame is not sync");

    // load the sequence, 2 repetitions
    for (int i = 0; i < 3; i++) begin
      wr(CMD_BASE + 16'h800 + 16'(2 * i), seq[i][15:8]);
      wr(CMD_BASE + 16'h801 + 16'(2 * i), seq[i][7:0]);
    end
    rd(CMD_BASE + 16'h803, d);
    chk(d == 8'h34, "memory read-back");
    wr(CMD_BASE + 2, 8'd6); wr(CMD_BASE + 3, 8'd0);
    wr(CMD_BASE + 4, 8'd2); wr(CMD_BASE + 5, 8'd0);
    rd(CMD_BASE, d);
    chk(d[0], "not ready before start");
    n0 = frames.size();
    wr(CMD_BASE, 8'h01);
    rd(CMD_BASE, d);
    chk(!d[0], "ready while running");
    repeat (200) @(negedge clk);
    rd(CMD_BASE, d);
    chk(d[0], "not ready after the sequence");
    first = -1;
    for (int i = n0; i < frames.size(); i++)
      if (frames[i] != SYNC_FRAME) begin first = i; break; end
    chk(first >= 0, "sequence never sent");
    if (first >= 0) begin
      for (int i = 0; i < 6; i++) chk(frames[first + i] == seq[i % 3], $sformatf("sequence frame %0d: %h", i, frames[first + i]));
      chk(frames[first + 6] == SYNC_FRAME, "sequence sent more than twice");
    end

    // triggers while enabled = 0 are ignored
    trig_frame(4'b1000, f);
    repeat (20) @(negedge clk);
    chk(frames[f + 1] == SYNC_FRAME, "trigger sent while disabled");

    // triggers in chosen slots
    wr(CMD_BASE + 1, 8'h01);
    for (int t = 0; t < 20; t++) begin
      logic [3:0] p;
      p = 4'($urandom % 15 + 1);
      trig_frame(p, f);
      repeat (20) @(negedge clk);
      chk(frames[f + 1] == {TSYM[p], DSYM[t]}, $sformatf("trigger %0d pattern %b: frame %h", t, p, frames[f + 1]));
    end
    chk(n_trig_sent == 20, $sformatf("%0d trigger frames flagged", n_trig_sent));

    // trigger during a running sequence: no frame of the sequence is lost
    wr(CMD_BASE + 4, 8'd4);
    n0 = frames.size();
    wr(CMD_BASE, 8'h01);
    while (frames.size() < n0 + 5) @(negedge clk);
    trig_frame(4'b0010, f);
    repeat (200) @(negedge clk);
    n_seq = 0;
    for (int i = n0; i < frames.size(); i++) begin
      if (frames[i] == {TSYM[2], DSYM[20]}) continue;
      if (frames[i] == SYNC_FRAME) continue;
      chk(n_seq < 12 && frames[i] == seq[n_seq % 3], "sequence broken by trigger");
      n_seq++;
    end
    chk(n_seq == 12, $sformatf("%0d sequence frames around the trigger", n_seq));
    chk(frames[f + 1] == {TSYM[2], DSYM[20]}, "trigger frame during sequence");
    chk(frames[f] != SYNC_FRAME && frames[f + 2] != SYNC_FRAME, "trigger did not interrupt the sequence");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
