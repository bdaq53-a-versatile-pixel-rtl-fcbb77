// tb_hitor_trigger: self-checking test of the HitOr self-trigger.
// Checks: trig_out comes exactly DELAY+3 clocks after the HitOr edge for
// several delays; one trigger per accepted edge; edges inside the veto
// window are dropped and counted; an edge after the window is accepted;
// masked lines and the disabled state produce nothing; the counters read back.
module tb_hitor_trigger;
  import bdaq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t   bus = '0;
  logic [7:0] rdata;
  logic [3:0] hitor = '0;
  logic       trig_out;

  hitor_trigger dut (.*);

  int n_trig = 0;
  always @(posedge clk) if (!rst && trig_out) n_trig++;

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

  // pulse a HitOr line and return the clocks until trig_out (-1: none)
  task automatic pulse(input int line, input int wait_max, output int lat);
    lat = -1;
    @(negedge clk); hitor[line] = 1'b1;
    for (int t = 1; t <= wait_max; t++) begin
      @(negedge clk);
      if (t == 4) hitor[line] = 1'b0;
      if (trig_out && lat < 0) lat = t;
    end
    hitor = '0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, n0;
    logic [7:0] d0, d1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    pulse(0, 20, lat);
    chk(lat < 0, "trigger while disabled");
    wr(HTRIG_BASE, 8'hF1);
    for (int k = 0; k < 6; k++) begin
      int dl;
      dl = (k == 5) ? 255 : k * 17;
      wr(HTRIG_BASE + 1, 8'(dl));
      pulse(k % 4, dl + 10, lat);
      chk(lat == dl + 3, $sformatf("delay %0d: trigger after %0d clocks", dl, lat));
      repeat (300) @(negedge clk);
    end
    chk(n_trig == 6, "one trigger per edge");
    // veto window of 100 clocks
    wr(HTRIG_BASE + 1, 8'd10);
    wr(HTRIG_BASE + 2, 8'd100); wr(HTRIG_BASE + 3, 8'd0);
    n0 = n_trig;
    pulse(1, 20, lat);
    chk(lat == 13, "first hit with veto");
    pulse(2, 20, lat);
    chk(lat < 0, "hit inside veto window triggered");
    pulse(3, 20, lat);
    chk(lat < 0, "second hit inside veto window triggered");
    repeat (60) @(negedge clk);
    pulse(0, 20, lat);
    chk(lat == 13, "hit after veto window");
    chk(n_trig == n0 + 2, "trigger count with veto");
    rd(HTRIG_BASE + 6, d0); rd(HTRIG_BASE + 7, d1);
    chk({d1, d0} == 16'd2, $sformatf("vetoed count %0d", {d1, d0}));
    rd(HTRIG_BASE + 4, d0);
    chk(d0 == 8'd8, $sformatf("accepted count %0d", d0));
    // mask: only line 2 enabled
    repeat (120) @(negedge clk);
    wr(HTRIG_BASE, 8'h41);
    pulse(0, 20, lat);
    chk(lat < 0, "masked line triggered");
    pulse(2, 20, lat);
    chk(lat == 13, "unmasked line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
