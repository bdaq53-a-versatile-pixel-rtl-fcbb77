// tb_bus_master: self-checking test of the UDP-to-control-bus bridge.
// A register-file slave in the testbench answers reads one clock after the
// read strobe. Checks the bus cycle of every write and read (address, data,
// single-clock strobes), the returned read data, and the acknowledge timing:
// 2 clocks after a write request, 3 clocks after a read request.
module tb_bus_master;
  import bdaq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        rbcp_act = 1'b0, rbcp_we = 1'b0, rbcp_re = 1'b0, rbcp_ack;
  logic [31:0] rbcp_addr = '0;
  logic [7:0]  rbcp_wd = '0, rbcp_rd, bus_rdata;
  bus_req_t    bus;

  bus_master dut (.*);

  // slave: 256-byte register file at 0x4200..0x42FF
  logic [7:0] regs [256];
  int n_wr = 0, n_rd = 0;
  always_ff @(posedge clk) begin
    bus_rdata <= '0;
    if (bus.wr && !rst) begin
      n_wr <= n_wr + 1;
      if (bus.addr[15:8] == 8'h42) regs[bus.addr[7:0]] <= bus.wdata;
    end
    if (bus.rd && !rst) begin
      n_rd <= n_rd + 1;
      if (bus.addr[15:8] == 8'h42) bus_rdata <= regs[bus.addr[7:0]];
    end
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic do_write(input logic [31:0] a, input logic [7:0] d);
    int lat;
    @(negedge clk); rbcp_act = 1'b1; rbcp_we = 1'b1; rbcp_addr = a; rbcp_wd = d;
    @(negedge clk); rbcp_we = 1'b0;
    chk(bus.wr && bus.addr == a[15:0] && bus.wdata == d, "write cycle on the bus");
    lat = 1;
    while (!rbcp_ack && lat < 20) begin @(negedge clk); lat++; chk(!bus.wr, "write strobe longer than one clock"); end
    chk(lat == 2, $sformatf("write ack after %0d clocks", lat));
    rbcp_act = 1'b0;
  endtask

  task automatic do_read(input logic [31:0] a, output logic [7:0] d);
    int lat;
    @(negedge clk); rbcp_act = 1'b1; rbcp_re = 1'b1; rbcp_addr = a;
    @(negedge clk); rbcp_re = 1'b0;
    chk(bus.rd && bus.addr == a[15:0], "read cycle on the bus");
    lat = 1;
    while (!rbcp_ack && lat < 20) begin @(negedge clk); lat++; end
    chk(lat == 3, $sformatf("read ack after %0d clocks", lat));
    d = rbcp_rd;
    rbcp_act = 1'b0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] model [256];
    logic [7:0] d;
    for (int i = 0; i < 256; i++) begin regs[i] = 8'(i * 7); model[i] = 8'(i * 7); end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int t = 0; t < 200; t++) begin
      logic [7:0] a, v;
      a = 8'($urandom);
      v = 8'($urandom);
      if (($urandom % 2) != 0) begin
        do_write({16'h0, 8'h42, a}, v);
        model[a] = v;
      end else begin
        do_read({16'hFFFF, 8'h42, a}, d);
        chk(d == model[a], $sformatf("read %h: got %h, expected %h", a, d, model[a]));
      end
    end
    do_read(32'h0000_5000, d);
    chk(d == 8'h00, "unmapped address reads zero");
    chk(n_wr + n_rd == 201, $sformatf("%0d bus cycles for 201 requests", n_wr + n_rd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
