// tb_i2c_master: self-checking test of the I2C controller against an I2C
// target model (address 0x68) on an open-drain bus, with CLK_DIV = 4.
// Checks: a 3-byte write lands in the target's memory; a 4-byte read returns
// the target's bytes into the controller buffer; ready/nack flags; a transfer
// to an absent address ends with nack set; SCL period is 4*CLK_DIV clocks.
module tb_i2c_master;
  import bdaq_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  bus_req_t   bus = '0;
  logic [7:0] rdata;
  logic       scl_oe, sda_oe, sda_in, t_sda_oe, scl;

  i2c_master #(.CLK_DIV(4)) dut (.clk, .rst, .bus, .rdata, .scl_oe, .sda_oe, .sda_in);
  assign scl    = !scl_oe;
  assign sda_in = !(sda_oe || t_sda_oe);
  i2c_target_model #(.ADDR(7'h68)) target (.clk, .scl, .sda(sda_in), .sda_oe(t_sda_oe));

  // SCL period measurement
  int last_rise = -1, period = 0, cyc = 0;
  logic scl_d = 1'b1;
  always @(posedge clk) begin
    cyc++;
    scl_d <= scl;
    if (scl && !scl_d) begin
      if (last_rise >= 0) period = cyc - last_rise;
      last_rise = cyc;
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

  task automatic rd(input logic [15:0] a, output logic [7:0] d);
    @(negedge clk); bus.addr = a; bus.rd = 1'b1;
    @(negedge clk); bus.rd = 1'b0;
    d = rdata;
  endtask

  task automatic wait_ready(output logic [7:0] st);
    st = '0;
    for (int t = 0; t < 5000 && !st[0]; t++) rd(I2C_BASE, st);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] st, d;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // write 3 bytes
    wr(I2C_BASE + 1, {7'h68, 1'b0});
    wr(I2C_BASE + 2, 8'd3);
    wr(I2C_BASE + 16, 8'h11); wr(I2C_BASE + 17, 8'h22); wr(I2C_BASE + 18, 8'hA5);
    wr(I2C_BASE, 8'h01);
    rd(I2C_BASE, st);
    chk(!st[0], "ready during a transfer");
    wait_ready(st);
    chk(st[1:0] == 2'b01, $sformatf("write status %b", st[1:0]));
    chk(target.mem[0] == 8'h11 && target.mem[1] == 8'h22 && target.mem[2] == 8'hA5,
        $sformatf("target got %h %h %h", target.mem[0], target.mem[1], target.mem[2]));
    chk(target.n_writes == 3, $sformatf("%0d bytes written", target.n_writes));
    chk(period == 16, $sformatf("SCL period %0d clocks", period));
    // read 4 bytes
    for (int i = 0; i < 4; i++) wr(I2C_BASE + 16 + 16'(i), 8'h00);
    wr(I2C_BASE + 1, {7'h68, 1'b1});
    wr(I2C_BASE + 2, 8'd4);
    wr(I2C_BASE, 8'h01);
    wait_ready(st);
    chk(st[1:0] == 2'b01, $sformatf("read status %b", st[1:0]));
    for (int i = 0; i < 4; i++) begin
      rd(I2C_BASE + 16 + 16'(i), d);
      chk(d == target.mem[i], $sformatf("read byte %0d: %h expected %h", i, d, target.mem[i]));
    end
    // absent target
    wr(I2C_BASE + 1, {7'h21, 1'b0});
    wr(I2C_BASE + 2, 8'd2);
    wr(I2C_BASE, 8'h01);
    wait_ready(st);
    chk(st[1:0] == 2'b11, $sformatf("nack status %b", st[1:0]));
    chk(target.n_writes == 3, "write reached the target after a nack");
    repeat (50) @(negedge clk);
    chk(scl && sda_in, "bus not released after STOP");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
