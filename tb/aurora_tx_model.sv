// aurora_tx_model: behavioural model of one chip data lane as seen after the
// FPGA transceiver (testbench only).
//
// Blocks queued with send_data / send_ctrl / send_bad are scrambled
// (x^58 + x^39 + 1, payload MSB first), prefixed with their 2-bit sync header
// and appended to a bit queue; the model hands out 32-bit words, earliest bit
// in bit 31, with rx_valid high every PERIOD-th clock (PERIOD = 4 at 160 MHz
// models a 1.28 Gbit/s lane). When the queue runs short it appends idle
// blocks by itself so the lane never stops. skip_bits() inserts extra bits to
// move the block boundary.
module aurora_tx_model #(
  parameter int unsigned PERIOD = 4,
  parameter int unsigned SEED   = 1
) (
  input  logic        clk,
  output logic [31:0] rx_data,
  output logic        rx_valid
);
  bit          bq[$];
  logic [57:0] scr = 58'(SEED) * 58'h1_2345_6789;
  int          phase = 0;
  int          n_queued_frames = 0;

  task automatic push_block(input logic [1:0] hdr, input logic [63:0] pl);
    bq.push_back(hdr[1]);
    bq.push_back(hdr[0]);
    for (int i = 63; i >= 0; i--) begin
      logic s;
      s   = pl[i] ^ scr[38] ^ scr[57];
      scr = {scr[56:0], s};
      bq.push_back(s);
    end
  endtask

  task automatic send_data(input logic [63:0] pl);
    push_block(2'b01, pl);
    n_queued_frames++;
  endtask

  task automatic send_ctrl(input logic [63:0] pl);
    push_block(2'b10, pl);
  endtask

  task automatic send_idle();
    push_block(2'b10, {8'h78, 56'h0});
  endtask

  task automatic send_bad(input logic [63:0] pl);
    push_block(2'b00, pl);
  endtask

  task automatic skip_bits(input int n);
    for (int i = 0; i < n; i++) bq.push_back(1'b1);
  endtask

  function automatic int queued_bits();
    return bq.size();
  endfunction

  initial begin
    rx_data  = '0;
    rx_valid = 1'b0;
  end

  always @(posedge clk) begin
    rx_valid <= 1'b0;
    phase    <= (phase == int'(PERIOD) - 1) ? 0 : phase + 1;
    if (phase == 0) begin
      logic [31:0] w;
      while (bq.size() < 32) send_idle();
      for (int i = 31; i >= 0; i--) w[i] = bq.pop_front();
      rx_data  <= w;
      rx_valid <= 1'b1;
    end
  end
endmodule
