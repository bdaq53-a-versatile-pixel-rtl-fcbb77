// i2c_target_model: behavioural I2C target with a byte memory (testbench
// only), standing in for the programmable clock chip.
//
// It watches the open-drain bus (scl, sda) once per clock: START and STOP are
// SDA edges while SCL is high, bits are taken at SCL rising edges. It answers
// its own 7-bit address ADDR with ACK, stores written bytes in mem[0], mem[1],
// ... and returns mem[0], mem[1], ... on reads, each transfer starting at 0.
// sda_oe = 1 pulls SDA low.
module i2c_target_model #(
  parameter logic [6:0] ADDR = 7'h68
) (
  input  logic clk,
  input  logic scl,
  input  logic sda,
  output logic sda_oe
);
  logic [7:0] mem [16];
  logic       scl_d = 1'b1, sda_d = 1'b1;
  int         bitn = 0, bytes = 0;
  logic [7:0] sh = '0;
  logic       active = 1'b0, rd = 1'b0, ack_phase = 1'b0, master_ack = 1'b0;
  int         n_writes = 0;

  initial begin
    sda_oe = 1'b0;
    for (int i = 0; i < 16; i++) mem[i] = 8'hC0 + 8'(i);
  end

  always @(posedge clk) begin
    scl_d <= scl;
    sda_d <= sda;
    if (scl && scl_d && sda_d && !sda) begin            // START
      active <= 1'b1; bitn <= 0; bytes <= 0; ack_phase <= 1'b0; sda_oe <= 1'b0;
    end else if (scl && scl_d && !sda_d && sda) begin    // STOP
      active <= 1'b0; sda_oe <= 1'b0;
    end else if (active && scl && !scl_d) begin          // SCL rising
      if (!ack_phase) begin
        if (!(rd && bytes > 0)) sh <= {sh[6:0], sda};
        bitn <= bitn + 1;
      end else begin
        master_ack <= !sda;
      end
    end else if (active && !scl && scl_d) begin          // SCL falling
      if (!ack_phase && bitn == 8) begin
        ack_phase <= 1'b1;
        bitn      <= 0;
        if (bytes == 0) begin
          rd     <= sh[0];
          sda_oe <= (sh[7:1] == ADDR);
          if (sh[7:1] != ADDR) active <= 1'b0;
        end else if (!rd) begin
          mem[bytes-1] <= sh;
          n_writes <= n_writes + 1;
          sda_oe <= 1'b1;
        end else begin
          sda_oe <= 1'b0;                                // master acks
        end
      end else if (ack_phase) begin
        ack_phase <= 1'b0;
        bytes     <= bytes + 1;
        if (rd && (bytes == 0 || master_ack)) begin
          sh     <= mem[bytes];
          sda_oe <= !mem[bytes][7];
        end else begin
          sda_oe <= 1'b0;
        end
      end else if (rd && bytes > 0) begin
        sda_oe <= !sh[7 - bitn];
      end
    end
  end
endmodule
