// i2c_master: I2C controller for the programmable reference clock chip.
//
// Software writes the target byte (7-bit address << 1 | R/W), the transfer
// size (1..16 bytes) and, for a write, the data bytes into a 16-byte buffer,
// then starts the transfer. The controller sends START, the address byte and
// then writes the buffer bytes (checking the target's ACK after each) or reads
// size bytes into the buffer (ACK after each but the last, NACK after the
// last), and ends with STOP. A missing ACK ends the transfer at once with
// STOP and sets the nack flag. Each bit takes four phases of CLK_DIV clocks:
// SCL low with SDA set, SCL released, SCL high with SDA sampled, SCL pulled
// low. CLK_DIV = 400 gives 100 kHz SCL from a 160 MHz clock. Both lines are
// open drain: *_oe = 1 pulls the line low, otherwise it floats high;
// clock stretching is not supported.
// Registers (offsets from BASEADDR): 0 W bit0 start / R bit0 ready,
// bit1 nack; 1 target byte; 2 size; 0x10..0x1F data buffer.
// From the paper: an I2C controller on the control bus programs the
// reference clock. Everything about how it works is this design's choice.
module i2c_master
  import bdaq_pkg::*;
#(
  parameter logic [15:0] BASEADDR = I2C_BASE,
  parameter int unsigned CLK_DIV  = 400
) (
  input  logic       clk,
  input  logic       rst,
  input  bus_req_t   bus,
  output logic [7:0] rdata,
  output logic       scl_oe,
  output logic       sda_oe,
  input  logic       sda_in
);
  typedef enum logic [2:0] {S_IDLE, S_START, S_BIT, S_STOP} state_t;

  state_t      state;
  logic [7:0]  mem [16];
  logic [7:0]  target, size;
  logic        nack;
  logic [1:0]  phase;
  logic [$clog2(CLK_DIV)-1:0] div;
  logic        tick;
  logic [4:0]  byte_i;   // 0 = address byte, 1.. = data bytes
  logic [3:0]  bit_i;    // 7..0 data bits, 8 = ACK slot
  logic [7:0]  shreg;
  logic        reading, start;
  logic        sda_bit;  // level to drive in this bit slot (1 = release)

  assign tick    = (div == $bits(div)'(CLK_DIV - 1));
  assign reading = target[0];

  always_comb begin
    if (bit_i == 4'd8) begin
      // ACK slot: we acknowledge read bytes except the last
      sda_bit = !(reading && byte_i != 5'd0 && byte_i != 5'(size));
    end else if (reading && byte_i != 5'd0) begin
      sda_bit = 1'b1;
    end else begin
      sda_bit = shreg[bit_i[2:0]];
    end
  end

  logic sel;
  logic [4:0] off;
  assign sel = bus.addr[15:5] == BASEADDR[15:5];
  assign off = bus.addr[4:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= S_IDLE;
      scl_oe <= 1'b0;
      sda_oe <= 1'b0;
      nack   <= 1'b0;
      phase  <= '0;
      div    <= '0;
      byte_i <= '0;
      bit_i  <= '0;
      shreg  <= '0;
      target <= '0;
      size   <= 8'd1;
      start  <= 1'b0;
      rdata  <= '0;
    end else begin
      start <= 1'b0;
      if (bus.wr && sel && state == S_IDLE) begin
        if (off == 5'd0) start <= bus.wdata[0];
        if (off == 5'd1) target <= bus.wdata;
        if (off == 5'd2) size <= (bus.wdata == '0) ? 8'd1 : (bus.wdata > 8'd16 ? 8'd16 : bus.wdata);
        if (off[4]) mem[off[3:0]] <= bus.wdata;
      end
      rdata <= '0;
      if (bus.rd && sel) begin
        if (off == 5'd0) rdata <= {6'd0, nack, state == S_IDLE};
        else if (off == 5'd1) rdata <= target;
        else if (off == 5'd2) rdata <= size;
        else if (off[4]) rdata <= mem[off[3:0]];
      end

      div <= (state == S_IDLE || tick) ? '0 : div + 1'b1;

      unique case (state)
        S_IDLE: begin
          scl_oe <= 1'b0;
          sda_oe <= 1'b0;
          phase  <= '0;
          if (start) begin
            nack   <= 1'b0;
            state  <= S_START;
          end
        end
        S_START: if (tick) begin
          phase <= phase + 2'd1;
          if (phase == 2'd2) sda_oe <= 1'b1;        // SDA falls while SCL high
          if (phase == 2'd3) begin
            scl_oe <= 1'b1;
            state  <= S_BIT;
            byte_i <= '0;
            bit_i  <= 4'd7;
            shreg  <= target;
          end
        end
        S_BIT: if (tick) begin
          phase <= phase + 2'd1;
          unique case (phase)
            2'd0: sda_oe <= !sda_bit;
            2'd1: scl_oe <= 1'b0;
            2'd2: begin
              if (bit_i == 4'd8) begin
                if (!(reading && byte_i != 5'd0) && sda_in) nack <= 1'b1;
              end else if (reading && byte_i != 5'd0) begin
                shreg[bit_i[2:0]] <= sda_in;
              end
            end
            2'd3: begin
              scl_oe <= 1'b1;
              if (bit_i == 4'd8) begin
                if (reading && byte_i != 5'd0) mem[byte_i[3:0] - 4'd1] <= shreg;
                if (nack || byte_i == 5'(size)) begin
                  state <= S_STOP;
                end else begin
                  byte_i <= byte_i + 5'd1;
                  bit_i  <= 4'd7;
                  shreg  <= mem[byte_i[3:0]];
                end
              end else if (bit_i == 4'd0) begin
                bit_i <= 4'd8;
              end else begin
                bit_i <= bit_i - 4'd1;
              end
            end
          endcase
        end
        S_STOP: if (tick) begin
          phase <= phase + 2'd1;
          if (phase == 2'd0) sda_oe <= 1'b1;
          if (phase == 2'd1) scl_oe <= 1'b0;
          if (phase == 2'd2) sda_oe <= 1'b0;        // SDA rises while SCL high
          if (phase == 2'd3) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (CLK_DIV >= 2) else $error("i2c_master: CLK_DIV must be at least 2");
endmodule
