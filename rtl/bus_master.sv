// bus_master: bridge from the UDP register-access port of the Ethernet core
// to the shared internal control bus.
//
// The Ethernet core (SiTCP) delivers single-byte register accesses as a write
// strobe (rbcp_we) or read strobe (rbcp_re) with a 32-bit address; the lower
// 16 bits select a register on the bus. A write becomes one bus cycle with
// bus.wr high and is acknowledged (rbcp_ack) the cycle after. A read becomes one
// bus cycle with bus.rd high; every slave answers with registered read data one
// cycle after the strobe (zero when not addressed), the bridge captures the OR
// of all answers and acknowledges with the byte on rbcp_rd. Timing: write ack
// 2 cycles after rbcp_we, read ack 3 cycles after rbcp_re. A new request is
// accepted only in the idle state, so back-to-back strobes must wait for ack.
// That UDP accesses drive the control bus is from the paper; the byte-wide
// bus, the timing and the address width are this design's choices.
module bus_master
  import bdaq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        rbcp_act,
  input  logic [31:0] rbcp_addr,
  input  logic        rbcp_we,
  input  logic        rbcp_re,
  input  logic [7:0]  rbcp_wd,
  output logic        rbcp_ack,
  output logic [7:0]  rbcp_rd,
  output bus_req_t    bus,
  input  logic [7:0]  bus_rdata
);
  typedef enum logic [1:0] {S_IDLE, S_WR, S_RD1, S_RD2} state_t;
  state_t state;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      bus      <= '0;
      rbcp_ack <= 1'b0;
      rbcp_rd  <= '0;
    end else begin
      rbcp_ack <= 1'b0;
      bus.wr   <= 1'b0;
      bus.rd   <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (rbcp_act && rbcp_we) begin
            bus.addr  <= rbcp_addr[15:0];
            bus.wdata <= rbcp_wd;
            bus.wr    <= 1'b1;
            state     <= S_WR;
          end else if (rbcp_act && rbcp_re) begin
            bus.addr <= rbcp_addr[15:0];
            bus.rd   <= 1'b1;
            state    <= S_RD1;
          end
        end
        S_WR: begin
          rbcp_ack <= 1'b1;
          state    <= S_IDLE;
        end
        S_RD1: state <= S_RD2;           // slave registers its answer
        S_RD2: begin
          rbcp_rd  <= bus_rdata;
          rbcp_ack <= 1'b1;
          state    <= S_IDLE;
        end
      endcase
    end
  end

  a_no_double: assert property (@(posedge clk) disable iff (rst) !(rbcp_we && rbcp_re));
endmodule
