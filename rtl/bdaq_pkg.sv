// bdaq_pkg: types and constants shared by the readout core.
//
// The core is a set of modules on one control bus (8-bit data, 16-bit
// address, single-cycle write strobe, read data one cycle after the read
// strobe) and one data path of 72-bit tagged words. The tagged word carries a
// data type header and a channel ID in front of a 64-bit payload, so that one
// Aurora frame from one lane fits one word and software can tell every source
// apart. The 72-bit width matches the widest block RAM port of the FPGA
// family. Tag values, the address map and the command symbol tables are
// choices of this design; the symbol tables follow the RD53A command protocol.
package bdaq_pkg;

  // ---------------- control bus ----------------
  typedef struct packed {
    logic [15:0] addr;
    logic [7:0]  wdata;
    logic        wr;
    logic        rd;
  } bus_req_t;

  // base addresses of the bus slaves
  localparam logic [15:0] CMD_BASE   = 16'h1000;  // command encoder, 0x1000..0x1FFF
  localparam logic [15:0] RX_BASE    = 16'h2000;  // lane receivers, 0x10 per lane
  localparam logic [15:0] TLU_BASE   = 16'h3000;
  localparam logic [15:0] HTRIG_BASE = 16'h3100;
  localparam logic [15:0] TDC_BASE   = 16'h3200;
  localparam logic [15:0] I2C_BASE   = 16'h3300;
  localparam logic [15:0] FIFO_BASE  = 16'h3400;

  // ---------------- tagged data words ----------------
  typedef enum logic [3:0] {
    WT_NONE         = 4'h0,
    WT_AURORA_DATA  = 4'h1,  // 64-bit Aurora data frame
    WT_AURORA_USERK = 4'h2,  // Aurora control frame that is not idle (register data)
    WT_TRIGGER      = 4'h3,  // accepted trigger: number and time stamp
    WT_TDC          = 4'h4   // HitOr pulse width measurement
  } word_type_t;

  typedef struct packed {
    word_type_t  wtype;
    logic [3:0]  chan;
    logic [63:0] payload;
  } daq_word_t;  // 72 bits

  localparam int DAQ_WORD_BYTES = 9;

  // ---------------- RD53A command symbols ----------------
  localparam logic [15:0] SYNC_FRAME = 16'h817E;

  // 5-bit data value -> 8-bit DC-balanced symbol
  function automatic logic [7:0] data_sym(input logic [4:0] v);
    case (v)
      5'd0:  return 8'h6A;  5'd1:  return 8'h6C;  5'd2:  return 8'h71;  5'd3:  return 8'h72;
      5'd4:  return 8'h74;  5'd5:  return 8'h8B;  5'd6:  return 8'h8D;  5'd7:  return 8'h8E;
      5'd8:  return 8'h93;  5'd9:  return 8'h95;  5'd10: return 8'h96;  5'd11: return 8'h99;
      5'd12: return 8'h9A;  5'd13: return 8'h9C;  5'd14: return 8'hA3;  5'd15: return 8'hA5;
      5'd16: return 8'hA6;  5'd17: return 8'hA9;  5'd18: return 8'hAA;  5'd19: return 8'hAC;
      5'd20: return 8'hB1;  5'd21: return 8'hB2;  5'd22: return 8'hB4;  5'd23: return 8'hC3;
      5'd24: return 8'hC5;  5'd25: return 8'hC6;  5'd26: return 8'hC9;  5'd27: return 8'hCA;
      5'd28: return 8'hCC;  5'd29: return 8'hD1;  5'd30: return 8'hD2;  default: return 8'hD4;
    endcase
  endfunction

  // 4-bit trigger pattern (one bit per bunch crossing, MSB first) -> symbol
  function automatic logic [7:0] trig_sym(input logic [3:0] p);
    case (p)
      4'd1:  return 8'h2B;  4'd2:  return 8'h2D;  4'd3:  return 8'h2E;  4'd4:  return 8'h33;
      4'd5:  return 8'h35;  4'd6:  return 8'h36;  4'd7:  return 8'h39;  4'd8:  return 8'h3A;
      4'd9:  return 8'h3C;  4'd10: return 8'h4B;  4'd11: return 8'h4D;  4'd12: return 8'h4E;
      4'd13: return 8'h53;  4'd14: return 8'h55;  default: return 8'h56;
    endcase
  endfunction

  // ---------------- Aurora 64b/66b ----------------
  localparam logic [1:0] AURORA_HDR_DATA = 2'b01;
  localparam logic [1:0] AURORA_HDR_CTRL = 2'b10;
  localparam logic [7:0] AURORA_BTF_IDLE = 8'h78;  // block type of idle / clock-compensation blocks

endpackage
