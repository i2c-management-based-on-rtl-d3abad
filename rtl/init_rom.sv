// init_rom: command ROM of the initialization controller.
//
// A synchronous-read ROM of 2**AW 16-bit commands: the command at addr_i
// appears on data_o one clock after en_i. Each command is
// {bus[2:0], write, port[3:0], data[7:0]} (see i2c_mgmt_pkg::init_cmd_t).
//
// Contents. If INIT_FILE names a hex file ($readmemh format, one 16-bit word
// per line), the ROM is loaded from it. Otherwise it holds a built-in program
// that follows the power-up sequence of the design description: set the SCL
// prescaler, enable the core, route the 125 MHz oscillator input of the clock
// crosspoint switch to its five destinations (the FPGA system clock and the
// reference clocks of four serial transceivers) and latch the new routing,
// read the six-byte EUI-48 MAC address from the EEPROM, send each byte to the
// output port (byte index in the command's data field) and finish with
// "config done". The destinations and the input come from the description;
// the crosspoint register layout (one source register per output at
// XPT_MAP_BASE + output, an update register), the device addresses, the
// EEPROM offset and the prescaler are this implementation's assumptions, as
// the description gives no values. Unused words read as "config done".
//
// Built-in program, written with W(dev,reg,val) = 9 commands
//   TXR<-dev<<1, CR<-STA|WR, wait-ack, TXR<-reg, CR<-WR, wait-ack,
//   TXR<-val, CR<-WR|STO, wait-ack
//   words 0..2            PRERlo, PRERhi, CTR <- 0x80
//   next 9*(NUM_XPT_OUT+1) W(XPT, XPT_MAP_BASE+XPT_OUTS[i], XPT_IN) for each
//                         output i, then W(XPT, XPT_UPD_REG, XPT_UPD_VAL)
//   next 9                EEPROM pointer write and repeated start for reading
//   next 24               per MAC byte: CR <- RD (RD|NACK|STO for the last),
//                         wait (no ACK check), read RXR, output transfer
//   next 1                config done
module init_rom
  import i2c_mgmt_pkg::*;
#(
  parameter int unsigned AW         = 8,
  parameter string       INIT_FILE  = "",
  parameter logic [15:0] PRESCALE   = 16'd61,   // SCL = f_clk / (4*(PRESCALE+1))
  parameter logic [2:0]  BUS          = 3'd0,
  parameter logic [6:0]  XPT_ADDR     = 7'h4B,
  parameter int unsigned NUM_XPT_OUT  = 5,        // system clock + 4 transceivers
  parameter logic [NUM_XPT_OUT-1:0][7:0] XPT_OUTS = {8'd4, 8'd3, 8'd2, 8'd1, 8'd0},
  parameter logic [7:0]  XPT_IN       = 8'd0,     // input carrying the 125 MHz
  parameter logic [7:0]  XPT_MAP_BASE = 8'h90,
  parameter logic [7:0]  XPT_UPD_REG  = 8'h80,
  parameter logic [7:0]  XPT_UPD_VAL  = 8'h01,
  parameter logic [6:0]  EE_ADDR      = 7'h50,
  parameter logic [7:0]  EE_OFFSET    = 8'hFA
) (
  input  logic          clk,
  input  logic          en_i,
  input  logic [AW-1:0] addr_i,
  output logic [15:0]   data_o
);

  localparam int unsigned DEPTH = 1 << AW;

  localparam logic [7:0] C_STA_WR     = 8'h90;
  localparam logic [7:0] C_WR         = 8'h10;
  localparam logic [7:0] C_WR_STO     = 8'h50;
  localparam logic [7:0] C_RD_ACK     = 8'h20;
  localparam logic [7:0] C_RD_NAK_STO = 8'h68;

  localparam int unsigned XPT_END = 3 + 9 * (NUM_XPT_OUT + 1);
  localparam int unsigned EE_END  = XPT_END + 9;
  localparam int unsigned MAC_END = EE_END + 24;

  // Word n of the built-in program.
  function automatic logic [15:0] program_word(int unsigned n);
    logic [15:0] w;
    int unsigned k, wi;
    logic [7:0]  r, v;
    w = mk_cmd(BUS, 1'b1, PORT_DONE, 8'h00);
    if (n == 0)      w = mk_cmd(BUS, 1'b1, {1'b0, REG_PRERLO}, PRESCALE[7:0]);
    else if (n == 1) w = mk_cmd(BUS, 1'b1, {1'b0, REG_PRERHI}, PRESCALE[15:8]);
    else if (n == 2) w = mk_cmd(BUS, 1'b1, {1'b0, REG_CTR},    8'h80);
    else if (n < XPT_END) begin
      // crosspoint: one write per output, then the update register
      wi = (n - 3) / 9;
      k  = (n - 3) % 9;
      r  = XPT_UPD_REG;
      v  = XPT_UPD_VAL;
      for (int unsigned i = 0; i < NUM_XPT_OUT; i++)
        if (wi == i) begin r = XPT_MAP_BASE + XPT_OUTS[i]; v = XPT_IN; end
      unique case (k)
        0: w = mk_cmd(BUS, 1'b1, {1'b0, REG_TXRXR}, {XPT_ADDR, 1'b0});
        1: w = mk_cmd(BUS, 1'b1, {1'b0, REG_CRSR},  C_STA_WR);
        3: w = mk_cmd(BUS, 1'b1, {1'b0, REG_TXRXR}, r);
        4: w = mk_cmd(BUS, 1'b1, {1'b0, REG_CRSR},  C_WR);
        6: w = mk_cmd(BUS, 1'b1, {1'b0, REG_TXRXR}, v);
        7: w = mk_cmd(BUS, 1'b1, {1'b0, REG_CRSR},  C_WR_STO);
        default: w = mk_cmd(BUS, 1'b1, PORT_WAIT_ACK, 8'h00);
      endcase
    end else if (n < EE_END) begin
      // EEPROM pointer write and repeated start
      unique case (n - XPT_END)
        0: w = mk_cmd(BUS, 1'b1, {1'b0, REG_TXRXR}, {EE_ADDR, 1'b0});
        1: w = mk_cmd(BUS, 1'b1, {1'b0, REG_CRSR},  C_STA_WR);
        3: w = mk_cmd(BUS, 1'b1, {1'b0, REG_TXRXR}, EE_OFFSET);
        4: w = mk_cmd(BUS, 1'b1, {1'b0, REG_CRSR},  C_WR);
        6: w = mk_cmd(BUS, 1'b1, {1'b0, REG_TXRXR}, {EE_ADDR, 1'b1});
        7: w = mk_cmd(BUS, 1'b1, {1'b0, REG_CRSR},  C_STA_WR);
        default: w = mk_cmd(BUS, 1'b1, PORT_WAIT_ACK, 8'h00);
      endcase
    end else if (n < MAC_END) begin
      // six MAC bytes, four commands per byte
      k = (n - EE_END) % 4;
      unique case (k)
        0: w = mk_cmd(BUS, 1'b1, {1'b0, REG_CRSR},
                      ((n - EE_END) / 4 == 5) ? C_RD_NAK_STO : C_RD_ACK);
        1: w = mk_cmd(BUS, 1'b1, PORT_WAIT_READ, 8'h00);
        2: w = mk_cmd(BUS, 1'b0, {1'b0, REG_TXRXR}, 8'h00);
        default: w = mk_cmd(BUS, 1'b1, PORT_OUT_DATA, 8'((n - EE_END) / 4));
      endcase
    end
    return w;
  endfunction

  if (INIT_FILE == "" && MAC_END + 1 > DEPTH) begin : g_fit
    $error("init_rom: the built-in program does not fit in 2**AW words");
  end

  logic [15:0] mem [DEPTH];

  initial begin
    if (INIT_FILE != "") begin
      for (int unsigned i = 0; i < DEPTH; i++) mem[i] = mk_cmd(3'd0, 1'b1, PORT_DONE, 8'h00);
      $readmemh(INIT_FILE, mem);
    end else begin
      for (int unsigned i = 0; i < DEPTH; i++) mem[i] = program_word(i);
    end
  end

  always_ff @(posedge clk) begin
    if (en_i) data_o <= mem[addr_i];
  end

endmodule
