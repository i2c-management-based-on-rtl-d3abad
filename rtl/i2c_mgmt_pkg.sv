// i2c_mgmt_pkg: types and constants shared by the I2C management blocks.
//
// The I2C master exposes five 8-bit registers on a small Wishbone bus. Their
// addresses are the "register port" codes 0000..0100 of the initialization
// command (Table I of the design description): PRERlo, PRERhi, control, TXR/RXR
// and CR/SR. Codes with bit 3 set are private operations of the initialization
// controller itself. The bit positions inside CR and SR follow the widely used
// open-source Wishbone I2C master; the status-register polling of the
// initialization FSM tests SR bit 1 (transfer in progress) and SR bit 7
// (acknowledge received), which matches that layout.
//
// The IPbus bus types carry the usual 32-bit address and data of an IPbus slave
// port (strobe/write in, rdata/ack/err out).
package i2c_mgmt_pkg;

  // ---------------------------------------------------------------- Wishbone
  localparam int unsigned WB_AW = 3;
  localparam int unsigned WB_DW = 8;

  typedef struct packed {
    logic [WB_AW-1:0] adr;
    logic [WB_DW-1:0] dat;
    logic             we;
    logic             stb;
    logic             cyc;
  } wb_m2s_t;

  typedef struct packed {
    logic [WB_DW-1:0] dat;
    logic             ack;
  } wb_s2m_t;

  // I2C master register addresses (Table I, left half)
  localparam logic [WB_AW-1:0] REG_PRERLO = 3'd0;
  localparam logic [WB_AW-1:0] REG_PRERHI = 3'd1;
  localparam logic [WB_AW-1:0] REG_CTR    = 3'd2;
  localparam logic [WB_AW-1:0] REG_TXRXR  = 3'd3;
  localparam logic [WB_AW-1:0] REG_CRSR   = 3'd4;

  // Control register bits
  localparam int unsigned CTR_EN  = 7;
  localparam int unsigned CTR_IEN = 6;

  // Command register bits
  localparam int unsigned CR_STA  = 7;
  localparam int unsigned CR_STO  = 6;
  localparam int unsigned CR_RD   = 5;
  localparam int unsigned CR_WR   = 4;
  localparam int unsigned CR_ACK  = 3;
  localparam int unsigned CR_IACK = 0;

  // Status register bits
  localparam int unsigned SR_RXACK = 7;
  localparam int unsigned SR_BUSY  = 6;
  localparam int unsigned SR_AL    = 5;
  localparam int unsigned SR_TIP   = 1;
  localparam int unsigned SR_IF    = 0;

  // -------------------------------------------------- initialization command
  // Fig. 3 / Sec. III: [15:13] bus, [12] 1=write 0=read, [11:8] port, [7:0] data
  typedef struct packed {
    logic [2:0] bus;
    logic       wr;
    logic [3:0] port;
    logic [7:0] data;
  } init_cmd_t;

  // Private register ports (Table I, right half; Fig. 4)
  localparam logic [3:0] PORT_WAIT_ACK   = 4'b1000; // poll SR until done, check ACK
  localparam logic [3:0] PORT_WAIT_READ  = 4'b1001; // poll SR until done, no ACK check
  localparam logic [3:0] PORT_OUT_DATA   = 4'b1010; // last read data -> output port
  localparam logic [3:0] PORT_IN_TXR     = 4'b1011; // input port -> TXR
  localparam logic [3:0] PORT_NOP        = 4'b1100; // straight to CMD_END
  localparam logic [3:0] PORT_DONE       = 4'b1111; // configuration done

  function automatic logic [15:0] mk_cmd(logic [2:0] bus, logic wr,
                                         logic [3:0] port, logic [7:0] data);
    return {bus, wr, port, data};
  endfunction

  // ------------------------------------------------------------------ IPbus
  typedef struct packed {
    logic [31:0] addr;
    logic [31:0] wdata;
    logic        strobe;
    logic        write;
  } ipb_wbus_t;

  typedef struct packed {
    logic [31:0] rdata;
    logic        ack;
    logic        err;
  } ipb_rbus_t;

  // Local registers of the IPbus interface, above the I2C master's five
  localparam logic [2:0] IPB_REG_BUSSEL = 3'd5;
  localparam logic [2:0] IPB_REG_STATUS = 3'd6;

endpackage
