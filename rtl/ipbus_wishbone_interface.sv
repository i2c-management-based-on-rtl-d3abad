// ipbus_wishbone_interface: IPbus slave in front of the IPbus-side I2C master.
//
// IPbus word addresses 0..4 (addr[2:0]) are passed to the I2C master's
// Wishbone port, so software sees PRERlo, PRERhi, CTR, TXR/RXR and CR/SR in
// the low byte of IPbus words 0..4. Two local registers follow:
//   5  BUSSEL (R/W) bits 2:0 select the I2C bus the IPbus master drives
//   6  STATUS (R)   bit 0 initialization done, bit 1 initialization error
//                   (both brought into this clock domain by two flip-flops)
//   7  answers with err.
// Higher address bits are ignored; address decoding belongs to the IPbus
// fabric in front of this slave.
//
// Timing: the I2C master acks one cycle after the strobe; the local
// registers do the same. As for any IPbus slave, the master keeps strobe high
// until ack and drops it in the cycle after ack.
//
// From the description: an IPbus-to-Wishbone connection of the I2C master, so
// that "IPbus controls i2c device by reading or writing these registers". The
// bus-select and status registers and the error response are this design's
// choices; the description does not say how the IPbus side chooses a bus.
module ipbus_wishbone_interface
  import i2c_mgmt_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  ipb_wbus_t ipb_i,
  output ipb_rbus_t ipb_o,
  output wb_m2s_t   wb_o,
  input  wb_s2m_t   wb_i,
  output logic [2:0] bus_sel_o,
  input  logic      init_done_i,
  input  logic      init_err_i
);

  logic [2:0] a;
  logic       to_master;
  assign a         = ipb_i.addr[2:0];
  assign to_master = (a <= REG_CRSR);

  // Wishbone side
  always_comb begin
    wb_o     = '0;
    wb_o.adr = a;
    wb_o.dat = ipb_i.wdata[7:0];
    wb_o.we  = ipb_i.write;
    wb_o.stb = ipb_i.strobe & to_master;
    wb_o.cyc = ipb_i.strobe & to_master;
  end

  // local registers
  logic [2:0] bus_sel;
  logic [1:0] done_sync, err_sync;
  logic       l_ack, l_err;
  logic [7:0] l_rdata;
  logic       l_acc;
  assign l_acc = ipb_i.strobe & ~to_master & ~l_ack & ~l_err;

  always_ff @(posedge clk) begin
    if (rst) begin
      bus_sel   <= '0;
      done_sync <= '0;
      err_sync  <= '0;
      l_ack     <= 1'b0;
      l_err     <= 1'b0;
      l_rdata   <= '0;
    end else begin
      done_sync <= {done_sync[0], init_done_i};
      err_sync  <= {err_sync[0],  init_err_i};
      l_ack     <= l_acc && (a != 3'd7);
      l_err     <= l_acc && (a == 3'd7);
      if (l_acc) begin
        unique case (a)
          IPB_REG_BUSSEL: begin
            if (ipb_i.write) bus_sel <= ipb_i.wdata[2:0];
            l_rdata <= {5'd0, ipb_i.write ? ipb_i.wdata[2:0] : bus_sel};
          end
          IPB_REG_STATUS: l_rdata <= {6'd0, err_sync[1], done_sync[1]};
          default:        l_rdata <= '0;
        endcase
      end
    end
  end

  assign bus_sel_o = bus_sel;

  always_comb begin
    ipb_o.ack   = wb_i.ack | l_ack;
    ipb_o.err   = l_err;
    ipb_o.rdata = {24'd0, wb_i.ack ? wb_i.dat : l_rdata};
  end

endmodule
