// i2c_bus_mux: connects one of the two I2C masters to one of NUM_BUS I2C buses.
//
// Two choices are made here. Which master: the initialization master owns the
// buses from reset until init_done_i is seen, then the IPbus master owns them
// for good (until the next reset from the power-up reset block). Which bus:
// the owning master's bus number (the command's bus field on the
// initialization side, a register on the IPbus side) selects the bus whose
// SCL/SDA pull-downs follow that master; every other bus is released. The
// owning master reads back the selected bus's line levels; the other master
// reads an idle bus (both lines high). A bus number of NUM_BUS or more selects
// no bus.
//
// Interface: open-drain style, *_oe = 1 pulls the line low. The line paths are
// combinational; only the owner flag is a register (clocked by the
// initialization clock, reset by the power-up reset). The IPbus bus number
// comes from the IPbus clock domain and is used without synchronization: it is
// a quasi-static setting that software changes between transfers.
//
// From the description: a multiplexer between the two I2C masters and the
// devices, switched automatically when initialization is finished, and the
// selection of "the appointed I2C bus" by the command's bus field. The
// owner-flag register and the idle view for the unselected master are this
// design's choices.
module i2c_bus_mux #(
  parameter int unsigned NUM_BUS = 8
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               init_done_i,
  output logic               sel_ipb_o,
  // initialization-side master
  input  logic [2:0]         init_bus_i,
  input  logic               init_scl_oe_i,
  input  logic               init_sda_oe_i,
  output logic               init_scl_o,
  output logic               init_sda_o,
  // IPbus-side master
  input  logic [2:0]         ipb_bus_i,
  input  logic               ipb_scl_oe_i,
  input  logic               ipb_sda_oe_i,
  output logic               ipb_scl_o,
  output logic               ipb_sda_o,
  // I2C buses
  input  logic [NUM_BUS-1:0] bus_scl_i,
  input  logic [NUM_BUS-1:0] bus_sda_i,
  output logic [NUM_BUS-1:0] bus_scl_oe_o,
  output logic [NUM_BUS-1:0] bus_sda_oe_o
);

  logic sel_ipb;

  always_ff @(posedge clk) begin
    if (rst)              sel_ipb <= 1'b0;
    else if (init_done_i) sel_ipb <= 1'b1;
  end
  assign sel_ipb_o = sel_ipb;

  logic [2:0] bus;
  logic       scl_oe, sda_oe, scl_sel, sda_sel;

  always_comb begin
    bus    = sel_ipb ? ipb_bus_i    : init_bus_i;
    scl_oe = sel_ipb ? ipb_scl_oe_i : init_scl_oe_i;
    sda_oe = sel_ipb ? ipb_sda_oe_i : init_sda_oe_i;
    bus_scl_oe_o = '0;
    bus_sda_oe_o = '0;
    scl_sel = 1'b1;
    sda_sel = 1'b1;
    for (int unsigned i = 0; i < NUM_BUS; i++) begin
      if (32'(bus) == i) begin
        bus_scl_oe_o[i] = scl_oe;
        bus_sda_oe_o[i] = sda_oe;
        scl_sel         = bus_scl_i[i];
        sda_sel         = bus_sda_i[i];
      end
    end
    init_scl_o = sel_ipb ? 1'b1 : scl_sel;
    init_sda_o = sel_ipb ? 1'b1 : sda_sel;
    ipb_scl_o  = sel_ipb ? scl_sel : 1'b1;
    ipb_sda_o  = sel_ipb ? sda_sel : 1'b1;
  end

endmodule
