// ipbus_i2c_ctrl: I2C management module, top level.
//
// Two I2C masters share the board's I2C buses. At power-up the
// initialization side owns them: auto_rst holds it in reset for a few cycles,
// the release starts i2c_init_ctrl, which executes the command program in
// init_rom through its own i2c_master (set the SCL rate, enable the core,
// configure the clock crosspoint switch, read the EUI-48 MAC address out of
// the EEPROM onto the output port). When the program reaches its "config
// done" command, i2c_bus_mux hands the buses to the second i2c_master, which
// IPbus software drives through ipbus_wishbone_interface.
//
//   auto_rst --rst/config--> i2c_init_ctrl <--> i2c_master --+
//   init_rom ---commands---> i2c_init_ctrl                    +--> i2c_bus_mux <--> NUM_BUS I2C buses
//   IPbus <--> ipbus_wishbone_interface <--> i2c_master -----+
//
// Clocks: the initialization side runs on clk_init, a clock that is present
// before the board clocks are set up; the IPbus side runs on clk_ipb, the
// system clock that exists only once initialization has configured the
// crosspoint switch. ipb_rst resets the IPbus side. rst_req (clk_init domain)
// repeats the power-up reset and so the whole initialization.
//
// Interface: an IPbus slave port (ipb_i/ipb_o, word addresses 0..7), open-drain
// SCL/SDA for every bus (*_oe = 1 pulls low), the initialization output port
// (out_data/out_idx/out_valid, clk_init domain), the input port (in_data read
// while in_req is high, in_idx tells which byte), status and the IPbus-side
// master's interrupt.
//
// The structure (blocks and connections) is the one of the description's
// module diagram; INIT_FILE lets a board-specific command program replace the
// built-in one.
module ipbus_i2c_ctrl
  import i2c_mgmt_pkg::*;
#(
  parameter int unsigned NUM_BUS    = 8,
  parameter int unsigned ROM_AW     = 8,
  parameter int unsigned RST_CYCLES = 16,
  parameter string       INIT_FILE  = "",
  parameter logic [15:0] PRESCALE   = 16'd61
) (
  input  logic               clk_init,
  input  logic               rst_req,
  input  logic               clk_ipb,
  input  logic               ipb_rst,
  // IPbus slave port
  input  ipb_wbus_t          ipb_i,
  output ipb_rbus_t          ipb_o,
  output logic               irq_o,
  // I2C buses
  input  logic [NUM_BUS-1:0] bus_scl_i,
  input  logic [NUM_BUS-1:0] bus_sda_i,
  output logic [NUM_BUS-1:0] bus_scl_oe_o,
  output logic [NUM_BUS-1:0] bus_sda_oe_o,
  // initialization output and input ports
  output logic [7:0]         out_data,
  output logic [7:0]         out_idx,
  output logic               out_valid,
  input  logic [7:0]         in_data,
  output logic [7:0]         in_idx,
  output logic               in_req,
  // status
  output logic               init_busy,
  output logic               init_done,
  output logic               init_err,
  output logic               sel_ipb
);

  // ---------------------------------------------------- initialization side
  logic rst_init, config_s;

  auto_rst #(.RST_CYCLES(RST_CYCLES)) u_auto_rst (
    .clk      (clk_init),
    .rst_req_i(rst_req),
    .rst_o    (rst_init),
    .config_o (config_s)
  );

  logic              rom_en;
  logic [ROM_AW-1:0] rom_addr;
  logic [15:0]       rom_data;

  init_rom #(.AW(ROM_AW), .INIT_FILE(INIT_FILE), .PRESCALE(PRESCALE)) u_init_rom (
    .clk   (clk_init),
    .en_i  (rom_en),
    .addr_i(rom_addr),
    .data_o(rom_data)
  );

  wb_m2s_t    init_wb_m2s;
  wb_s2m_t    init_wb_s2m;
  logic [2:0] init_bus;

  i2c_init_ctrl #(.ROM_AW(ROM_AW)) u_init_ctrl (
    .clk        (clk_init),
    .rst        (rst_init),
    .config_i   (config_s),
    .rom_en_o   (rom_en),
    .rom_addr_o (rom_addr),
    .rom_data_i (rom_data),
    .wb_o       (init_wb_m2s),
    .wb_i       (init_wb_s2m),
    .bus_sel_o  (init_bus),
    .out_data_o (out_data),
    .out_idx_o  (out_idx),
    .out_valid_o(out_valid),
    .in_data_i  (in_data),
    .in_idx_o   (in_idx),
    .in_req_o   (in_req),
    .done_o     (init_done),
    .err_o      (init_err),
    .busy_o     (init_busy)
  );

  logic init_scl_oe, init_sda_oe, init_scl, init_sda;
  logic init_irq_unused;

  i2c_master u_init_master (
    .clk     (clk_init),
    .rst     (rst_init),
    .wb_i    (init_wb_m2s),
    .wb_o    (init_wb_s2m),
    .irq_o   (init_irq_unused),
    .scl_i   (init_scl),
    .scl_oe_o(init_scl_oe),
    .sda_i   (init_sda),
    .sda_oe_o(init_sda_oe)
  );

  // ------------------------------------------------------------ IPbus side
  wb_m2s_t    ipb_wb_m2s;
  wb_s2m_t    ipb_wb_s2m;
  logic [2:0] ipb_bus;

  ipbus_wishbone_interface u_ipb_if (
    .clk        (clk_ipb),
    .rst        (ipb_rst),
    .ipb_i      (ipb_i),
    .ipb_o      (ipb_o),
    .wb_o       (ipb_wb_m2s),
    .wb_i       (ipb_wb_s2m),
    .bus_sel_o  (ipb_bus),
    .init_done_i(init_done),
    .init_err_i (init_err)
  );

  logic ipb_scl_oe, ipb_sda_oe, ipb_scl, ipb_sda;

  i2c_master u_ipb_master (
    .clk     (clk_ipb),
    .rst     (ipb_rst),
    .wb_i    (ipb_wb_m2s),
    .wb_o    (ipb_wb_s2m),
    .irq_o   (irq_o),
    .scl_i   (ipb_scl),
    .scl_oe_o(ipb_scl_oe),
    .sda_i   (ipb_sda),
    .sda_oe_o(ipb_sda_oe)
  );

  // ------------------------------------------------------------------- MUX
  i2c_bus_mux #(.NUM_BUS(NUM_BUS)) u_mux (
    .clk          (clk_init),
    .rst          (rst_init),
    .init_done_i  (init_done),
    .sel_ipb_o    (sel_ipb),
    .init_bus_i   (init_bus),
    .init_scl_oe_i(init_scl_oe),
    .init_sda_oe_i(init_sda_oe),
    .init_scl_o   (init_scl),
    .init_sda_o   (init_sda),
    .ipb_bus_i    (ipb_bus),
    .ipb_scl_oe_i (ipb_scl_oe),
    .ipb_sda_oe_i (ipb_sda_oe),
    .ipb_scl_o    (ipb_scl),
    .ipb_sda_o    (ipb_sda),
    .bus_scl_i    (bus_scl_i),
    .bus_sda_i    (bus_sda_i),
    .bus_scl_oe_o (bus_scl_oe_o),
    .bus_sda_oe_o (bus_sda_oe_o)
  );

endmodule
