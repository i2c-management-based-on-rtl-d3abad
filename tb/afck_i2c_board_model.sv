// afck_i2c_board_model: behavioural model of the I2C devices on the board.
//
// Bus 0 (the FPGA's main I2C bus) carries the clock crosspoint switch (0x4B),
// the EUI-48 EEPROM (0x50, MAC address at 0xFA..0xFF, stretches SCL after its
// address), the 8-channel I2C bus switch (0x70, one control register, bit n
// enables channel n) and, behind channel 2 of that switch, the programmable
// clock oscillator (0x55). Bus 1 carries an FMC EEPROM (0x52). The other
// buses have no devices. Lines are open drain: a line is high unless the FPGA
// or a device pulls it low. eeprom_en = 0 makes the EEPROM deaf, to provoke a
// missing acknowledge. The device register maps are generic, not those of
// the real parts.
module afck_i2c_board_model #(
  parameter int NUM_BUS = 8
) (
  input  logic               clk,
  input  logic               eeprom_en,
  input  logic [NUM_BUS-1:0] scl_oe,
  input  logic [NUM_BUS-1:0] sda_oe,
  output logic [NUM_BUS-1:0] scl,
  output logic [NUM_BUS-1:0] sda
);
  localparam logic [47:0] MAC = 48'hFC_C2_3D_12_34_56;

  logic xpt_sda, ee_sda, ee_scl, sw_sda, osc_sda, fmc_sda;
  logic xpt_scl, sw_scl, osc_scl, fmc_scl;

  i2c_slave_model #(.ADDR(7'h4B)) xpt (.clk, .en(1'b1), .scl(scl[0]), .sda(sda[0]),
                                       .sda_low(xpt_sda), .scl_low(xpt_scl));
  i2c_slave_model #(.ADDR(7'h50), .STRETCH(25)) eeprom (.clk, .en(eeprom_en), .scl(scl[0]), .sda(sda[0]),
                                       .sda_low(ee_sda), .scl_low(ee_scl));
  i2c_slave_model #(.ADDR(7'h70), .NO_PTR(1'b1)) i2c_switch (.clk, .en(1'b1), .scl(scl[0]), .sda(sda[0]),
                                       .sda_low(sw_sda), .scl_low(sw_scl));
  i2c_slave_model #(.ADDR(7'h55)) osc (.clk, .en(i2c_switch.mem[0][2]), .scl(scl[0]), .sda(sda[0]),
                                       .sda_low(osc_sda), .scl_low(osc_scl));
  i2c_slave_model #(.ADDR(7'h52)) fmc (.clk, .en(1'b1), .scl(scl[1]), .sda(sda[1]),
                                       .sda_low(fmc_sda), .scl_low(fmc_scl));

  initial begin
    #1;   // after the devices have filled their own registers
    for (int i = 0; i < 6; i++) eeprom.mem[8'hFA + i] = MAC[47 - 8 * i -: 8];
    i2c_switch.mem[0] = 8'h00;
  end

  always_comb begin
    scl = ~scl_oe;
    sda = ~sda_oe;
    scl[0] = ~(scl_oe[0] | xpt_scl | ee_scl | sw_scl | osc_scl);
    sda[0] = ~(sda_oe[0] | xpt_sda | ee_sda | sw_sda | osc_sda);
    scl[1] = ~(scl_oe[1] | fmc_scl);
    sda[1] = ~(sda_oe[1] | fmc_sda);
  end
endmodule
