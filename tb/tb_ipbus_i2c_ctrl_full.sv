// tb_ipbus_i2c_ctrl_full: one complete power-up and IPbus configuration with
// the module at its default parameters and its built-in command program.
//
// After power-up the initialization must, on its own, route input 0 of the
// crosspoint switch to its outputs 0..4 (registers 0x90..0x94 <- 0) and
// write its update register (0x80 <- 1), read the six-byte MAC
// address from the EEPROM onto the output port and hand the buses to the
// IPbus side. The SCL period on the bus must be 4*(61+1) init clocks. IPbus
// software then opens channel 2 of the bus switch, writes the oscillator's
// 156.25 MHz settings, reads them back and routes the oscillator through the
// crosspoint to a transceiver reference clock.
module tb_ipbus_i2c_ctrl_full;
  import i2c_mgmt_pkg::*;

  logic clk_init = 1'b0, clk_ipb = 1'b0, clk_dev = 1'b0;
  always #5 clk_init = ~clk_init;
  always #4 clk_ipb  = ~clk_ipb;
  always #1 clk_dev  = ~clk_dev;

  logic ipb_rst = 1'b1;
  ipb_wbus_t ipb_w;
  ipb_rbus_t ipb_r;
  logic irq;
  logic [7:0] scl, sda, scl_oe, sda_oe;
  logic [7:0] out_data, out_idx, in_idx;
  logic       out_valid, in_req, busy, done, err, sel_ipb;

  ipbus_i2c_ctrl dut (
    .clk_init, .rst_req(1'b0), .clk_ipb, .ipb_rst,
    .ipb_i(ipb_w), .ipb_o(ipb_r), .irq_o(irq),
    .bus_scl_i(scl), .bus_sda_i(sda), .bus_scl_oe_o(scl_oe), .bus_sda_oe_o(sda_oe),
    .out_data, .out_idx, .out_valid, .in_data(8'h00), .in_idx, .in_req,
    .init_busy(busy), .init_done(done), .init_err(err), .sel_ipb);

  afck_i2c_board_model #(.NUM_BUS(8)) board (.clk(clk_dev), .eeprom_en(1'b1), .scl_oe, .sda_oe, .scl, .sda);
  ipbus_host_model host (.clk(clk_ipb), .ipb_o(ipb_w), .ipb_i(ipb_r));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] mac [6];
  int n_out = 0;
  int unsigned cyc = 0, last_rise = 0, min_period = 32'hFFFF_FFFF;
  logic scl0_d = 1'b1;
  always @(posedge clk_init) begin
    cyc++;
    scl0_d <= scl[0];
    if (scl[0] && !scl0_d) begin
      if (last_rise != 0 && !sel_ipb && (cyc - last_rise) < min_period) min_period = cyc - last_rise;
      last_rise = cyc;
    end
    if (out_valid) begin
      n_out++;
      if (out_idx < 6) mac[out_idx] = out_data;
    end
  end

  logic [7:0] wdat [];
  logic [7:0] rdat [];
  logic nack;
  logic [7:0] st;

  initial begin
    repeat (4) @(posedge clk_init);
    n_out = 0;          // registers start random until the power-up reset acts
    wait (done || err);
    check(done && !err, "initialization completes");
    for (int o = 0; o < 5; o++)
      check(board.xpt.mem[8'h90 + o] == 8'h00, $sformatf("crosspoint output %0d routed to input 0", o));
    check(board.xpt.mem[8'h80] == 8'h01, "crosspoint update written");
    check(n_out == 6, $sformatf("%0d bytes on the output port", n_out));
    for (int i = 0; i < 6; i++)
      check(mac[i] == board.MAC[47 - 8 * i -: 8], $sformatf("MAC byte %0d = %02h", i, mac[i]));
    check(min_period == 4 * (61 + 1), $sformatf("SCL period %0d init clocks", min_period));
    repeat (4) @(posedge clk_init);
    check(sel_ipb, "buses handed to the IPbus side");

    repeat (5) @(posedge clk_ipb);
    ipb_rst = 1'b0;
    repeat (5) @(posedge clk_ipb);
    host.rd(IPB_REG_STATUS, st);
    check(st[1:0] == 2'b01, "IPbus status: done");
    host.setup(16'd311, 3'd0);      // 100 kHz from a 125 MHz IPbus clock
    host.dev_write1(7'h70, 8'h04, nack);
    check(!nack, "bus switch channel 2 opened");
    wdat = new[6];
    wdat = '{8'h01, 8'hC2, 8'hBC, 8'hC0, 8'h1E, 8'h1A};
    host.dev_write(7'h55, 8'h07, wdat, nack);
    check(!nack, "oscillator written");
    host.dev_read(7'h55, 8'h07, 6, rdat, nack);
    for (int i = 0; i < 6; i++)
      check(rdat[i] == wdat[i], $sformatf("oscillator read-back %0d = %02h", i, rdat[i]));
    // route the oscillator (crosspoint input 1) to transceiver output 1, then update
    wdat = new[1];
    wdat[0] = 8'd1;
    host.dev_write(7'h4B, 8'h91, wdat, nack);
    check(!nack, "crosspoint re-routed over IPbus");
    wdat[0] = 8'd1;
    host.dev_write(7'h4B, 8'h80, wdat, nack);
    check(!nack && board.xpt.mem[8'h91] == 8'd1 && board.xpt.mem[8'h90] == 8'd0,
          "transceiver clock now from the oscillator, system clock unchanged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk_init);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
