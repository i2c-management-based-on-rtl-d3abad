// tb_ipbus_i2c_ctrl: end-to-end test of the I2C management module.
//
// The module runs against a model of the board's I2C devices and an IPbus
// host model, with the command program tb/init_program_e2e.hex (prescaler 4,
// a crosspoint write whose value comes from the input port, a no-op, the
// six-byte MAC read to the output port, a write to a device on bus 1, config
// done). Sequence:
//   1. power-up with the EEPROM deaf: the initialization must stop in ERROR
//      at the EEPROM address, and the buses must stay with the init side;
//   2. EEPROM enabled, rst_req: the program runs to the end; the MAC bytes on
//      the output port, the crosspoint and bus-1 registers are checked, and
//      the buses pass to the IPbus side;
//   3. IPbus software sets up its master, finds the oscillator unreachable,
//      opens channel 2 of the bus switch, writes the 156.25 MHz settings to
//      the oscillator, reads them back, and reads the bus-1 device.
// Each mechanism is counted and a mechanism that never happened is a failure:
// initialization runs, NACK errors, TIP polling loops, input-port and
// output-port transfers, no-ops, clock stretching, commands on two buses,
// the hand-over, IPbus transfers and the IPbus master's interrupt.
module tb_ipbus_i2c_ctrl;
  import i2c_mgmt_pkg::*;

  localparam int NB = 8;

  logic clk_init = 1'b0, clk_ipb = 1'b0, clk_dev = 1'b0;
  always #5 clk_init = ~clk_init;
  always #4 clk_ipb  = ~clk_ipb;
  always #1 clk_dev  = ~clk_dev;

  logic ipb_rst = 1'b1, rst_req = 1'b0, eeprom_en = 1'b0;
  ipb_wbus_t ipb_w;
  ipb_rbus_t ipb_r;
  logic irq;
  logic [NB-1:0] scl, sda, scl_oe, sda_oe;
  logic [7:0] out_data, out_idx, in_idx;
  logic       out_valid, in_req, busy, done, err, sel_ipb;
  logic [7:0] in_data;

  ipbus_i2c_ctrl #(.INIT_FILE("tb/init_program_e2e.hex"), .RST_CYCLES(8)) dut (
    .clk_init, .rst_req, .clk_ipb, .ipb_rst,
    .ipb_i(ipb_w), .ipb_o(ipb_r), .irq_o(irq),
    .bus_scl_i(scl), .bus_sda_i(sda), .bus_scl_oe_o(scl_oe), .bus_sda_oe_o(sda_oe),
    .out_data, .out_idx, .out_valid, .in_data, .in_idx, .in_req,
    .init_busy(busy), .init_done(done), .init_err(err), .sel_ipb);

  afck_i2c_board_model #(.NUM_BUS(NB)) board (.clk(clk_dev), .eeprom_en, .scl_oe, .sda_oe, .scl, .sda);
  ipbus_host_model host (.clk(clk_ipb), .ipb_o(ipb_w), .ipb_i(ipb_r));

  // input port: byte 0 is the crosspoint setting
  assign in_data = (in_idx == 8'd0) ? 8'h3C : 8'hEE;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------- mechanism counters
  int n_runs = 0, n_err = 0, n_polls_loop = 0, n_in = 0, n_out = 0, n_nop = 0;
  int n_bus1 = 0, n_handover = 0, n_irq = 0;
  logic busy_d = 1'b0, sel_d = 1'b0, irq_d = 1'b0, in_req_d = 1'b0;
  logic [7:0] mac [6];
  always @(posedge clk_init) begin
    busy_d   <= busy;
    sel_d    <= sel_ipb;
    in_req_d <= in_req;
    if (busy && !busy_d) n_runs++;
    if (dut.u_init_ctrl.state == dut.u_init_ctrl.ERROR) n_err++;
    if (dut.u_init_ctrl.state == dut.u_init_ctrl.WAIT_COMPARE && dut.u_init_ctrl.read_result[SR_TIP])
      n_polls_loop++;
    if (in_req && !in_req_d) n_in++;
    if (out_valid) begin
      n_out++;
      if (out_idx < 6) mac[out_idx] = out_data;
    end
    if (dut.u_init_ctrl.state == dut.u_init_ctrl.READ_ROM && dut.u_init_ctrl.rom_data_i[11:8] == PORT_NOP)
      n_nop++;
    if (busy && dut.u_init_ctrl.bus_sel_o == 3'd1 && scl_oe[1]) n_bus1++;
    if (sel_ipb && !sel_d) n_handover++;
  end
  always @(posedge clk_ipb) begin
    irq_d <= irq;
    if (irq && !irq_d) n_irq++;
  end

  logic [7:0] rdat [];
  logic [7:0] wdat [];
  logic nack;
  logic [7:0] st;

  initial begin
    // 1. power-up with the EEPROM deaf (counters start once reset has
    // settled the randomly initialized registers)
    repeat (4) @(posedge clk_init);
    n_runs = 0; n_err = 0; n_polls_loop = 0; n_in = 0; n_out = 0; n_nop = 0;
    n_bus1 = 0; n_handover = 0;
    wait (busy);
    wait (!busy);
    check(err && !done, "missing EEPROM acknowledge ends initialization in ERROR");
    check(!sel_ipb, "buses stay with the initialization side after an error");
    check(board.xpt.mem[8'h90] == 8'h3C, "crosspoint written from the input port before the error");

    // 2. retry with the EEPROM present
    eeprom_en = 1'b1;
    @(negedge clk_init) rst_req = 1'b1;
    @(negedge clk_init) rst_req = 1'b0;
    wait (busy);
    wait (!busy);
    check(done && !err, "initialization completes after the retry");
    for (int i = 0; i < 6; i++)
      check(mac[i] == board.MAC[47 - 8 * i -: 8], $sformatf("MAC byte %0d = %02h", i, mac[i]));
    check(board.fmc.mem[8'h05] == 8'h77, "bus-1 device written by the init program");
    check(board.eeprom.n_stretch >= 2, "EEPROM stretched SCL");
    repeat (4) @(posedge clk_init);
    check(sel_ipb, "buses handed to the IPbus side");

    // 3. IPbus side
    repeat (5) @(posedge clk_ipb);
    ipb_rst = 1'b0;
    repeat (5) @(posedge clk_ipb);
    host.rd(IPB_REG_STATUS, st);
    check(st[0] && !st[1], "IPbus status shows initialization done");
    host.setup(16'd4, 3'd0);
    wdat = new[6];
    wdat = '{8'h01, 8'hC2, 8'hBC, 8'hC0, 8'h1E, 8'h1A};   // oscillator settings for 156.25 MHz
    host.dev_write(7'h55, 8'h07, wdat, nack);
    check(nack, "oscillator unreachable while switch channel 2 is closed");
    host.dev_write1(7'h70, 8'h04, nack);
    check(!nack && board.i2c_switch.mem[0] == 8'h04, "bus switch channel 2 opened over IPbus");
    host.dev_write(7'h55, 8'h07, wdat, nack);
    check(!nack, "oscillator acknowledges through the switch");
    for (int i = 0; i < 6; i++)
      check(board.osc.mem[8'h07 + i] == wdat[i], $sformatf("oscillator register %0d", 7 + i));
    host.dev_read(7'h55, 8'h07, 6, rdat, nack);
    check(!nack, "oscillator read acknowledged");
    for (int i = 0; i < 6; i++)
      check(rdat[i] == wdat[i], $sformatf("oscillator read-back %0d = %02h", i, rdat[i]));
    host.wr(IPB_REG_BUSSEL, 8'd1);
    host.dev_read(7'h52, 8'h05, 1, rdat, nack);
    check(!nack && rdat[0] == 8'h77, "IPbus reads the bus-1 device");
    check(scl == '1 && sda == '1, "all buses idle at the end");

    // mechanisms
    check(n_runs == 2,          $sformatf("initialization runs: %0d", n_runs));
    check(n_err > 0,            "NACK error path taken");
    check(n_polls_loop > 0,     "TIP polling loop taken");
    check(n_in == 2,            $sformatf("input-port transfers: %0d", n_in));
    check(n_out == 6,           $sformatf("output-port transfers: %0d", n_out));
    check(n_nop == 2,           $sformatf("no-op commands: %0d", n_nop));
    check(n_bus1 > 0,           "init commands on bus 1");
    check(n_handover == 1,      "one hand-over");
    check(host.n_xfer > 50,     "IPbus transfers");
    check(n_irq > 0,            "IPbus master interrupt");
    $display("mechanisms: runs=%0d errors=%0d tip_loops=%0d in=%0d out=%0d nop=%0d bus1=%0d handover=%0d ipbus=%0d irq=%0d stretch=%0d",
             n_runs, n_err, n_polls_loop, n_in, n_out, n_nop, n_bus1, n_handover, host.n_xfer, n_irq,
             board.eeprom.n_stretch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk_init);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
