// tb_ipbus_wishbone_interface: checks the IPbus slave in front of the I2C
// master. A Wishbone register model (one-cycle ack) stands in for the master.
// Checked: writes and reads at addresses 0..4 reach the model exactly once per
// IPbus transaction with the right address and byte, read data returns in
// rdata[7:0], each transaction is acked one clock after the strobe, the bus-select register
// is written, read back and driven out, the status register shows the
// synchronized init flags, and address 7 answers with err.
module tb_ipbus_wishbone_interface;
  import i2c_mgmt_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  always #4 clk = ~clk;

  ipb_wbus_t ipb;
  ipb_rbus_t ipr;
  wb_m2s_t   wb;
  wb_s2m_t   wbr;
  logic [2:0] bus_sel;
  logic done = 1'b0, err = 1'b0;

  ipbus_wishbone_interface dut (.clk, .rst, .ipb_i(ipb), .ipb_o(ipr), .wb_o(wb), .wb_i(wbr),
                                .bus_sel_o(bus_sel), .init_done_i(done), .init_err_i(err));

  logic [7:0] regs [8];
  int n_acc = 0;
  logic ack_q = 1'b0;
  logic [7:0] dq = '0;
  assign wbr.ack = ack_q;
  assign wbr.dat = dq;
  always @(posedge clk) begin
    ack_q <= wb.stb && wb.cyc && !ack_q;
    if (wb.stb && wb.cyc && !ack_q) begin
      n_acc++;
      if (wb.we) regs[wb.adr] <= wb.dat;
      else dq <= regs[wb.adr] ^ 8'h5F;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic ipb_xfer(logic [31:0] a, logic w, logic [31:0] wd,
                          output logic [31:0] rd, output logic e, output int lat);
    @(negedge clk);
    ipb = '{addr: a, wdata: wd, strobe: 1'b1, write: w};
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!ipr.ack && !ipr.err);
    rd = ipr.rdata; e = ipr.err;
    @(negedge clk);
    ipb = '0;
  endtask

  logic [31:0] rd;
  logic e;
  int lat, n0;

  initial begin
    ipb = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int a = 0; a < 5; a++) begin
      n0 = n_acc;
      ipb_xfer(32'h100 + 32'(a), 1'b1, 32'hABCD_0000 | 32'(8'h30 + a), rd, e, lat);
      check(!e && lat == 1, $sformatf("write %0d acked in %0d clocks", a, lat));
      check(n_acc == n0 + 1, "one Wishbone access per write");
      check(regs[a] == 8'(8'h30 + a), $sformatf("register %0d written", a));
    end
    for (int a = 0; a < 5; a++) begin
      n0 = n_acc;
      ipb_xfer(32'(a), 1'b0, 32'h0, rd, e, lat);
      check(n_acc == n0 + 1, "one Wishbone access per read");
      check(!e && rd == {24'd0, 8'(8'h30 + a) ^ 8'h5F}, $sformatf("read %0d = %08h", a, rd));
    end
    n0 = n_acc;
    ipb_xfer(32'd5, 1'b1, 32'd6, rd, e, lat);
    check(!e && bus_sel == 3'd6, "bus select written");
    ipb_xfer(32'd5, 1'b0, 32'd0, rd, e, lat);
    check(rd == 32'd6, "bus select read back");
    check(n_acc == n0, "local registers do not touch the I2C master");
    ipb_xfer(32'd6, 1'b0, 32'd0, rd, e, lat);
    check(rd == 32'd0, "status: not done");
    done = 1'b1;
    repeat (3) @(posedge clk);
    ipb_xfer(32'd6, 1'b0, 32'd0, rd, e, lat);
    check(rd == 32'd1, "status: done");
    err = 1'b1;
    repeat (3) @(posedge clk);
    ipb_xfer(32'd6, 1'b0, 32'd0, rd, e, lat);
    check(rd == 32'd3, "status: error");
    ipb_xfer(32'd7, 1'b0, 32'd0, rd, e, lat);
    check(e, "address 7 answers with err");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
