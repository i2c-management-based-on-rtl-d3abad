// tb_i2c_master: self-checking test of the Wishbone I2C master.
//
// One bus with an EEPROM-like slave at 0x50 (which stretches SCL after its
// address) and nothing at 0x21. The test drives the Wishbone registers the
// way software would and checks: prescaler read-back, SCL period equal to
// 4*(PRER+1) clocks, a pointer + two-byte write landing in the slave, a
// repeated-start read of the same two bytes (ACK then NACK+STOP), RxACK = 1
// for an absent address, TIP/IF/Busy behaviour, IACK, the interrupt output,
// and arbitration loss when another driver holds SDA low.
module tb_i2c_master;
  import i2c_mgmt_pkg::*;

  localparam logic [15:0] PRER = 16'd4;

  logic clk = 1'b0, rst = 1'b1;
  always #5 clk = ~clk;

  wb_m2s_t wb;
  wb_s2m_t wbr;
  logic irq, scl_oe, sda_oe, s_sda_low, s_scl_low, rogue;
  logic scl, sda;

  assign scl = ~(scl_oe | s_scl_low);
  assign sda = ~(sda_oe | s_sda_low | rogue);

  i2c_master dut (.clk, .rst, .wb_i(wb), .wb_o(wbr), .irq_o(irq),
                  .scl_i(scl), .scl_oe_o(scl_oe), .sda_i(sda), .sda_oe_o(sda_oe));

  i2c_slave_model #(.ADDR(7'h50), .STRETCH(40)) slave (
    .clk, .en(1'b1), .scl, .sda, .sda_low(s_sda_low), .scl_low(s_scl_low));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wb_write(logic [2:0] a, logic [7:0] d);
    @(negedge clk);
    wb = '{adr: a, dat: d, we: 1'b1, stb: 1'b1, cyc: 1'b1};
    @(posedge clk); #1;
    while (!wbr.ack) begin @(posedge clk); #1; end
    @(negedge clk); wb = '0;
  endtask

  task automatic wb_read(logic [2:0] a, output logic [7:0] d);
    @(negedge clk);
    wb = '{adr: a, dat: 8'h00, we: 1'b0, stb: 1'b1, cyc: 1'b1};
    @(posedge clk); #1;
    while (!wbr.ack) begin @(posedge clk); #1; end
    d = wbr.dat;
    @(negedge clk); wb = '0;
  endtask

  task automatic wait_done(output logic [7:0] sr);
    do wb_read(REG_CRSR, sr); while (sr[SR_TIP]);
  endtask

  // SCL period measurement
  int unsigned t_rise_prev = 0, period = 0;
  logic scl_q = 1'b1;
  int unsigned cyc = 0;
  always @(posedge clk) begin
    cyc++;
    scl_q <= scl;
    if (scl && !scl_q) begin
      period      <= cyc - t_rise_prev;
      t_rise_prev <= cyc;
    end
  end

  logic [7:0] d, sr;
  int unsigned scl_period_seen;

  initial begin
    wb = '0; rogue = 1'b0;
    repeat (4) @(posedge clk);
    rst = 1'b0;

    // prescaler and control
    wb_write(REG_PRERLO, PRER[7:0]);
    wb_write(REG_PRERHI, PRER[15:8]);
    wb_read(REG_PRERLO, d); check(d == PRER[7:0], "PRERlo read-back");
    wb_read(REG_PRERHI, d); check(d == PRER[15:8], "PRERhi read-back");
    wb_write(REG_CTR, 8'hC0);                       // EN | IEN
    wb_read(REG_CTR, d); check(d == 8'hC0, "CTR read-back");

    // write pointer 0x10 then 0xA5, 0x3C
    wb_write(REG_TXRXR, {7'h50, 1'b0});
    wb_write(REG_CRSR, 8'h90);                      // STA|WR
    wb_read(REG_CRSR, sr); check(sr[SR_TIP], "TIP set after command");
    wait_done(sr);
    check(!sr[SR_RXACK], "address 0x50 acknowledged");
    check(sr[SR_BUSY], "bus busy after START");
    check(sr[SR_IF] && irq, "IF and irq after transfer");
    check(slave.n_stretch == 1, "slave stretched SCL after its address");
    wb_write(REG_CRSR, 8'h01);                      // IACK
    wb_read(REG_CRSR, sr); check(!sr[SR_IF] && !irq, "IACK clears IF");
    wb_write(REG_TXRXR, 8'h10); wb_write(REG_CRSR, 8'h10); wait_done(sr);
    check(!sr[SR_RXACK], "pointer acknowledged");
    wb_write(REG_TXRXR, 8'hA5); wb_write(REG_CRSR, 8'h10); wait_done(sr);
    scl_period_seen = int'(period);
    check(scl_period_seen == 4 * (int'(PRER) + 1),
          $sformatf("SCL period %0d clocks, expected %0d", scl_period_seen, 4 * (int'(PRER) + 1)));
    wb_write(REG_TXRXR, 8'h3C); wb_write(REG_CRSR, 8'h50); wait_done(sr);   // WR|STO
    check(!sr[SR_RXACK], "last data acknowledged");
    repeat (40) @(posedge clk);
    wb_read(REG_CRSR, sr); check(!sr[SR_BUSY], "bus free after STOP");
    check(slave.mem[8'h10] == 8'hA5 && slave.mem[8'h11] == 8'h3C, "bytes written into slave");

    // read back: pointer write, repeated start, two reads
    wb_write(REG_TXRXR, {7'h50, 1'b0}); wb_write(REG_CRSR, 8'h90); wait_done(sr);
    wb_write(REG_TXRXR, 8'h10);         wb_write(REG_CRSR, 8'h10); wait_done(sr);
    wb_write(REG_TXRXR, {7'h50, 1'b1}); wb_write(REG_CRSR, 8'h90); wait_done(sr);
    check(!sr[SR_RXACK], "read address acknowledged after repeated start");
    wb_write(REG_CRSR, 8'h20); wait_done(sr);       // RD, ACK
    wb_read(REG_TXRXR, d); check(d == 8'hA5, $sformatf("first byte read %02h", d));
    wb_write(REG_CRSR, 8'h68); wait_done(sr);       // RD, NACK, STO
    wb_read(REG_TXRXR, d); check(d == 8'h3C, $sformatf("second byte read %02h", d));
    check(slave.n_reads == 2, "slave sent two bytes");

    // absent device
    wb_write(REG_TXRXR, {7'h21, 1'b0}); wb_write(REG_CRSR, 8'hD0); wait_done(sr);
    check(sr[SR_RXACK], "absent address not acknowledged");

    // arbitration lost: another driver holds SDA low in the first data bit
    repeat (20) @(posedge clk);
    wb_write(REG_TXRXR, 8'hFF); wb_write(REG_CRSR, 8'h90);
    repeat (6 * (int'(PRER) + 1) + 4) @(posedge clk);
    rogue = 1'b1;
    wait_done(sr);
    rogue = 1'b0;
    check(sr[SR_AL], "arbitration lost reported");
    wb_write(REG_CTR, 8'h00);
    repeat (10) @(posedge clk);
    check(scl && sda, "bus released when disabled");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
