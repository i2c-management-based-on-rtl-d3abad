// tb_i2c_init_ctrl: checks the initialization FSM against a register-level
// model of the I2C master.
//
// The Wishbone model acks one clock after a strobe, logs every write, keeps
// TIP set for TIP_POLLS status reads after each CR write and returns a
// settable RxACK. Test 1 runs a program that uses every command kind
// (register writes on bus 2, input port to TXR, register read, output
// transfer, no-op, both wait variants, config done) and checks the write log,
// the output port, the bus field, the number of status polls and the exact
// cycle count of the whole program. Test 2 runs a wait-with-ACK-check against
// a NACK and expects ERROR (err_o, no done_o, return to IDLE), then a new
// config edge that restarts the program from address 0.
module tb_i2c_init_ctrl;
  import i2c_mgmt_pkg::*;

  localparam int TIP_POLLS = 3;

  logic clk = 1'b0, rst = 1'b1, cfg = 1'b0;
  always #5 clk = ~clk;

  logic        rom_en;
  logic [7:0]  rom_addr;
  logic [15:0] rom_q;
  logic [15:0] rom [256];
  always_ff @(posedge clk) if (rom_en) rom_q <= rom[rom_addr];

  wb_m2s_t wb;
  wb_s2m_t wbr;
  logic [2:0] bus;
  logic [7:0] out_data, out_idx, in_idx;
  logic       out_valid, in_req, done, err, busy;
  logic [7:0] in_data = 8'h5A;

  i2c_init_ctrl dut (
    .clk, .rst, .config_i(cfg),
    .rom_en_o(rom_en), .rom_addr_o(rom_addr), .rom_data_i(rom_q),
    .wb_o(wb), .wb_i(wbr), .bus_sel_o(bus),
    .out_data_o(out_data), .out_idx_o(out_idx), .out_valid_o(out_valid),
    .in_data_i(in_data), .in_idx_o(in_idx), .in_req_o(in_req),
    .done_o(done), .err_o(err), .busy_o(busy));

  // ---------------- register-level model of the I2C master
  logic [10:0] wlog [$];
  int          tip_left = 0, sr_reads = 0;
  logic        rxack = 1'b0;
  logic [7:0]  rxr = 8'hC3;
  logic        ack_q = 1'b0;
  logic [7:0]  dat_q = '0;
  logic [2:0]  bus_at_write [$];
  assign wbr.ack = ack_q;
  assign wbr.dat = dat_q;
  always @(posedge clk) begin
    ack_q <= wb.stb && wb.cyc && !ack_q;
    if (wb.stb && wb.cyc && !ack_q) begin
      if (wb.we) begin
        wlog.push_back({wb.adr, wb.dat});
        bus_at_write.push_back(bus);
        if (wb.adr == REG_CRSR) tip_left <= TIP_POLLS;
      end else if (wb.adr == REG_CRSR) begin
        sr_reads++;
        dat_q <= {rxack, 5'b0, (tip_left > 0), 1'b0};
        if (tip_left > 0) tip_left <= tip_left - 1;
      end else if (wb.adr == REG_TXRXR) dat_q <= rxr;
      else dat_q <= 8'h00;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] c(logic [2:0] b, logic wr, logic [3:0] port, logic [7:0] d);
    return {b, wr, port, d};
  endfunction

  int busy_cycles, outs, in_reqs;
  logic [7:0] out_seen, idx_seen, in_idx_seen;
  always @(posedge clk) begin
    if (busy) busy_cycles++;
    if (out_valid) begin outs++; out_seen = out_data; idx_seen = out_idx; end
    if (in_req) begin in_reqs++; in_idx_seen = in_idx; end
  end

  task automatic pulse_config();
    @(negedge clk) cfg = 1'b0;
    @(negedge clk) cfg = 1'b1;
  endtask

  int expected;

  initial begin
    for (int i = 0; i < 256; i++) rom[i] = c(0, 1, PORT_DONE, 0);
    rom[0]  = c(2, 1, 4'h0, 8'h11);       // PRERlo
    rom[1]  = c(2, 1, 4'h2, 8'h80);       // CTR
    rom[2]  = c(2, 1, 4'h3, 8'hA0);       // TXR
    rom[3]  = c(2, 1, 4'h4, 8'h90);       // CR
    rom[4]  = c(2, 1, PORT_WAIT_ACK, 0);  // wait, ACK checked
    rom[5]  = c(2, 1, PORT_IN_TXR, 8'h03);// input port -> TXR
    rom[6]  = c(2, 0, 4'h3, 0);           // read RXR
    rom[7]  = c(2, 1, PORT_OUT_DATA, 8'h07);
    rom[8]  = c(2, 1, PORT_NOP, 0);
    rom[9]  = c(2, 1, PORT_WAIT_READ, 0); // wait, ACK ignored (RxACK=1 below)
    rom[10] = c(2, 1, PORT_DONE, 0);
    busy_cycles = 0; outs = 0; in_reqs = 0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    repeat (3) @(posedge clk);
    busy_cycles = 0;
    check(!busy && !done, "idle before config");
    rxack = 1'b0;
    fork
      begin wait (outs == 1); rxack = 1'b1; end
    join_none
    pulse_config();
    wait (done);
    @(negedge clk);
    check(!busy, "back in IDLE after config done");
    check(!err, "no error in test 1");
    check(wlog.size() == 5, $sformatf("%0d register writes, expected 5", wlog.size()));
    if (wlog.size() == 5) begin
      check(wlog[0] == {3'd0, 8'h11}, "PRERlo write");
      check(wlog[1] == {3'd2, 8'h80}, "CTR write");
      check(wlog[2] == {3'd3, 8'hA0}, "TXR write");
      check(wlog[3] == {3'd4, 8'h90}, "CR write");
      check(wlog[4] == {3'd3, 8'h5A}, "input port byte written to TXR");
      check(bus_at_write[0] == 3'd2, "bus field presented to the multiplexer");
    end
    check(in_reqs > 0 && in_idx_seen == 8'h03, "input port requested with its index");
    check(outs == 1 && out_seen == 8'hC3 && idx_seen == 8'h07, "read byte on the output port");
    check(sr_reads == (TIP_POLLS + 1) + 1, $sformatf("%0d status reads", sr_reads));
    // cycle budget: 6 register commands x5, wait-ack 3+3*(TIP_POLLS+1),
    // transfer 4, no-op 3, wait-read 3+3*1, config done 3
    expected = 6 * 5 + (3 + 3 * (TIP_POLLS + 1)) + 4 + 3 + (3 + 3) + 3;
    check(busy_cycles == expected, $sformatf("program took %0d cycles, expected %0d", busy_cycles, expected));

    // ---------------- test 2: NACK -> ERROR, then restart
    wlog.delete();
    rom[0] = c(0, 1, 4'h4, 8'h90);
    rom[1] = c(0, 1, PORT_WAIT_ACK, 0);
    rom[2] = c(0, 1, PORT_DONE, 0);
    rxack = 1'b1;
    pulse_config();
    wait (busy);
    wait (err || done);
    @(negedge clk);
    check(err && !done, "NACK ends in ERROR");
    check(!busy, "ERROR returns to IDLE");
    rxack = 1'b0;
    wlog.delete();
    pulse_config();
    wait (busy);
    wait (done || err);
    @(negedge clk);
    check(done && !err, "restart from address 0 completes");
    check(wlog.size() == 1 && wlog[0] == {3'd4, 8'h90}, "restart begins at address 0");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
