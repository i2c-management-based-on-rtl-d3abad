// ipbus_host_model: behavioural IPbus master standing in for the IPbus
// packet engine and the control software behind it.
//
// Provides single-word IPbus reads and writes (strobe held until ack or err)
// and, on top of them, the register sequences software uses with the I2C
// master: setup, bus selection, register writes and reads on a device with a
// register pointer, and a polled wait for the end of a transfer. Each task
// reports the acknowledge bit it saw so that a test can check for NACKs.
module ipbus_host_model
  import i2c_mgmt_pkg::*;
(
  input  logic      clk,
  output ipb_wbus_t ipb_o,
  input  ipb_rbus_t ipb_i
);
  int n_xfer = 0, n_polls = 0;

  initial ipb_o = '0;

  task automatic xfer(logic [31:0] a, logic w, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    ipb_o = '{addr: a, wdata: wd, strobe: 1'b1, write: w};
    do @(posedge clk); while (!ipb_i.ack && !ipb_i.err);
    rd = ipb_i.rdata;
    n_xfer++;
    @(negedge clk);
    ipb_o = '0;
  endtask

  task automatic wr(logic [2:0] a, logic [7:0] d);
    logic [31:0] rd;
    xfer({29'd0, a}, 1'b1, {24'd0, d}, rd);
  endtask

  task automatic rd(logic [2:0] a, output logic [7:0] d);
    logic [31:0] r;
    xfer({29'd0, a}, 1'b0, 32'd0, r);
    d = r[7:0];
  endtask

  // issue a CR command and wait until TIP clears; returns SR
  task automatic cmd(logic [7:0] c, output logic [7:0] sr);
    wr(REG_CRSR, c);
    do begin rd(REG_CRSR, sr); n_polls++; end while (sr[SR_TIP]);
  endtask

  task automatic setup(logic [15:0] prer, logic [2:0] bus);
    wr(REG_PRERLO, prer[7:0]);
    wr(REG_PRERHI, prer[15:8]);
    wr(REG_CTR, 8'hC0);
    wr(IPB_REG_BUSSEL, {5'd0, bus});
  endtask

  // write n bytes starting at register reg of device dev; nack = any NACK
  task automatic dev_write(logic [6:0] dev, logic [7:0] reg_a, logic [7:0] data [], output logic nack);
    logic [7:0] sr;
    nack = 1'b0;
    wr(REG_TXRXR, {dev, 1'b0}); cmd(8'h90, sr); nack |= sr[SR_RXACK];
    if (sr[SR_RXACK]) begin cmd(8'h40, sr); return; end
    wr(REG_TXRXR, reg_a); cmd(8'h10, sr); nack |= sr[SR_RXACK];
    foreach (data[i]) begin
      wr(REG_TXRXR, data[i]);
      cmd((i == data.size() - 1) ? 8'h50 : 8'h10, sr);
      nack |= sr[SR_RXACK];
    end
  endtask

  // single-byte device with no register pointer (bus switch)
  task automatic dev_write1(logic [6:0] dev, logic [7:0] d, output logic nack);
    logic [7:0] sr;
    wr(REG_TXRXR, {dev, 1'b0}); cmd(8'h90, sr); nack = sr[SR_RXACK];
    wr(REG_TXRXR, d); cmd(8'h50, sr); nack |= sr[SR_RXACK];
  endtask

  task automatic dev_read(logic [6:0] dev, logic [7:0] reg_a, int n, output logic [7:0] data [], output logic nack);
    logic [7:0] sr;
    data = new[n];
    wr(REG_TXRXR, {dev, 1'b0}); cmd(8'h90, sr); nack = sr[SR_RXACK];
    wr(REG_TXRXR, reg_a);       cmd(8'h10, sr); nack |= sr[SR_RXACK];
    wr(REG_TXRXR, {dev, 1'b1}); cmd(8'h90, sr); nack |= sr[SR_RXACK];
    for (int i = 0; i < n; i++) begin
      cmd((i == n - 1) ? 8'h68 : 8'h20, sr);
      rd(REG_TXRXR, data[i]);
    end
  endtask
endmodule
