// auto_rst: power-up reset generator of the initialization side.
//
// After the FPGA is configured the counter starts at zero (register power-up
// value), so rst_o is high for RST_CYCLES+1 clock cycles and then falls for good.
// config_o is the inverse of rst_o, registered: its rising edge, one cycle after
// reset ends, is the "config" event that moves the initialization FSM out of
// IDLE. rst_req_i (synchronous, active high) restarts the count, so the whole
// initialization can be repeated, for instance after an I2C error.
//
// Interface: clk (initialization clock), rst_req_i, rst_o, config_o.
// Timing: rst_o is high for the first RST_CYCLES+1 clock cycles after
// power-up (or after the cycle in which rst_req_i is high); config_o rises one cycle after rst_o falls.
//
// The design description states only that this block asserts a reset at
// power-up that triggers the initialization module. The counter length, the
// register power-up value as the power-on detector and the restart input are
// this implementation's choices.
module auto_rst #(
  parameter int unsigned RST_CYCLES = 16
) (
  input  logic clk,
  input  logic rst_req_i,
  output logic rst_o,
  output logic config_o
);

  localparam int unsigned CW = $clog2(RST_CYCLES + 1);

  // Declared values are the power-up values FPGA registers take after
  // configuration; this is what detects power-up (lint reports them as
  // procedural assignments to initialized variables, which is intended).
  logic [CW-1:0] cnt   = '0;
  logic          rst_q = 1'b1;
  logic          cfg_q = 1'b0;

  always_ff @(posedge clk) begin
    if (rst_req_i) begin
      cnt   <= '0;
      rst_q <= 1'b1;
      cfg_q <= 1'b0;
    end else begin
      if (cnt != CW'(RST_CYCLES)) cnt <= cnt + 1'b1;
      rst_q <= (cnt != CW'(RST_CYCLES));
      cfg_q <= ~rst_q;
    end
  end

  assign rst_o    = rst_q;
  assign config_o = cfg_q;

endmodule
