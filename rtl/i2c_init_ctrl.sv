// i2c_init_ctrl: ROM-driven I2C initialization controller.
//
// After power-up the controller walks through a command ROM and turns each
// 16-bit command {bus[2:0], wr, port[3:0], data[7:0]} into work for its own I2C
// master, without any software. The FSM has the eleven states of the
// description's state diagram (the "config done" state keeps the diagram's
// spelling, CONFIG_DOWN):
//
//   IDLE --config rises--> PRE_READ_ROM --> READ_ROM, then by port:
//     0xxx  READ_WRITE_REG: one Wishbone access to master register port[2:0]
//           (wr=1 writes data, wr=0 reads into the read-data register);
//           leaves on Wishbone ack to CMD_END
//     1011  READ_WRITE_REG: writes the input port byte to TXR
//     1000  WAIT_READ_STATUS -> WAIT_READ_END -> WAIT_COMPARE: read SR; while
//           SR[1] (TIP) is set, read again; when clear, SR[7] (RxACK) = 0 goes
//           to CMD_END and SR[7] = 1 (no acknowledge) to ERROR
//     1001  same polling loop, but the acknowledge bit is not checked (needed
//           after the last byte of a read, which the master itself NACKs)
//     1010  TRANSFER_READ_DATA: the last byte read goes to the output port
//     1111  CONFIG_DOWN: done_o is set and the FSM returns to IDLE
//     other (1100 in the diagram) straight to CMD_END
//   CMD_END advances the ROM address and goes to PRE_READ_ROM; ERROR sets
//   err_o and returns to IDLE.
//
// Interface: a synchronous ROM port (rom_en_o/rom_addr_o, data one cycle
// later on rom_data_i), a Wishbone master port to the I2C master (fixed
// one-cycle ack latency is required on the status poll, as the diagram moves
// from WAIT_READ_STATUS through WAIT_READ_END on plain clock edges), bus_sel_o
// (the bus field of the current command, for the bus multiplexer), the output
// port (out_data_o, out_idx_o = data field of the 1010 command, one-cycle
// out_valid_o), the input port (in_data_i, sampled while in_req_o is high;
// in_idx_o = data field of the 1011 command) and done_o / err_o / busy_o.
//
// Timing: a register command takes 5 cycles (PRE_READ_ROM, READ_ROM, two in
// READ_WRITE_REG, CMD_END); a private command 3 cycles plus 3 per status poll.
//
// From the description: the command format, the register port codes, the
// states and the transitions of the diagram. Own choices: 1001 as the
// no-acknowledge-check variant of the wait (Table I names 1001 "wait read end"
// and 1000 "CR(W)/SR(R)", while the diagram sends 1000 into the wait loop; both
// are honoured this way), the index fields on the two ports, and treating the
// codes 1100, 1101 and 1110 as no-operations.
module i2c_init_ctrl
  import i2c_mgmt_pkg::*;
#(
  parameter int unsigned ROM_AW = 8
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              config_i,
  // command ROM
  output logic              rom_en_o,
  output logic [ROM_AW-1:0] rom_addr_o,
  input  logic [15:0]       rom_data_i,
  // Wishbone master to the I2C master
  output wb_m2s_t           wb_o,
  input  wb_s2m_t           wb_i,
  // bus selection for the multiplexer
  output logic [2:0]        bus_sel_o,
  // output port (data read from I2C devices)
  output logic [7:0]        out_data_o,
  output logic [7:0]        out_idx_o,
  output logic              out_valid_o,
  // input port (data sent to I2C devices)
  input  logic [7:0]        in_data_i,
  output logic [7:0]        in_idx_o,
  output logic              in_req_o,
  // status
  output logic              done_o,
  output logic              err_o,
  output logic              busy_o
);

  typedef enum logic [3:0] {
    IDLE, PRE_READ_ROM, READ_ROM, READ_WRITE_REG, CMD_END, TRANSFER_READ_DATA,
    CONFIG_DOWN, WAIT_READ_STATUS, WAIT_READ_END, WAIT_COMPARE, ERROR
  } state_e;

  state_e      state;
  init_cmd_t   cmd, rom_cmd;
  logic        config_d, chk_ack;
  logic [7:0]  read_result;   // last status register value (diagram's name)
  logic [7:0]  read_data;     // last register read by a 0xxx read command
  logic [ROM_AW-1:0] addr;

  assign rom_cmd = init_cmd_t'(rom_data_i);

  logic is_in;
  assign is_in = (cmd.port == PORT_IN_TXR);

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= IDLE;
      cmd         <= '0;
      config_d    <= 1'b0;
      chk_ack     <= 1'b0;
      read_result <= '0;
      read_data   <= '0;
      addr        <= '0;
      out_data_o  <= '0;
      out_idx_o   <= '0;
      out_valid_o <= 1'b0;
      done_o      <= 1'b0;
      err_o       <= 1'b0;
    end else begin
      config_d    <= config_i;
      out_valid_o <= 1'b0;
      unique case (state)
        IDLE: begin
          if (config_i && !config_d) begin           // (1) rising edge of config
            addr   <= '0;
            done_o <= 1'b0;
            err_o  <= 1'b0;
            state  <= PRE_READ_ROM;
          end
        end
        PRE_READ_ROM: state <= READ_ROM;              // (2)
        READ_ROM: begin
          cmd <= rom_cmd;
          if (!rom_cmd.port[3]) state <= READ_WRITE_REG;
          else begin
            unique case (rom_cmd.port)
              PORT_WAIT_ACK, PORT_WAIT_READ: begin   // (3)
                chk_ack <= (rom_cmd.port == PORT_WAIT_ACK);
                state   <= WAIT_READ_STATUS;
              end
              PORT_OUT_DATA: state <= TRANSFER_READ_DATA; // (5)
              PORT_IN_TXR:   state <= READ_WRITE_REG;     // (7)
              PORT_DONE:     state <= CONFIG_DOWN;        // (6)
              default:       state <= CMD_END;            // (4)
            endcase
          end
        end
        READ_WRITE_REG: begin
          if (wb_i.ack) begin                         // (8)
            if (!is_in && !cmd.wr) read_data <= wb_i.dat;
            state <= CMD_END;
          end
        end
        WAIT_READ_STATUS: state <= WAIT_READ_END;     // (9)
        WAIT_READ_END: begin                          // (a)
          read_result <= wb_i.dat;
          state       <= WAIT_COMPARE;
        end
        WAIT_COMPARE: begin
          if (read_result[SR_TIP])                          state <= WAIT_READ_STATUS; // (b)
          else if (!chk_ack || !read_result[SR_RXACK])      state <= CMD_END;          // (c)
          else                                              state <= ERROR;            // (d)
        end
        TRANSFER_READ_DATA: begin                     // (g)
          out_data_o  <= read_data;
          out_idx_o   <= cmd.data;
          out_valid_o <= 1'b1;
          state       <= CMD_END;
        end
        CMD_END: begin                                // (h)
          addr  <= addr + 1'b1;
          state <= PRE_READ_ROM;
        end
        CONFIG_DOWN: begin                            // (f)
          done_o <= 1'b1;
          state  <= IDLE;
        end
        ERROR: begin                                  // (i)
          err_o <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  // ROM port
  assign rom_en_o   = (state == PRE_READ_ROM);
  assign rom_addr_o = addr;

  // Wishbone master
  always_comb begin
    wb_o = '0;
    if (state == READ_WRITE_REG) begin
      wb_o.cyc = ~wb_i.ack;
      wb_o.stb = ~wb_i.ack;
      wb_o.adr = is_in ? REG_TXRXR : cmd.port[2:0];
      wb_o.we  = is_in ? 1'b1 : cmd.wr;
      wb_o.dat = is_in ? in_data_i : cmd.data;
    end else if (state == WAIT_READ_STATUS) begin
      wb_o.cyc = 1'b1;
      wb_o.stb = 1'b1;
      wb_o.adr = REG_CRSR;
    end
  end

  assign bus_sel_o = cmd.bus;
  assign in_idx_o  = cmd.data;
  assign in_req_o  = (state == READ_WRITE_REG) && is_in;
  assign busy_o    = (state != IDLE);

  // The status poll relies on the slave's one-cycle ack.
  always_ff @(posedge clk) begin
    if (!rst && state == WAIT_READ_END)
      assert (wb_i.ack) else $error("i2c_init_ctrl: no Wishbone ack one cycle after the status read");
  end

endmodule
