// i2c_master: byte-oriented I2C master with a Wishbone register interface.
//
// Registers (8 bit, Wishbone address = Table I register port):
//   0 PRERlo (R/W)  1 PRERhi (R/W)  prescaler, SCL = f_clk / (4*(PRER+1))
//   2 CTR    (R/W)  bit 7 EN (core enable), bit 6 IEN (interrupt enable)
//   3 TXR (W) / RXR (R)   byte to send (address+R/W bit, or data) / byte received
//   4 CR  (W) / SR  (R)
//     CR: 7 STA start/repeated start, 6 STO stop, 5 RD read byte, 4 WR write
//         byte, 3 ACK (acknowledge the master sends after a read: 0 = ACK,
//         1 = NACK), 0 IACK clear the interrupt flag
//     SR: 7 RxACK (acknowledge bit seen after the last byte, 0 = ACK),
//         6 Busy (a START has been seen on the bus and no STOP yet),
//         5 AL (arbitration lost), 1 TIP (transfer in progress), 0 IF
//
// A CR write with the core enabled queues one command; the engine performs,
// in this order, an optional START, an optional byte write or read with its
// acknowledge bit, and an optional STOP, then clears TIP and sets IF. Every I2C
// symbol (START, STOP, one data or ACK bit) takes four phases of PRER+1 clock
// cycles: SCL low, SCL high, SCL high, SCL low. SDA is sampled at the end of the
// second high phase. If SCL is not yet seen high at the end of the first high
// phase (a slave stretching the clock, or the synchronizer delay when PRER is
// below 3) the engine waits there; otherwise the SCL period is exactly
// 4*(PRER+1) clocks. A written 1 read back
// as 0 ends the command with AL set. Between commands without STOP the engine
// keeps SCL low, holding the bus.
//
// Wishbone: classic single cycle; ack comes one clock after stb&cyc and lasts
// one cycle, read data is registered with it and writes take effect in the
// cycle of the strobe. SCL/SDA are open drain: *_oe_o = 1 pulls the line low;
// the line inputs pass through a two-flop synchronizer.
//
// The design description gives the register set, the register addresses and
// the role of each register; it uses an existing open-source Wishbone I2C
// master core. This module is an independent implementation of that register
// interface. Its bit positions follow the common layout of that core (the
// status bits 1 and 7 are the ones the initialization FSM tests), while the
// four-phase symbol timing and prescaler formula are this design's own choice.
module i2c_master
  import i2c_mgmt_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o,
  output logic    irq_o,
  input  logic    scl_i,
  output logic    scl_oe_o,
  input  logic    sda_i,
  output logic    sda_oe_o
);

  // ------------------------------------------------------------ registers
  logic [15:0] prer;
  logic [7:0]  ctr, txr, rxr;
  logic        q_sta, q_sto, q_rd, q_wr, q_ack;   // queued command
  logic        c_sto, c_rd, c_wr, c_ack;          // command being executed
  logic        sr_rxack, sr_busy, sr_al, sr_if;
  logic        ack_q;
  logic [7:0]  dat_q;

  typedef enum logic [2:0] {E_IDLE, E_START, E_DATA, E_ACK, E_STOP} eng_e;
  eng_e        est;
  logic [1:0]  ph;
  logic [2:0]  bitn;
  logic [7:0]  sh;
  logic [15:0] cnt;
  logic        scl_q, sda_q;          // line levels driven (1 = released)
  logic        scl_m, scl_s, sda_m, sda_s, scl_d, sda_d;

  logic acc, wacc, tip, queued, en;
  assign acc    = wb_i.cyc & wb_i.stb & ~ack_q;
  assign wacc   = acc & wb_i.we;
  assign en     = ctr[CTR_EN];
  assign queued = q_sta | q_sto | q_rd | q_wr;
  assign tip    = queued | (est != E_IDLE);

  // ------------------------------------------------------ drive levels
  logic drv_scl, drv_sda;
  always_comb begin
    drv_scl = scl_q;
    drv_sda = sda_q;
    unique case (est)
      E_IDLE:  ;
      E_START: begin
        drv_sda = (ph < 2'd2);
        drv_scl = (ph == 2'd0) ? scl_q : (ph != 2'd3);
      end
      E_DATA: begin
        drv_sda = c_rd ? 1'b1 : sh[7];
        drv_scl = (ph == 2'd1) || (ph == 2'd2);
      end
      E_ACK: begin
        drv_sda = c_rd ? c_ack : 1'b1;
        drv_scl = (ph == 2'd1) || (ph == 2'd2);
      end
      E_STOP: begin
        drv_sda = (ph == 2'd3);
        drv_scl = (ph != 2'd0);
      end
      default: ;
    endcase
  end

  logic stretch, tick;
  assign stretch = drv_scl & ~scl_s & (est != E_IDLE) & (ph == 2'd1) & (cnt == 16'd0);
  assign tick    = (cnt == 16'd0) & ~stretch;

  // ------------------------------------------------------ Wishbone side
  always_ff @(posedge clk) begin
    if (rst) begin
      ack_q <= 1'b0;
      dat_q <= '0;
      prer  <= 16'hFFFF;
      ctr   <= '0;
      txr   <= '0;
    end else begin
      ack_q <= acc;
      if (acc && !wb_i.we) begin
        unique case (wb_i.adr)
          REG_PRERLO: dat_q <= prer[7:0];
          REG_PRERHI: dat_q <= prer[15:8];
          REG_CTR:    dat_q <= ctr;
          REG_TXRXR:  dat_q <= rxr;
          REG_CRSR:   dat_q <= {sr_rxack, sr_busy, sr_al, 3'b000, tip, sr_if};
          default:    dat_q <= '0;
        endcase
      end
      if (wacc) begin
        unique case (wb_i.adr)
          REG_PRERLO: prer[7:0]  <= wb_i.dat;
          REG_PRERHI: prer[15:8] <= wb_i.dat;
          REG_CTR:    ctr        <= wb_i.dat;
          REG_TXRXR:  txr        <= wb_i.dat;
          default: ;
        endcase
      end
    end
  end

  assign wb_o.ack = ack_q;
  assign wb_o.dat = dat_q;
  assign irq_o    = sr_if & ctr[CTR_IEN];

  // ------------------------------------------------- line synchronizers
  always_ff @(posedge clk) begin
    if (rst) begin
      {scl_m, scl_s, scl_d} <= 3'b111;
      {sda_m, sda_s, sda_d} <= 3'b111;
      sr_busy <= 1'b0;
    end else begin
      scl_m <= scl_i;  scl_s <= scl_m;  scl_d <= scl_s;
      sda_m <= sda_i;  sda_s <= sda_m;  sda_d <= sda_s;
      // bus monitor: START = SDA falls while SCL high, STOP = SDA rises
      if (scl_s && scl_d && sda_d && !sda_s)      sr_busy <= 1'b1;
      else if (scl_s && scl_d && !sda_d && sda_s) sr_busy <= 1'b0;
    end
  end

  // ------------------------------------------------------------ engine
  always_ff @(posedge clk) begin
    if (rst) begin
      est   <= E_IDLE;
      ph    <= '0;
      bitn  <= '0;
      sh    <= '0;
      cnt   <= '0;
      scl_q <= 1'b1;
      sda_q <= 1'b1;
      {q_sta, q_sto, q_rd, q_wr, q_ack} <= '0;
      {c_sto, c_rd, c_wr, c_ack} <= '0;
      rxr      <= '0;
      sr_rxack <= 1'b0;
      sr_al    <= 1'b0;
      sr_if    <= 1'b0;
    end else begin
      scl_q <= drv_scl;
      sda_q <= drv_sda;

      // command register writes
      if (wacc && wb_i.adr == REG_CRSR) begin
        if (en) begin
          q_sta <= wb_i.dat[CR_STA];
          q_sto <= wb_i.dat[CR_STO];
          q_rd  <= wb_i.dat[CR_RD];
          q_wr  <= wb_i.dat[CR_WR];
          q_ack <= wb_i.dat[CR_ACK];
        end
        if (wb_i.dat[CR_IACK]) sr_if <= 1'b0;
      end

      if (!en) begin
        // core disabled: abandon everything and release the bus
        est   <= E_IDLE;
        scl_q <= 1'b1;
        sda_q <= 1'b1;
        {q_sta, q_sto, q_rd, q_wr} <= '0;
      end else if (est == E_IDLE) begin
        cnt <= prer;
        ph  <= '0;
        if (queued) begin
          {c_sto, c_rd, c_wr, c_ack} <= {q_sto, q_rd, q_wr, q_ack};
          {q_sta, q_sto, q_rd, q_wr}        <= '0;
          sh    <= txr;
          bitn  <= 3'd7;
          sr_al <= 1'b0;
          if (q_sta)             est <= E_START;
          else if (q_rd || q_wr) est <= E_DATA;
          else                   est <= E_STOP;
        end
      end else if (stretch) begin
        // slave holds SCL low: wait
      end else if (!tick) begin
        cnt <= cnt - 16'd1;
      end else begin
        cnt <= prer;
        ph  <= ph + 2'd1;
        if (ph == 2'd2) begin
          // sample point (SCL high)
          if (est == E_DATA) begin
            if (!c_rd && sh[7] && !sda_s) begin
              // arbitration lost: another master pulls SDA low
              est      <= E_IDLE;
              sr_al    <= 1'b1;
              sr_if    <= 1'b1;
              scl_q    <= 1'b1;
              sda_q    <= 1'b1;
            end
            sh <= {sh[6:0], sda_s};
          end else if (est == E_ACK) begin
            sr_rxack <= sda_s;
          end
        end
        if (ph == 2'd3) begin
          unique case (est)
            E_START: begin
              if (c_rd || c_wr) est <= E_DATA;
              else if (c_sto)   est <= E_STOP;
              else begin est <= E_IDLE; sr_if <= 1'b1; end
            end
            E_DATA: begin
              if (bitn == 3'd0) est <= E_ACK;
              bitn <= bitn - 3'd1;
            end
            E_ACK: begin
              if (c_rd) rxr <= sh;
              if (c_sto) est <= E_STOP;
              else begin est <= E_IDLE; sr_if <= 1'b1; end
            end
            E_STOP: begin
              est   <= E_IDLE;
              sr_if <= 1'b1;
            end
            default: est <= E_IDLE;
          endcase
        end
      end
    end
  end

  assign scl_oe_o = ~scl_q;
  assign sda_oe_o = ~sda_q;

  // Wishbone rule: ack only answers a strobe of the previous cycle.
  logic stb_d;
  always_ff @(posedge clk) begin
    stb_d <= wb_i.stb & wb_i.cyc;
    if (!rst && ack_q) assert (stb_d) else $error("i2c_master: ack without strobe");
  end

endmodule
