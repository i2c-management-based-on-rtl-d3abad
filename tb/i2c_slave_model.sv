// i2c_slave_model: behavioural I2C register slave used by the testbenches.
//
// Samples SCL/SDA on a fast clock and answers as a 7-bit-address slave with a
// 256-byte register file. In pointer mode (NO_PTR = 0) the first byte written
// after the address sets the register pointer and later bytes are written at
// the pointer, which then advances; reads return bytes from the pointer on,
// advancing after each byte, like a serial EEPROM. With NO_PTR = 1 the slave
// has one register (mem[0]) that every write sets and every read returns, like
// a bus switch. en = 0 makes the slave deaf (its address is not acknowledged).
// After acknowledging its address it can stretch SCL for STRETCH clocks.
// Outputs are pull-downs: sda_low / scl_low = 1 pulls the line low.
module i2c_slave_model #(
  parameter logic [6:0] ADDR    = 7'h50,
  parameter bit         NO_PTR  = 1'b0,
  parameter int         STRETCH = 0
) (
  input  logic clk,
  input  logic en,
  input  logic scl,
  input  logic sda,
  output logic sda_low,
  output logic scl_low
);

  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_ACK_ADDR, S_WDATA, S_ACK_W, S_RDATA, S_ACK_R} st_e;

  logic [7:0] mem [256];
  st_e        st = S_IDLE;
  logic [7:0] ptr = '0, sh = '0, tx = '0;
  int         bitcnt = 0, stretch_left = 0;
  logic       first = 1'b0, rw = 1'b0, mack = 1'b0;
  logic       scl_p = 1'b1, sda_p = 1'b1;
  int         n_acks = 0, n_writes = 0, n_reads = 0, n_stretch = 0;

  initial begin
    sda_low = 1'b0;
    scl_low = 1'b0;
    for (int i = 0; i < 256; i++) mem[i] = 8'(i * 7 + 3);
  end

  always @(posedge clk) begin
    scl_p <= scl;
    sda_p <= sda;
    if (stretch_left > 0) begin
      stretch_left <= stretch_left - 1;
      if (stretch_left == 1) scl_low <= 1'b0;
    end
    if (scl && scl_p && sda_p && !sda) begin            // START
      st <= S_ADDR; bitcnt <= 0; sda_low <= 1'b0;
    end else if (scl && scl_p && !sda_p && sda) begin   // STOP
      st <= S_IDLE; sda_low <= 1'b0;
    end else if (scl && !scl_p) begin                   // SCL rises
      unique case (st)
        S_ADDR, S_WDATA: begin sh <= {sh[6:0], sda}; bitcnt <= bitcnt + 1; end
        S_RDATA:         bitcnt <= bitcnt + 1;
        S_ACK_R:         mack <= sda;
        default: ;
      endcase
    end else if (!scl && scl_p) begin                   // SCL falls
      unique case (st)
        S_ADDR: if (bitcnt == 8) begin
          if (en && sh[7:1] == ADDR) begin
            sda_low <= 1'b1; rw <= sh[0]; st <= S_ACK_ADDR; n_acks <= n_acks + 1;
            if (STRETCH > 0) begin
              scl_low <= 1'b1; stretch_left <= STRETCH; n_stretch <= n_stretch + 1;
            end
          end else st <= S_IDLE;
        end
        S_ACK_ADDR: begin
          bitcnt <= 0;
          if (rw) begin
            tx      <= mem[NO_PTR ? 8'd0 : ptr];
            sda_low <= ~mem[NO_PTR ? 8'd0 : ptr][7];
            if (!NO_PTR) ptr <= ptr + 1;
            st <= S_RDATA;
          end else begin
            sda_low <= 1'b0; first <= 1'b1; st <= S_WDATA;
          end
        end
        S_WDATA: if (bitcnt == 8) begin
          if (first && !NO_PTR) ptr <= sh;
          else begin
            mem[NO_PTR ? 8'd0 : ptr] <= sh;
            if (!NO_PTR) ptr <= ptr + 1;
            n_writes <= n_writes + 1;
          end
          first <= 1'b0; sda_low <= 1'b1; st <= S_ACK_W;
        end
        S_ACK_W: begin sda_low <= 1'b0; bitcnt <= 0; st <= S_WDATA; end
        S_RDATA: begin
          if (bitcnt == 8) begin sda_low <= 1'b0; st <= S_ACK_R; n_reads <= n_reads + 1; end
          else sda_low <= ~tx[7 - bitcnt];
        end
        S_ACK_R: begin
          if (!mack) begin
            tx      <= mem[NO_PTR ? 8'd0 : ptr];
            sda_low <= ~mem[NO_PTR ? 8'd0 : ptr][7];
            if (!NO_PTR) ptr <= ptr + 1;
            bitcnt  <= 0;
            st      <= S_RDATA;
          end else st <= S_IDLE;
        end
        default: ;
      endcase
    end
  end

endmodule
