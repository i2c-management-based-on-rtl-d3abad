// tb_init_rom: checks the command ROM.
// The built-in program is compared word by word with commands assembled here
// from the command format {bus, wr, port, data}: prescaler, enable, the five
// crosspoint output writes and the update write, the EEPROM pointer write and repeated start, the six
// read/wait/RXR/output groups and the final "config done". A second instance
// loads tb/init_rom_test.hex and must return those words, with "config done"
// after them. The read latency (data one clock after en_i) and the hold while
// en_i is low are checked too.
module tb_init_rom;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       en = 1'b0, en2 = 1'b0;
  logic [7:0] addr = '0, addr2 = '0;
  logic [15:0] q, q2;

  init_rom dut (.clk, .en_i(en), .addr_i(addr), .data_o(q));
  init_rom #(.INIT_FILE("tb/init_rom_test.hex")) dut2 (.clk, .en_i(en2), .addr_i(addr2), .data_o(q2));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [15:0] c(logic wr, logic [3:0] port, logic [7:0] d);
    return {3'b000, wr, port, d};
  endfunction

  logic [15:0] exp_prog [91];
  int n;

  task automatic put(logic [15:0] w); exp_prog[n] = w; n++; endtask
  task automatic wr_seq(logic [7:0] dev8, logic [7:0] r, logic [7:0] v);
    put(c(1, 4'h3, dev8)); put(c(1, 4'h4, 8'h90)); put(c(1, 4'h8, 8'h00));
    put(c(1, 4'h3, r));    put(c(1, 4'h4, 8'h10)); put(c(1, 4'h8, 8'h00));
    put(c(1, 4'h3, v));    put(c(1, 4'h4, 8'h50)); put(c(1, 4'h8, 8'h00));
  endtask

  task automatic rd(input logic [7:0] a, output logic [15:0] d);
    @(negedge clk); addr = a; en = 1'b1;
    @(negedge clk); en = 1'b0; addr = ~a;   // address change must not matter now
    d = q;
    @(negedge clk);
    check(q == d, "output holds while en is low");
  endtask

  logic [15:0] d;

  initial begin
    n = 0;
    put(c(1, 4'h0, 8'd61)); put(c(1, 4'h1, 8'd0)); put(c(1, 4'h2, 8'h80));
    for (int o = 0; o < 5; o++)
      wr_seq(8'h96, 8'(8'h90 + o), 8'h00); // crosspoint 0x4B: outputs 0..4 <- input 0
    wr_seq(8'h96, 8'h80, 8'h01);          // update
    put(c(1, 4'h3, 8'hA0)); put(c(1, 4'h4, 8'h90)); put(c(1, 4'h8, 8'h00));
    put(c(1, 4'h3, 8'hFA)); put(c(1, 4'h4, 8'h10)); put(c(1, 4'h8, 8'h00));
    put(c(1, 4'h3, 8'hA1)); put(c(1, 4'h4, 8'h90)); put(c(1, 4'h8, 8'h00));
    for (int b = 0; b < 6; b++) begin
      put(c(1, 4'h4, (b == 5) ? 8'h68 : 8'h20));
      put(c(1, 4'h9, 8'h00));
      put(c(0, 4'h3, 8'h00));
      put(c(1, 4'hA, 8'(b)));
    end
    put(c(1, 4'hF, 8'h00));
    check(n == 91, "expected program length");

    for (int i = 0; i < 91; i++) begin
      rd(8'(i), d);
      check(d == exp_prog[i], $sformatf("word %0d = %04h, expected %04h", i, d, exp_prog[i]));
    end
    rd(8'd200, d);
    check(d == 16'h1F00, "unused word reads as config done");

    // file-loaded instance
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); addr2 = 8'(i); en2 = 1'b1;
      @(negedge clk); en2 = 1'b0;
      check(q2 == ((i == 0) ? 16'h1234 : (i == 1) ? 16'hABCD : (i == 2) ? 16'h0F0F : 16'h1F00),
            $sformatf("file word %0d = %04h", i, q2));
    end

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
