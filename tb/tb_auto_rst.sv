// tb_auto_rst: checks the power-up reset generator.
// After power-up rst_o must stay high for exactly RST_CYCLES+1 clocks, then
// config_o must rise exactly one clock after rst_o falls and both must stay
// put; a one-cycle rst_req_i must repeat the same sequence.
module tb_auto_rst;
  localparam int unsigned N = 5;

  logic clk = 1'b0, req = 1'b0;
  always #5 clk = ~clk;
  logic rst, cfg;

  auto_rst #(.RST_CYCLES(N)) dut (.clk, .rst_req_i(req), .rst_o(rst), .config_o(cfg));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic measure(string tag);
    int unsigned hi = 0;
    while (rst) begin
      check(!cfg, {tag, ": config low during reset"});
      hi++;
      @(negedge clk);
    end
    check(hi == N + 1, $sformatf("%s: reset lasted %0d cycles, expected %0d", tag, hi, N + 1));
    check(!cfg, {tag, ": config still low in the first cycle after reset"});
    @(negedge clk);
    check(cfg, {tag, ": config rises one cycle after reset"});
    repeat (10) begin
      @(negedge clk);
      check(cfg && !rst, {tag, ": stays configured"});
    end
  endtask

  initial begin
    #1;                      // first cycle after power-up
    measure("power-up");
    req = 1'b1;
    @(negedge clk);
    req = 1'b0;
    measure("request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
