// tb_i2c_bus_mux: checks master ownership and bus routing of the multiplexer.
// Random pull-downs and bus numbers are applied before and after the hand-over;
// every output is compared with a reference computed here: only the owning
// master's selected bus follows its pull-downs, only it reads that bus's lines,
// the other master reads an idle bus, bus numbers >= NUM_BUS drive nothing, and
// ownership moves to the IPbus side on init_done and back only on reset.
module tb_i2c_bus_mux;
  localparam int NB = 6;

  logic clk = 1'b0, rst = 1'b1, done = 1'b0;
  always #5 clk = ~clk;

  logic [2:0]    ibus, pbus;
  logic          iscl_oe, isda_oe, pscl_oe, psda_oe;
  logic          iscl, isda, pscl, psda, sel;
  logic [NB-1:0] scl_in, sda_in, scl_oe, sda_oe;

  i2c_bus_mux #(.NUM_BUS(NB)) dut (
    .clk, .rst, .init_done_i(done), .sel_ipb_o(sel),
    .init_bus_i(ibus), .init_scl_oe_i(iscl_oe), .init_sda_oe_i(isda_oe),
    .init_scl_o(iscl), .init_sda_o(isda),
    .ipb_bus_i(pbus), .ipb_scl_oe_i(pscl_oe), .ipb_sda_oe_i(psda_oe),
    .ipb_scl_o(pscl), .ipb_sda_o(psda),
    .bus_scl_i(scl_in), .bus_sda_i(sda_in), .bus_scl_oe_o(scl_oe), .bus_sda_oe_o(sda_oe));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic trial(bit owner_ipb);
    logic [2:0] b;
    logic [NB-1:0] e_scl, e_sda;
    logic so, dox, ls, ld;
    {ibus, pbus} = 6'($urandom);
    {iscl_oe, isda_oe, pscl_oe, psda_oe} = 4'($urandom);
    scl_in = NB'($urandom); sda_in = NB'($urandom);
    #1;
    b   = owner_ipb ? pbus : ibus;
    so  = owner_ipb ? pscl_oe : iscl_oe;
    dox = owner_ipb ? psda_oe : isda_oe;
    e_scl = '0; e_sda = '0; ls = 1'b1; ld = 1'b1;
    if (int'(b) < NB) begin
      e_scl[b] = so; e_sda[b] = dox; ls = scl_in[b]; ld = sda_in[b];
    end
    check(sel == owner_ipb, "owner flag");
    check(scl_oe == e_scl && sda_oe == e_sda, $sformatf("pull-downs, bus %0d", b));
    if (owner_ipb) check(pscl == ls && psda == ld && iscl && isda, "IPbus master reads the bus");
    else           check(iscl == ls && isda == ld && pscl && psda, "init master reads the bus");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst = 1'b0;
    repeat (200) trial(1'b0);
    @(negedge clk) done = 1'b1;
    @(negedge clk) done = 1'b0;
    repeat (200) trial(1'b1);
    @(negedge clk) rst = 1'b1;
    @(negedge clk) rst = 1'b0;
    repeat (50) trial(1'b0);
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
