// Self-checking testbench of the gas counter: load, random charges against
// a model, the 'enough' flag, and an over-charge that empties the counter
// and sets the sticky out-of-gas flag until the next load.
// No ports; 10 ns clock, watchdog 100000 cycles. The paper gives the
// load-and-deduct role; the out-of-gas rule checked is Ethereum's.
module tb_evmx_gas;
  logic clk = 0, rst_n = 0, load = 0, charge = 0, enough, out_of_gas;
  logic [63:0] gval = 0, cost = 0, gas_left;
  logic [63:0] model;
  evmx_gas dut (.*);
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    @(negedge clk); rst_n = 1;
    gval = 64'd100000; load = 1; @(negedge clk); load = 0; model = 100000;
    chk(gas_left == 100000 && !out_of_gas, "load");
    while (model > 40000) begin
      charge = 1; cost = 64'($urandom_range(0, 3000)); #1;
      chk(enough == (cost <= model), "enough");
      @(negedge clk); model -= cost;
      chk(gas_left == model && !out_of_gas, "charge");
    end
    charge = 1; cost = model; @(negedge clk);
    chk(gas_left == 0 && !out_of_gas, "exact charge");
    cost = 1; #1; chk(!enough, "not enough");
    @(negedge clk); charge = 0;
    chk(gas_left == 0 && out_of_gas, "out of gas");
    charge = 1; cost = 0; @(negedge clk); charge = 0;
    chk(out_of_gas, "sticky");
    gval = 21; load = 1; @(negedge clk); load = 0;
    chk(gas_left == 21 && !out_of_gas, "reload");
    charge = 1; cost = 22; @(negedge clk); charge = 0;
    chk(gas_left == 0 && out_of_gas, "over-charge empties");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
