// tb_check.svh -- check counting shared by the self-checking testbenches.
// A testbench declares `int checks, failures;` and uses CHECK(cond, msg);
// TB_END prints the result line and ends the simulation.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; \
    if (failures <= 20) $display("FAIL %s (t=%0t)", msg, $time); end end
`define TB_END \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define WATCHDOG(clkname, ncyc) \
  initial begin repeat (ncyc) @(posedge clkname); failures++; \
    $display("FAIL watchdog after %0d cycles", ncyc); `TB_END end
`endif
