// tb_common.svh: shared check counting for the self-checking testbenches.
// CHECK(cond, msg) counts one check and, if cond is false, one failure.
// TB_FINISH prints the result line and ends the simulation.
`ifndef TB_COMMON_SVH
`define TB_COMMON_SVH
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end end
`define TB_FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define TB_WATCHDOG(cycles) \
  initial begin repeat (cycles) @(posedge clk); failures++; $display("FAIL watchdog"); `TB_FINISH end
`endif
