// Shared check and finish macros of the testbenches. A testbench declares
// "int checks, failures" and a clock "clk" before using them.
`define TB_CHECK(cond, msg) begin checks++; if (!(cond)) begin failures++; $display("FAIL t=%0t: %s", $time, msg); end end
`define TB_FINISH begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`define TB_WATCHDOG(ncyc) initial begin repeat (ncyc) @(posedge clk); failures++; $display("FAIL: watchdog expired"); `TB_FINISH end
