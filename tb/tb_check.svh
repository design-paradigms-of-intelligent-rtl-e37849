// Shared bookkeeping for the self-checking testbenches: a check counter, a
// failure counter, a CHECK macro that reports mismatches, and the result
// line every testbench prints before $finish.
`ifndef TB_CHECK_SVH
`define TB_CHECK_SVH
`define TB_COUNTERS int checks = 0; int failures = 0;
`define CHECK(cond, msg) \
  begin checks++; if (!(cond)) begin failures++; \
    if (failures <= 20) $display("FAIL %s", $sformatf msg); end end
`define TB_FINISH \
  begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
`endif
