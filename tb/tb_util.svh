// tb_util.svh: check counters and a check macro shared by the testbenches.
// A testbench declares `int checks, failures;` and uses
// `CHECK(condition, message-format, arguments) for every compared value.
`ifndef TB_UTIL_SVH
`define TB_UTIL_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      if (failures <= 20) $display("FAIL %s", $sformatf msg); \
    end \
  end
`endif
