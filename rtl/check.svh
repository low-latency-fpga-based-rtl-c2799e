// check.svh: self-check helpers shared by the testbenches.
// A testbench declares `int checks, failures;` and uses CHECK to count a
// comparison and report a mismatch with its message.
`ifndef CHECK_SVH
`define CHECK_SVH
`define CHECK(cond, msg) \
  begin \
    checks++; \
    if (!(cond)) begin \
      failures++; \
      $display("FAIL @%0t: %s", $time, msg); \
    end \
  end
`endif
