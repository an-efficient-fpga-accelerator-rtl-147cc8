// Check counters shared by the block testbenches.
int checks = 0, failures = 0;
task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
endtask
task automatic finish_tb();
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
endtask
