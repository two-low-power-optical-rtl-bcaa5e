// Pass/fail bookkeeping shared by the testbenches.
int checks = 0;
int failures = 0;

task automatic check(input bit cond, input string what);
  checks++;
  if (!cond) begin
    failures++;
    if (failures <= 20) $display("FAIL %s at %0t", what, $time);
  end
endtask

task automatic finish_tb();
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
endtask
