// Shared scoreboard helpers for the unit testbenches.
int checks = 0, failures = 0;
initial begin
  #1000000;
  failures++;
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
task automatic chk(input bit ok, input string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 8) $display("FAIL %s", what);
  end
endtask
