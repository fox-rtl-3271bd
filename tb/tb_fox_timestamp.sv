// tb_fox_timestamp -- self-checking test of the FOX time base.
// Checks reset to 0, increment by one per clock, and that a load takes effect
// the next cycle and counting resumes from the loaded value.
module tb_fox_timestamp;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load_en = 0;
  logic [63:0] load_val = '0, ts, expect_ts;
  int checks = 0, failures = 0;

  fox_timestamp dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s ts=%0d exp=%0d", what, ts, expect_ts); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    expect_ts = 0;
    check(ts == 0, "reset");
    rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); expect_ts++;
      check(ts == expect_ts, "increment");
    end
    load_en = 1; load_val = 64'hFFFF_FFFF_FFFF_FFF0;
    @(negedge clk); load_en = 0; expect_ts = load_val;
    check(ts == expect_ts, "load");
    for (int i = 0; i < 40; i++) begin
      @(negedge clk); expect_ts++;
      check(ts == expect_ts, "count after load, wrap");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
