// tb_nack_timer: checks that the timeout fires after exactly `limit` cycles
// of `run`, that pauses in `run` pause the count, that it fires once and
// holds FIRED until `clear`, and that `clear` restarts the count.
//
// The paper gives only the purpose of the timer; the exact firing cycle
// checked here is this design's definition.
module tb_nack_timer;
  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0, clear = 1'b0;
  logic [31:0] limit = 32'd5;
  logic fire, fired;
  int checks = 0, failures = 0;

  nack_timer #(.CNT_W(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Runs `n` cycles with run high and returns the 1-based cycle of the first fire.
  task automatic run_cycles(input int n, output int first);
    first = 0;
    for (int i = 1; i <= n; i++) begin
      run = 1'b1;
      #1;
      if (fire && first == 0) first = i;
      @(posedge clk); #1;
    end
    run = 1'b0;
  endtask

  initial begin
    int f;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    // straight run: fires in the 5th cycle
    run_cycles(8, f);
    check(f == 5, $sformatf("fire in cycle %0d, expected 5", f));
    check(fired, "FIRED held after firing");
    // still fired, no second pulse
    run = 1'b1; #1; check(!fire, "no second fire"); @(posedge clk); #1; run = 1'b0;
    // clear, then 3 cycles, pause 4, then 2 more -> fires in the 2nd of those
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    check(!fired, "clear leaves FIRED");
    run_cycles(3, f);
    check(f == 0, "no fire before the limit");
    repeat (4) @(posedge clk); #1;
    run_cycles(2, f);
    check(f == 2, $sformatf("paused count fires in cycle %0d of the second run, expected 2", f));
    // clear in the middle restarts
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    run_cycles(4, f);
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    run_cycles(4, f);
    check(f == 0, "clear restarts an unfired count");
    // limit 1 fires at once
    limit = 32'd1;
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    run_cycles(2, f);
    check(f == 1, "limit 1 fires in the first cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
