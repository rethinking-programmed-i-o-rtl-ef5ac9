// tb_accel_bram: writes n argument lines in a random order, starts the
// function, checks that fu_done rises one cycle after fu_start and falls on
// fu_ack, and that every result line equals the argument written there.
//
// Expected values: the paper's write-then-read, so results equal arguments.
module tb_accel_bram;
  import eci_pio_pkg::*;
  localparam int MAX_LINES = 512;
  logic clk = 1'b0, rst_n = 1'b0;
  logic arg_valid = 1'b0, arg_ready, fu_start = 1'b0, fu_done, fu_ack = 1'b0;
  logic [8:0] arg_idx = '0, res_idx = '0;
  logic [9:0] fu_n = '0;
  line_t arg_data = '0, res_data;
  line_t model [MAX_LINES];
  int checks = 0, failures = 0;

  accel_bram #(.MAX_LINES(MAX_LINES)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int order [MAX_LINES];
    repeat (2) @(posedge clk); rst_n = 1'b1; @(posedge clk); #1;
    for (int round = 0; round < 2; round++) begin
      int n;
      n = (round == 0) ? 37 : MAX_LINES;
      for (int i = 0; i < n; i++) order[i] = i;
      for (int i = n - 1; i > 0; i--) begin
        int j, t;
        j = $urandom_range(i); t = order[i]; order[i] = order[j]; order[j] = t;
      end
      for (int i = 0; i < n; i++) begin
        line_t l;
        for (int w = 0; w < 32; w++) l[32*w +: 32] = $urandom;
        arg_valid = 1'b1; arg_idx = order[i][8:0]; arg_data = l; model[order[i]] = l;
        check(arg_ready, "arg_ready");
        @(posedge clk); #1;
      end
      arg_valid = 1'b0;
      check(!fu_done, "fu_done low before start");
      fu_start = 1'b1; fu_n = 10'(n); @(posedge clk); #1; fu_start = 1'b0;
      check(fu_done, "fu_done one cycle after fu_start");
      for (int i = 0; i < n; i++) begin
        res_idx = i[8:0]; #1;
        check(res_data === model[i], $sformatf("result line %0d", i));
      end
      fu_ack = 1'b1; @(posedge clk); #1; fu_ack = 1'b0;
      check(!fu_done, "fu_done cleared by fu_ack");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
