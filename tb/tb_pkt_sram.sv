// tb_pkt_sram: writes random lines, half lines and whole lines, then reads
// them back and compares with a model array; checks the one-cycle registered
// read and that rd_data holds while rd_en is low.
//
// The paper only names the packet SRAM; its two-bank form is this design's.
module tb_pkt_sram;
  import eci_pio_pkg::*;
  localparam int LINES = 304;
  logic clk = 1'b0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [1:0] wr_be = '0;
  logic [$clog2(LINES)-1:0] wr_addr = '0, rd_addr = '0;
  line_t wr_data = '0, rd_data;
  line_t model [LINES];
  int checks = 0, failures = 0;

  pkt_sram #(.LINES(LINES)) dut (.*);
  always #5 clk = ~clk;

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[32*i +: 32] = $urandom;
    return l;
  endfunction

  initial begin
    @(posedge clk); #1;
    for (int a = 0; a < LINES; a++) begin
      wr_en = 1'b1; wr_be = 2'b11; wr_addr = a[8:0]; wr_data = rnd_line();
      model[a] = wr_data;
      @(posedge clk); #1;
    end
    // half writes
    for (int k = 0; k < 200; k++) begin
      int a;
      a = $urandom_range(LINES - 1);
      wr_be = 2'($urandom_range(1, 2)); wr_addr = a[8:0]; wr_data = rnd_line();
      if (wr_be[0]) model[a][511:0]    = wr_data[511:0];
      if (wr_be[1]) model[a][1023:512] = wr_data[1023:512];
      @(posedge clk); #1;
    end
    wr_en = 1'b0;
    for (int a = 0; a < LINES; a++) begin
      rd_en = 1'b1; rd_addr = a[8:0];
      @(posedge clk); #1;
      rd_en = 1'b0;
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL line %0d", a); end
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL hold line %0d", a); end
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
