// tb_bloom_hash: streams elements at the full rate (one beat per cycle, a new
// element every 2 cycles), compares each result with a byte-serial reference
// of the K shift-add-xor hashes, and checks the 64-cycle latency and the
// 2-cycle initiation interval from the cycle counts.
//
// The 64-cycle latency and the initiation interval of 2 are the paper's
// numbers and are checked in cycles; the hash step itself is this design's.
module tb_bloom_hash;
  localparam int K = 8, NELEM = 40, LAT = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_second = 1'b0;
  logic [511:0] in_data = '0;
  logic [8:0] in_tag = '0;
  logic out_valid;
  logic [K*64-1:0] out_hash;
  logic [8:0] out_tag;
  int checks = 0, failures = 0;
  logic [1023:0] elems [NELEM];
  longint unsigned t_in [NELEM];
  longint unsigned cycle = 0;
  int got = 0;

  bloom_hash #(.K(K), .ELEM_BYTES(128), .UNROLL(2), .BUS_W(512), .TAG_W(9)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // reference: byte-serial, written independently of the pipeline
  function automatic logic [63:0] ref_hash(logic [1023:0] e, int j);
    logic [63:0] h;
    h = (64'h9E3779B97F4A7C15 * 64'(j + 1)) ^ 64'hC2B2AE3D27D4EB4F;
    for (int b = 0; b < 128; b++) begin
      logic [63:0] x;
      x = (h << 5) + (h >> 2) + {56'd0, e[8*b +: 8]};
      h = h ^ x;
    end
    return h;
  endfunction

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int i;
      i = int'(out_tag);
      checks++;
      if (cycle - t_in[i] != LAT) begin
        failures++; $display("FAIL latency %0d for element %0d", cycle - t_in[i], i);
      end
      for (int j = 0; j < K; j++) begin
        checks++;
        if (out_hash[64*j +: 64] !== ref_hash(elems[i], j)) begin
          failures++; $display("FAIL hash %0d of element %0d", j, i);
        end
      end
      checks++;
      if (i != got) begin failures++; $display("FAIL order %0d != %0d", i, got); end
      got++;
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1'b1; @(posedge clk); #1;
    for (int i = 0; i < NELEM; i++) begin
      for (int w = 0; w < 32; w++) elems[i][32*w +: 32] = $urandom;
      if (i == 1) elems[i] = '0;
      in_valid = 1'b1; in_second = 1'b0; in_data = elems[i][511:0]; in_tag = 9'(i);
      @(posedge clk); #1;
      in_second = 1'b1; in_data = elems[i][1023:512];
      t_in[i] = cycle;
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (got != NELEM) begin failures++; $display("FAIL got %0d results", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
