// accel_bram: the accelerator used to measure invocation latency and
// throughput. An invocation is mapped to a write of the argument lines into
// on-chip Block RAM followed by a read of the same lines as the result.
//
// Interface: arguments arrive one line per cycle on arg_* with their line
// index, in any order, and are written at that index. fu_start (all n
// arguments written) raises fu_done on the next cycle; fu_done stays high
// until fu_ack. The result port reads line res_idx combinationally.
// Depth MAX_LINES lines of 128 bytes (64 KiB at the default, the largest
// invocation size measured). The paper gives the function (write then read
// of Block RAM); the index-addressed ports are this design's own.
module accel_bram
  import eci_pio_pkg::*;
#(
  parameter int MAX_LINES = 512
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                         arg_valid,
  output logic                         arg_ready,
  input  logic [$clog2(MAX_LINES)-1:0] arg_idx,
  input  line_t                        arg_data,
  input  logic                         fu_start,
  input  logic [$clog2(MAX_LINES):0]   fu_n,
  output logic                         fu_done,
  input  logic                         fu_ack,
  input  logic [$clog2(MAX_LINES)-1:0] res_idx,
  output line_t                        res_data
);
  line_t mem [MAX_LINES];

  assign arg_ready = 1'b1;
  assign res_data  = mem[res_idx];

  always_ff @(posedge clk) begin
    if (arg_valid) mem[arg_idx] <= arg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        fu_done <= 1'b0;
    else if (fu_ack)   fu_done <= 1'b0;
    else if (fu_start) fu_done <= 1'b1;
  end

  logic unused;
  assign unused = ^fu_n;
endmodule
