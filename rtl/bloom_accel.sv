// bloom_accel: Bloom-filter hash offload behind the invocation protocol.
//
// Each argument line is one 128-byte element. It is fed to bloom_hash as two
// 512-bit beats (so a line is taken every 2 cycles: arg_ready is low in the
// cycle of the second beat), with its line index as tag. The 8 x 64-bit
// hashes that come out 64 cycles later are written into result line idx
// (low 512 bits; the high 512 bits are zero). fu_done rises once fu_start has
// been seen and fu_n results have been written, and stays high until fu_ack.
// Same function-unit interface as accel_bram. The result layout and the
// per-line element mapping are this design's own choice; the paper says the
// return value is the set of 8 64-bit hashes for each element.
module bloom_accel
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
  localparam int IDX_W = $clog2(MAX_LINES);

  logic second;                 // second beat of the current line is due
  logic [HALF_BITS-1:0] hi_q;   // upper half of the line being fed
  logic [IDX_W-1:0] tag_q;

  logic               h_in_valid;
  logic [HALF_BITS-1:0] h_in_data;
  logic [IDX_W-1:0]   h_in_tag;
  logic               h_out_valid;
  logic [511:0]       h_out_hash;
  logic [IDX_W-1:0]   h_out_tag;

  assign arg_ready  = !second;
  assign h_in_valid = second || arg_valid;
  assign h_in_data  = second ? hi_q : arg_data[HALF_BITS-1:0];
  assign h_in_tag   = second ? tag_q : arg_idx;

  bloom_hash #(.K(8), .ELEM_BYTES(LINE_BYTES), .UNROLL(2), .BUS_W(HALF_BITS),
               .TAG_W(IDX_W)) u_hash (
    .clk, .rst_n,
    .in_valid (h_in_valid),
    .in_second(second),
    .in_data  (h_in_data),
    .in_tag   (h_in_tag),
    .out_valid(h_out_valid),
    .out_hash (h_out_hash),
    .out_tag  (h_out_tag)
  );

  line_t mem [MAX_LINES];
  assign res_data = mem[res_idx];
  always_ff @(posedge clk) begin
    if (h_out_valid) mem[h_out_tag] <= {{HALF_BITS{1'b0}}, h_out_hash};
    if (arg_valid && !second) begin
      hi_q  <= arg_data[LINE_BITS-1:HALF_BITS];
      tag_q <= arg_idx;
    end
  end

  logic [IDX_W:0] res_cnt;
  logic           armed;
  logic [IDX_W:0] n_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      second <= 1'b0; res_cnt <= '0; armed <= 1'b0; n_q <= '0; fu_done <= 1'b0;
    end else begin
      if (second)                    second <= 1'b0;
      else if (arg_valid)            second <= 1'b1;
      if (fu_ack) begin
        fu_done <= 1'b0; armed <= 1'b0; res_cnt <= '0;
      end else begin
        if (h_out_valid) res_cnt <= res_cnt + 1'b1;
        if (fu_start) begin armed <= 1'b1; n_q <= fu_n; end
        if (armed && !fu_done && res_cnt == n_q) fu_done <= 1'b1;
      end
    end
  end
endmodule
