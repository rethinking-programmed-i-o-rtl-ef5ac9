// pkt_sram: on-chip packet buffer of the NIC ("Pkt. SRAM").
//
// LINES lines of 128 bytes, split into two 512-bit banks (low and high half
// of each line) so that a writer can store either half or a whole line:
// wr_be[0] writes wr_data[511:0] into the low half, wr_be[1] wr_data[1023:512]
// into the high half. One read port: rd_data shows line rd_addr one cycle
// after rd_en and holds it until the next rd_en (registered, block-RAM
// style). Write and read are independent; a read of a line written in the
// same cycle returns the old contents.
// The paper names the buffer; its organisation is this design's own.
module pkt_sram
  import eci_pio_pkg::*;
#(
  parameter int LINES = 304
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [1:0]               wr_be,
  input  logic [$clog2(LINES)-1:0] wr_addr,
  input  line_t                    wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(LINES)-1:0] rd_addr,
  output line_t                    rd_data
);
  half_t bank_lo [LINES];
  half_t bank_hi [LINES];

  always_ff @(posedge clk) begin
    if (wr_en && wr_be[0]) bank_lo[wr_addr] <= wr_data[HALF_BITS-1:0];
    if (wr_en && wr_be[1]) bank_hi[wr_addr] <= wr_data[LINE_BITS-1:HALF_BITS];
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= {bank_hi[rd_addr], bank_lo[rd_addr]};
  end
endmodule
