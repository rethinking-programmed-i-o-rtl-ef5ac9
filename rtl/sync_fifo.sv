// sync_fifo: single-clock FIFO of DEPTH entries of type T.
// Write when wr_en && !full, read (pop) when rd_en && !empty; rd_data shows
// the head entry combinationally. Entries are stored in an array, so it maps
// to distributed or block RAM. Helper for the endpoints.
//
// A generic helper: the paper says nothing about FIFOs, so depth and the
// show-ahead read are this design's own choices.
module sync_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_en,
  input  T     wr_data,
  input  logic rd_en,
  output T     rd_data,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (wr_en && !full) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (rd_en && !empty) rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      case ({wr_en && !full, rd_en && !empty})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end
endmodule
