// axis_rx_dma: receive data mover between the Ethernet MAC and the packet SRAM.
//
// Takes frames from the MAC's 512-bit AXI-Stream (tdata little endian,
// contiguous tkeep, tlast on the final beat) and stores each one in the next
// free slot of the RX packet SRAM, in the layout the CPU reads through the
// coherent control and overflow lines:
//   slot byte 0..7   header (nic_hdr_t: valid = 1, len = frame bytes)
//   slot byte 8..    frame bytes 0..len-1
// Because of the 8-byte header each beat is split: its low 56 bytes complete
// the current 64-byte half line and its high 8 bytes start the next. Half 0
// (header + frame bytes 0..55) is kept in a register and written when the
// frame ends and its length is known. Completed frames are queued as
// (slot, len) for nic_rx_pio; `free` returns the oldest slot. Slots are used
// and freed in ring order. With no free slot, tready is low (back-pressure).
// Bytes beyond a slot's capacity are counted but not stored.
// Timing: one beat per cycle while tready; after tlast, 1 or 2 cycles of
// tready low to store the tail and the header.
// The paper names an "AXI DMA" between MAC and packet SRAM; the slot layout
// and ring discipline are this design's own.
module axis_rx_dma
  import eci_pio_pkg::*;
#(
  parameter int SLOTS      = 4,
  parameter int SLOT_LINES = 76,   // ceil((9600 + 8) / 128)
  localparam int LINES     = SLOTS * SLOT_LINES,
  localparam int SW        = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // AXI-Stream from the MAC
  input  logic                     s_tvalid,
  output logic                     s_tready,
  input  logic [511:0]             s_tdata,
  input  logic [63:0]              s_tkeep,
  input  logic                     s_tlast,
  // packet SRAM write port
  output logic                     wr_en,
  output logic [1:0]               wr_be,
  output logic [$clog2(LINES)-1:0] wr_addr,
  output line_t                    wr_data,
  // completed frames
  output logic                     pkt_valid,
  input  logic                     pkt_ready,
  output logic [SW-1:0]            pkt_slot,
  output logic [15:0]              pkt_len,
  // slot release
  input  logic                     free,
  output logic                     dropped_bytes
);
  localparam int HW = $clog2(2 * SLOT_LINES + 1);
  typedef enum logic [1:0] {RECV, FLUSH, HDR} state_e;
  typedef struct packed { logic [SW-1:0] slot; logic [15:0] len; } desc_t;

  state_e state;
  logic [SW-1:0] slot_q;
  logic [SW:0]   used;
  logic [HW-1:0] half_q;       // index of the half the next beat completes
  logic [15:0]   len_q;
  logic [447:0]  half0_q;
  logic [63:0]   carry_q;
  logic          over_q;

  logic beat;
  logic [6:0] nbytes;
  assign s_tready = (state == RECV) && (used < (SW+1)'(SLOTS));
  assign beat     = s_tvalid && s_tready;
  assign nbytes   = 7'($countones(s_tkeep));

  function automatic logic [$clog2(LINES)-1:0] line_of(logic [SW-1:0] s, logic [HW-1:0] h);
    return ($clog2(LINES))'(32'(s) * SLOT_LINES + 32'(h >> 1));
  endfunction

  desc_t d_in, d_out;
  logic  d_full, d_empty, d_push;
  logic [$clog2(SLOTS+1)-1:0] d_count;
  assign d_in = '{slot: slot_q, len: len_q};
  sync_fifo #(.T(desc_t), .DEPTH(SLOTS)) u_desc (
    .clk, .rst_n, .wr_en(d_push), .wr_data(d_in), .rd_en(pkt_valid && pkt_ready),
    .rd_data(d_out), .full(d_full), .empty(d_empty), .count(d_count)
  );
  assign pkt_valid = !d_empty;
  assign pkt_slot  = d_out.slot;
  assign pkt_len   = d_out.len;
  assign d_push    = (state == HDR);
  assign dropped_bytes = over_q;

  nic_hdr_t hdr;
  assign hdr = '{rsvd: '0, valid: 1'b1, len: len_q};

  always_comb begin
    wr_en   = 1'b0;
    wr_be   = 2'b00;
    wr_addr = line_of(slot_q, half_q);
    wr_data = '0;
    case (state)
      RECV: if (beat && half_q != '0 && half_q < HW'(2 * SLOT_LINES)) begin
        wr_en   = 1'b1;
        wr_be   = half_q[0] ? 2'b10 : 2'b01;
        wr_data = {2{s_tdata[447:0], carry_q}};
      end
      FLUSH: if (half_q < HW'(2 * SLOT_LINES)) begin
        wr_en   = 1'b1;
        wr_be   = half_q[0] ? 2'b10 : 2'b01;
        wr_data = {2{448'b0, carry_q}};
      end
      HDR: begin
        wr_en   = 1'b1;
        wr_be   = 2'b01;
        wr_addr = line_of(slot_q, '0);
        wr_data = {2{half0_q, 64'(hdr)}};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= RECV; slot_q <= '0; used <= '0; half_q <= '0; len_q <= '0;
      half0_q <= '0; carry_q <= '0; over_q <= 1'b0;
    end else begin
      case (state)
        RECV: if (beat) begin
          if (half_q == '0) half0_q <= s_tdata[447:0];
          else if (half_q >= HW'(2 * SLOT_LINES)) over_q <= 1'b1;
          carry_q <= s_tdata[511:448];
          len_q   <= len_q + 16'(nbytes);
          if (s_tlast) begin
            // the header shifts the frame by 8 bytes: a last beat with more
            // than 56 bytes leaves a tail in carry_q
            if (nbytes > 7'd56) begin
              half_q <= half_q + 1'b1;
              state  <= FLUSH;
            end else begin
              state  <= HDR;
            end
          end else begin
            if (half_q < HW'(2 * SLOT_LINES)) half_q <= half_q + 1'b1;
          end
        end
        FLUSH: state <= HDR;
        HDR: begin
          state  <= RECV;
          slot_q <= (slot_q == SW'(SLOTS - 1)) ? '0 : slot_q + 1'b1;
          half_q <= '0;
          len_q  <= '0;
        end
        default: state <= RECV;
      endcase
      case ({d_push, free && used != '0})
        2'b10:   used <= used + 1'b1;
        2'b01:   used <= used - 1'b1;
        default: ;
      endcase
    end
  end

  logic unused;
  assign unused = ^{d_full, d_count};
endmodule
