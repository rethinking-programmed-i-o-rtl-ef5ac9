// axis_tx_dma: transmit data mover between the packet SRAM and the MAC.
//
// nic_tx_pio queues a (slot, len) for each frame the CPU has handed over.
// The slot holds the frame in the same layout the CPU wrote through the
// coherent lines: header in bytes 0..7, frame bytes from byte 8 on. The mover
// reads the slot line by line and realigns it by 8 bytes onto the 512-bit
// AXI-Stream: beat i = frame bytes 64i..64i+63, which is the high 56 bytes of
// half line i and the low 8 bytes of half line i+1. The last beat carries
// tlast and a tkeep covering the len mod 64 tail. When the last beat is
// taken the slot is released (`free` pulses).
// Timing: two cycles of SRAM read ahead of the first beat, then one beat per
// cycle while tready is high (the next line is read during the even beat).
// The paper names an "AXI DMA" between the packet SRAM and the MAC; the layout
// and read schedule are this design's own.
module axis_tx_dma
  import eci_pio_pkg::*;
#(
  parameter int SLOTS      = 4,
  parameter int SLOT_LINES = 76,
  localparam int LINES     = SLOTS * SLOT_LINES,
  localparam int SW        = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // frames to send
  input  logic                     pkt_valid,
  output logic                     pkt_ready,
  input  logic [SW-1:0]            pkt_slot,
  input  logic [15:0]              pkt_len,
  output logic                     free,
  // packet SRAM read port
  output logic                     rd_en,
  output logic [$clog2(LINES)-1:0] rd_addr,
  input  line_t                    rd_data,
  // AXI-Stream to the MAC
  output logic                     m_tvalid,
  input  logic                     m_tready,
  output logic [511:0]             m_tdata,
  output logic [63:0]              m_tkeep,
  output logic                     m_tlast
);
  localparam int LW = $clog2(SLOT_LINES + 1);
  typedef enum logic [1:0] {IDLE, FIRST, EVEN, ODD} state_e;

  state_e state;
  logic [SW-1:0]  slot_q;
  logic [15:0]    len_q;
  logic [8:0]     beats_q;       // beats in the frame
  logic [8:0]     beat_q;        // index of the beat on the bus
  logic [LW-1:0]  line_q;        // line held in cur_q
  line_t          cur_q;

  function automatic logic [$clog2(LINES)-1:0] addr_of(logic [SW-1:0] s, logic [LW-1:0] l);
    logic [LW-1:0] lc;
    lc = (l >= LW'(SLOT_LINES)) ? LW'(SLOT_LINES - 1) : l;
    return ($clog2(LINES))'(s * SLOT_LINES + lc);
  endfunction

  logic last;
  logic [6:0] tail;
  assign last     = (beat_q + 1'b1 == beats_q);
  assign tail     = (len_q[5:0] == 6'd0) ? 7'd64 : {1'b0, len_q[5:0]};
  assign m_tvalid = (state == EVEN) || (state == ODD);
  assign m_tlast  = m_tvalid && last;
  assign m_tkeep  = last ? ((tail == 7'd64) ? '1 : ((64'd1 << tail) - 64'd1)) : '1;
  assign m_tdata  = (state == EVEN) ? {cur_q[575:512], cur_q[511:64]}
                                    : {rd_data[63:0], cur_q[1023:576]};
  assign pkt_ready = (state == IDLE);

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = addr_of(slot_q, line_q + 1'b1);
    case (state)
      IDLE: begin
        rd_en   = pkt_valid;
        rd_addr = addr_of(pkt_slot, '0);
      end
      FIRST: rd_en = 1'b1;                          // line 1
      ODD:   if (m_tready && !last) begin
        rd_en   = 1'b1;                             // line L + 2
        rd_addr = addr_of(slot_q, line_q + LW'(2));
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; slot_q <= '0; len_q <= '0; beats_q <= '0; beat_q <= '0;
      line_q <= '0; cur_q <= '0; free <= 1'b0;
    end else begin
      free <= 1'b0;
      case (state)
        IDLE: if (pkt_valid) begin
          slot_q  <= pkt_slot;
          len_q   <= pkt_len;
          beats_q <= 9'((pkt_len + 16'd63) >> 6);
          beat_q  <= '0;
          line_q  <= '0;
          state   <= FIRST;
        end
        FIRST: begin
          cur_q <= rd_data;
          state <= (beats_q == '0) ? IDLE : EVEN;
          if (beats_q == '0) free <= 1'b1;
        end
        EVEN: if (m_tready) begin
          beat_q <= beat_q + 1'b1;
          if (last) begin state <= IDLE; free <= 1'b1; end
          else state <= ODD;
        end
        ODD: if (m_tready) begin
          beat_q <= beat_q + 1'b1;
          cur_q  <= rd_data;
          line_q <= line_q + 1'b1;
          if (last) begin state <= IDLE; free <= 1'b1; end
          else state <= EVEN;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
