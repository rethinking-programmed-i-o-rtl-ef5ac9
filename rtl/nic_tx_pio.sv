// nic_tx_pio: transmit side of the coherent-PIO NIC interface.
//
// The CPU hands a frame to the device through two control lines, used
// alternately, and OVF_LINES overflow lines, all homed at the device (the
// write-to-device protocol with overflow lines). Control line A is the
// doorbell, held Shared by the CPU; B is the payload line, held Exclusive.
//   0. The CPU obtains write permission (Load Exclusive) for B and for the
//      overflow lines it needs. The device grants Exclusive at once: ACK if
//      the CPU still had a Shared copy, else ACK+Data. The device directory
//      records each line the CPU now holds Exclusive.
//   1. The CPU writes the frame: B gets the 8-byte header (len) and frame
//      bytes 0..119, overflow line j bytes 120+128j... (E->M, silent).
//   2. The CPU issues Load Exclusive on A. The device holds the request back
//      until a packet SRAM slot is free, then sends SInv for B and for every
//      overflow line the CPU holds Exclusive, all at once. Each Data reply
//      is written into the slot (B to line 0, overflow j to line j+1), in
//      whatever order it comes; the lines stay Shared at the CPU.
//   3. With all replies in, the frame (slot, len) is queued for the TX data
//      mover and A is answered with ACK, granted Exclusive. A and B swap.
// Address offsets inside the region: 0x000 and 0x001 control lines, 0x100+j
// overflow line j.
// Follows the paper: the Load Exclusive / SInv / Data / ACK sequence, the
// swap of the two lines, overflow lines fetched in parallel with the control
// line, counting replies instead of relying on their order. This design's
// own: the header, address map, slot ring and the Exclusive-grant path.
// No timeout here: the only wait is for a free slot, which the TX data mover
// frees at line rate.
module nic_tx_pio
  import eci_pio_pkg::*;
#(
  parameter logic [3:0] REGION     = REGION_NIC_TX,
  parameter int         OVF_LINES  = 75,
  parameter int         SLOTS      = 4,
  parameter int         SLOT_LINES = 76,
  localparam int        LINES      = SLOTS * SLOT_LINES,
  localparam int        SW         = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // coherence message channels
  input  logic      req_valid,
  output logic      req_ready,
  input  cpu_req_t  req,
  output logic      fwd_valid,
  input  logic      fwd_ready,
  output dev_fwd_t  fwd,
  input  logic      data_valid,
  output logic      data_ready,
  input  cpu_data_t data,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output dev_rsp_t  rsp,
  // packet SRAM write port
  output logic                     wr_en,
  output logic [1:0]               wr_be,
  output logic [$clog2(LINES)-1:0] wr_addr,
  output line_t                    wr_data,
  // frames to the TX data mover
  output logic                     pkt_valid,
  input  logic                     pkt_ready,
  output logic [SW-1:0]            pkt_slot,
  output logic [15:0]              pkt_len,
  input  logic                     free,
  // status
  output logic                     slot_stall,
  output logic                     proto_err
);
  localparam logic [OFFS_W-1:0] OVF_BASE = 16'h0100;
  localparam int OW = $clog2(OVF_LINES);
  typedef enum logic [2:0] {IDLE, GRANT, WAITSLOT, SINV, DOORBELL} state_e;
  typedef struct packed { logic [SW-1:0] slot; logic [15:0] len; } desc_t;

  state_e state;
  logic   cur;                             // doorbell line A
  logic   other;                        // control line B
  assign  other = ~cur;
  logic [1:0]           ctrl_e, ctrl_s;    // CPU holds control line Exclusive / Shared
  logic [OVF_LINES-1:0] ovf_e,  ovf_s;
  logic [7:0]           outstanding;
  logic [SW-1:0]        slot_q;
  logic [SW:0]          used;
  logic [15:0]          len_q;
  laddr_t               g_addr;
  logic                 g_data;

  // request decode
  logic [OFFS_W-1:0] roffs;
  logic is_ctrl, is_ovf;
  logic [OW-1:0] r_ovf;
  assign roffs   = req.addr[OFFS_W-1:0];
  assign is_ctrl = (roffs[OFFS_W-1:1] == '0);
  assign is_ovf  = (roffs >= OVF_BASE) && (roffs < OVF_BASE + OFFS_W'(OVF_LINES));
  assign r_ovf   = OW'(roffs - OVF_BASE);

  logic doorbell, acquire;
  assign doorbell  = req_valid && is_ctrl && roffs[0] == cur && req.op == LOAD_EXCLUSIVE;
  assign acquire   = req_valid && ((is_ctrl && roffs[0] != cur) || is_ovf);
  assign req_ready = (state == IDLE) && (doorbell || acquire);

  // next line to fetch
  logic sinv_b, sinv_any;
  logic [OW-1:0] sinv_j;
  always_comb begin
    sinv_b   = ctrl_e[~cur];
    sinv_any = 1'b0;
    sinv_j   = '0;
    for (int j = OVF_LINES - 1; j >= 0; j--) begin
      if (ovf_e[j]) begin sinv_any = 1'b1; sinv_j = OW'(j); end
    end
  end
  assign fwd_valid  = (state == SINV) && (sinv_b || sinv_any);
  assign fwd.op     = FWD_SINV;
  assign fwd.addr   = sinv_b ? mk_addr(REGION, OFFS_W'(other))
                             : mk_addr(REGION, OVF_BASE + OFFS_W'(sinv_j));
  assign data_ready = 1'b1;

  // Data replies go straight into the slot
  logic [OFFS_W-1:0] doffs;
  logic d_ctrl;
  assign doffs   = data.addr[OFFS_W-1:0];
  assign d_ctrl  = (doffs[OFFS_W-1:1] == '0);
  assign wr_en   = data_valid;
  assign wr_be   = 2'b11;
  assign wr_addr = d_ctrl ? ($clog2(LINES))'(slot_q * SLOT_LINES)
                          : ($clog2(LINES))'(slot_q * SLOT_LINES + 32'(doffs - OVF_BASE) + 1);
  assign wr_data = data.data;

  logic fetch_done;
  assign fetch_done = (state == SINV) && !sinv_b && !sinv_any && (outstanding == '0) &&
                      !(fwd_valid && fwd_ready);

  // frame queue to the data mover
  desc_t d_in, d_out;
  logic d_full, d_empty;
  logic [$clog2(SLOTS+1)-1:0] d_count;
  assign d_in = '{slot: slot_q, len: len_q};
  sync_fifo #(.T(desc_t), .DEPTH(SLOTS)) u_desc (
    .clk, .rst_n, .wr_en(fetch_done), .wr_data(d_in), .rd_en(pkt_valid && pkt_ready),
    .rd_data(d_out), .full(d_full), .empty(d_empty), .count(d_count)
  );
  assign pkt_valid  = !d_empty;
  assign pkt_slot   = d_out.slot;
  assign pkt_len    = d_out.len;
  assign slot_stall = (state == WAITSLOT);

  always_comb begin
    rsp_valid    = 1'b0;
    rsp          = '0;
    rsp.grant    = GRANT_E;
    if (state == GRANT) begin
      rsp_valid    = 1'b1;
      rsp.has_data = g_data;
      rsp.addr     = g_addr;
    end else if (state == DOORBELL) begin
      rsp_valid    = 1'b1;
      rsp.has_data = !ctrl_s[cur];   // data only if the CPU had no copy
      rsp.addr     = mk_addr(REGION, OFFS_W'(cur));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; cur <= 1'b0; ctrl_e <= '0; ctrl_s <= '0; ovf_e <= '0; ovf_s <= '0;
      outstanding <= '0; slot_q <= '0; used <= '0; len_q <= '0; g_addr <= '0;
      g_data <= 1'b0; proto_err <= 1'b0;
    end else begin
      case ({fwd_valid && fwd_ready, data_valid})
        2'b10:   outstanding <= outstanding + 1'b1;
        2'b01:   outstanding <= outstanding - 1'b1;
        default: ;
      endcase
      if (fwd_valid && fwd_ready) begin
        if (sinv_b) begin ctrl_e[~cur] <= 1'b0; ctrl_s[~cur] <= 1'b1; end
        else begin        ovf_e[sinv_j] <= 1'b0; ovf_s[sinv_j] <= 1'b1; end
      end
      if (data_valid && d_ctrl) len_q <= data.data[15:0];
      if (data_valid && state != SINV) proto_err <= 1'b1;
      case ({fetch_done, free && used != '0})
        2'b10:   used <= used + 1'b1;
        2'b01:   used <= used - 1'b1;
        default: ;
      endcase
      case (state)
        IDLE: if (req_valid && req_ready) begin
          if (doorbell) begin
            if (!ctrl_e[~cur]) proto_err <= 1'b1;  // nothing was written
            len_q <= '0;
            state <= WAITSLOT;
          end else begin
            g_addr <= req.addr;
            if (is_ctrl) begin
              g_data <= !ctrl_s[roffs[0]];
              ctrl_e[roffs[0]] <= 1'b1; ctrl_s[roffs[0]] <= 1'b0;
            end else begin
              g_data <= !ovf_s[r_ovf];
              ovf_e[r_ovf] <= 1'b1; ovf_s[r_ovf] <= 1'b0;
            end
            state <= GRANT;
          end
        end
        GRANT:    if (rsp_ready) state <= IDLE;
        WAITSLOT: if (used < (SW+1)'(SLOTS)) state <= SINV;
        SINV:     if (fetch_done) state <= DOORBELL;
        DOORBELL: if (rsp_ready) begin
          ctrl_e[cur] <= 1'b1;
          ctrl_s[cur] <= 1'b0;
          cur         <= ~cur;
          slot_q      <= (slot_q == SW'(SLOTS - 1)) ? '0 : slot_q + 1'b1;
          state       <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp.addr));

  logic unused;
  assign unused = ^{d_full, d_count};
endmodule
