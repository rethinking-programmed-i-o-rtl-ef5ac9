// nic_rx_pio: receive side of the coherent-PIO NIC interface.
//
// Frames reach the CPU through two control lines, used alternately, and
// OVF_LINES overflow lines, all homed at the device (the read-from-device
// protocol with overflow lines). Control line A is the one the CPU reads
// next; B is the one it read last. A round:
//   1. The CPU issues Load Shared on A. The device holds the request back.
//   2. The device sends Inv for B and for every overflow line the CPU holds
//      (its directory bits say which), all at once, and counts the replies.
//      The CPU asking for A means it is finished with the previous frame,
//      whose slot is released once all replies are in.
//   3. When a frame is queued, the device answers A with ACK+Data, granted
//      Shared: the control line is slot line 0, i.e. the 8-byte header
//      (valid, len) followed by frame bytes 0..119. If no frame arrives
//      before the timeout, A is answered with a header whose valid bit is 0
//      ("not ready yet"); the CPU then reads the other control line.
//   4. A and B swap.
// Between rounds the CPU reads overflow line j (Load Shared) and gets slot
// line j+1 (frame bytes 120+128j ..) at once, granted Shared.
// Address offsets inside the region: 0x000 and 0x001 control lines, 0x100+j
// overflow line j. Packet SRAM reads are registered (one cycle).
// Follows the paper: the load-shared / Inv / ACK+Data sequence, overflow
// lines invalidated in parallel with the control line, the device directory
// tracking the CPU's copies, the timeout answer. This design's own: the
// header, the address map, slot release on the next control read.
module nic_rx_pio
  import eci_pio_pkg::*;
#(
  parameter logic [3:0] REGION     = REGION_NIC_RX,
  parameter int         OVF_LINES  = 75,   // ceil((9600 + 8 - 128) / 128)
  parameter int         SLOTS      = 4,
  parameter int         SLOT_LINES = 76,
  parameter int         TO_W       = 32,
  localparam int        LINES      = SLOTS * SLOT_LINES,
  localparam int        SW         = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [TO_W-1:0] cfg_timeout,
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
  // frames from the RX data mover
  input  logic                     pkt_valid,
  output logic                     pkt_ready,
  input  logic [SW-1:0]            pkt_slot,
  input  logic [15:0]              pkt_len,
  output logic                     free,
  // packet SRAM read port
  output logic                     rd_en,
  output logic [$clog2(LINES)-1:0] rd_addr,
  input  line_t                    rd_data,
  // status
  output logic                     nack_pulse,
  output logic                     proto_err
);
  localparam logic [OFFS_W-1:0] OVF_BASE = 16'h0100;
  localparam int OW = $clog2(OVF_LINES);
  typedef enum logic [2:0] {IDLE, INV, WAITPKT, RDCTRL, RSP, NACK} state_e;
  typedef enum logic [1:0] {OV_IDLE, OV_RD, OV_RSP} ov_e;

  state_e state;
  ov_e    ov;
  logic   cur;                          // control line A
  logic   other;                        // control line B
  assign  other = ~cur;
  logic [1:0]           ctrl_has;       // CPU holds control line k (Shared)
  logic [OVF_LINES-1:0] ovf_has;        // CPU holds overflow line j
  logic [7:0]           outstanding;    // Inv sent, Data not yet back
  logic                 have_slot;      // a frame has been handed to the CPU
  logic [SW-1:0]        slot_q;
  logic [OW-1:0]        ov_idx;

  // request decode
  logic [OFFS_W-1:0] roffs;
  logic is_ctrl, is_ovf;
  logic [OW-1:0] r_ovf;
  assign roffs   = req.addr[OFFS_W-1:0];
  assign is_ctrl = (roffs[OFFS_W-1:1] == '0);
  assign is_ovf  = (roffs >= OVF_BASE) && (roffs < OVF_BASE + OFFS_W'(OVF_LINES));
  assign r_ovf   = OW'(roffs - OVF_BASE);

  logic take_ctrl, take_ovf;
  assign take_ctrl = req_valid && is_ctrl && (roffs[0] == cur) &&
                     (req.op == LOAD_SHARED) && (state == IDLE) && (ov == OV_IDLE);
  assign take_ovf  = req_valid && is_ovf && have_slot && (ov == OV_IDLE) &&
                     ((state == IDLE) || (state == INV));
  assign req_ready = take_ctrl || take_ovf;

  // next line to invalidate
  logic inv_b;
  logic inv_any;
  logic [OW-1:0] inv_j;
  always_comb begin
    inv_b   = ctrl_has[~cur];
    inv_any = 1'b0;
    inv_j   = '0;
    for (int j = OVF_LINES - 1; j >= 0; j--) begin
      if (ovf_has[j]) begin inv_any = 1'b1; inv_j = OW'(j); end
    end
  end
  assign fwd_valid = (state == INV) && (inv_b || inv_any);
  assign fwd.op    = FWD_INV;
  assign fwd.addr  = inv_b ? mk_addr(REGION, OFFS_W'(other))
                           : mk_addr(REGION, OVF_BASE + OFFS_W'(inv_j));
  assign data_ready = 1'b1;

  logic inv_done;
  assign inv_done = (state == INV) && !inv_b && !inv_any && (outstanding == '0) &&
                    (ov == OV_IDLE) && !(fwd_valid && fwd_ready);

  // timeout while waiting for a frame
  logic to_fire, to_fired;
  nack_timer #(.CNT_W(TO_W)) u_timer (
    .clk, .rst_n,
    .run  (state == WAITPKT && !pkt_valid),
    .clear(state != WAITPKT),
    .limit(cfg_timeout),
    .fire (to_fire),
    .fired(to_fired)
  );
  assign nack_pulse = to_fire;

  assign pkt_ready = (state == WAITPKT);

  // SRAM read port: control line or overflow line
  always_comb begin
    rd_en   = 1'b0;
    rd_addr = ($clog2(LINES))'(slot_q * SLOT_LINES);
    if (state == WAITPKT && pkt_valid) begin
      rd_en   = 1'b1;
      rd_addr = ($clog2(LINES))'(pkt_slot * SLOT_LINES);
    end else if (take_ovf) begin
      rd_en   = 1'b1;
      rd_addr = ($clog2(LINES))'(slot_q * SLOT_LINES + 32'(r_ovf) + 1);
    end
  end

  nic_hdr_t nohdr;
  assign nohdr = '{rsvd: '0, valid: 1'b0, len: '0};
  always_comb begin
    rsp_valid = 1'b0;
    rsp       = '0;
    rsp.has_data = 1'b1;
    rsp.grant    = GRANT_S;
    if (state == RSP) begin
      rsp_valid = 1'b1;
      rsp.addr  = mk_addr(REGION, OFFS_W'(cur));
      rsp.data  = rd_data;
    end else if (state == NACK) begin
      rsp_valid = 1'b1;
      rsp.addr  = mk_addr(REGION, OFFS_W'(cur));
      rsp.data  = line_t'(64'(nohdr));
    end else if (ov == OV_RSP) begin
      rsp_valid = 1'b1;
      rsp.addr  = mk_addr(REGION, OVF_BASE + OFFS_W'(ov_idx));
      rsp.data  = rd_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; ov <= OV_IDLE; cur <= 1'b0; ctrl_has <= '0; ovf_has <= '0;
      outstanding <= '0; have_slot <= 1'b0; slot_q <= '0; ov_idx <= '0;
      free <= 1'b0; proto_err <= 1'b0;
    end else begin
      free <= 1'b0;
      // Inv bookkeeping
      case ({fwd_valid && fwd_ready, data_valid})
        2'b10:   outstanding <= outstanding + 1'b1;
        2'b01:   outstanding <= outstanding - 1'b1;
        default: ;
      endcase
      if (fwd_valid && fwd_ready) begin
        if (inv_b) ctrl_has[~cur] <= 1'b0;
        else       ovf_has[inv_j] <= 1'b0;
      end
      if (data_valid && outstanding == '0 && !(fwd_valid && fwd_ready)) proto_err <= 1'b1;
      // overflow reads
      case (ov)
        OV_IDLE: if (take_ovf) begin ov <= OV_RD; ov_idx <= r_ovf; end
        OV_RD:   ov <= OV_RSP;
        OV_RSP:  if (rsp_ready) begin ov <= OV_IDLE; ovf_has[ov_idx] <= 1'b1; end
        default: ov <= OV_IDLE;
      endcase
      // control rounds
      case (state)
        IDLE:    if (take_ctrl) state <= INV;
        INV:     if (inv_done) begin
                   if (have_slot) free <= 1'b1;
                   have_slot <= 1'b0;
                   state     <= WAITPKT;
                 end
        WAITPKT: if (pkt_valid) begin
                   slot_q <= pkt_slot;
                   state  <= RDCTRL;
                 end else if (to_fire) begin
                   state  <= NACK;
                 end
        RDCTRL:  state <= RSP;
        RSP:     if (rsp_ready) begin
                   ctrl_has[cur] <= 1'b1;
                   have_slot     <= 1'b1;
                   cur           <= ~cur;
                   state         <= IDLE;
                 end
        NACK:    if (rsp_ready) begin
                   ctrl_has[cur] <= 1'b1;
                   cur           <= ~cur;
                   state         <= IDLE;
                 end
        default: state <= IDLE;
      endcase
      if (req_valid && !req_ready && state == IDLE && ov == OV_IDLE && !is_ovf)
        proto_err <= 1'b1;
    end
  end

  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid);

  logic unused;
  assign unused = ^{to_fired, pkt_len, data.data, data.addr};
endmodule
