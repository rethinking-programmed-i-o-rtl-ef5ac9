// pio_invoke: device end of the bidirectional ("read and write combined")
// coherent-PIO invocation protocol, extended to groups of n lines.
//
// Two groups of n lines, homed at the device, alternate roles. At rest the
// CPU holds the payload group P in Exclusive (it writes arguments into it,
// E->M silently) and the other group Q is Invalid at the CPU. One invocation:
//   1. The CPU reads (Load Shared / prefetch) the lines of Q. The first such
//      request tells the device that P holds fresh arguments.
//   2. The device holds every Q request back, and sends Inv for all n lines
//      of P at once; each Data reply is handed to the function unit with its
//      line index (arg_*). Replies are counted, never assumed in order.
//   3. When all n arguments are in, fu_start pulses. When the function unit
//      raises fu_done, every held (and every later) Q request is answered with
//      ACK+Data carrying result line idx, granted Exclusive (or Shared when
//      cfg_grant_excl = 0, the unoptimised variant).
//   4. After n answers, n invalidations and n Data replies, P and Q swap.
// With grant Shared the CPU must upgrade a P line before writing it: a Load
// Exclusive to P is answered at once with ACK, granted Exclusive.
// Timeout: while requests are held and no result is ready, nack_timer counts.
// If it fires, all n Q requests are answered with a line whose low word is
// NOT_READY_WORD, the groups swap, and the round after it is a retry: the
// invalidated P lines carry no arguments and are discarded, and the result
// of the pending call is returned when ready.
// Address: laddr = {REGION, offset}; offset bit IDX_W selects the group,
// offset[IDX_W-1:0] the line in the group.
// Follows the paper: the message sequence of the combined protocol, return
// in Exclusive, groups of n lines invalidated in parallel, counting instead of
// ordering, the "not ready yet" reply. This design's own: the address map,
// the retry convention, the not-ready word, the function-unit interface.
module pio_invoke
  import eci_pio_pkg::*;
#(
  parameter int         MAX_LINES = 512,     // 64 KiB per direction
  parameter logic [3:0] REGION    = REGION_INVOKE,
  parameter int         TO_W      = 32
) (
  input  logic clk,
  input  logic rst_n,
  // configuration
  input  logic [$clog2(MAX_LINES):0] cfg_n_lines,   // lines per group, 1..MAX_LINES
  input  logic                       cfg_grant_excl,
  input  logic [TO_W-1:0]            cfg_timeout,
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
  // function unit
  output logic                     arg_valid,
  input  logic                     arg_ready,
  output logic [$clog2(MAX_LINES)-1:0] arg_idx,
  output line_t                    arg_data,
  output logic                     fu_start,
  output logic [$clog2(MAX_LINES):0] fu_n,
  input  logic                     fu_done,
  output logic                     fu_ack,
  output logic [$clog2(MAX_LINES)-1:0] res_idx,
  input  line_t                    res_data,
  // status
  output logic                     busy,
  output logic                     nack_pulse,
  output logic                     proto_err
);
  localparam int IDX_W = $clog2(MAX_LINES);
  localparam int CNT_W = IDX_W + 1;
  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [CNT_W-1:0] cnt_t;

  // ---------------- round state ----------------
  logic p_grp;          // payload group (CPU holds it writable at rest)
  logic active;         // a round has started (first Q request seen)
  logic retry;          // this round delivers a result from an earlier round
  logic nack_mode;      // answering this round with "not ready yet"
  logic started;        // fu_start already issued for the current call
  logic res_ready;      // function unit result available
  cnt_t n_round;        // n latched at round start
  cnt_t inv_cnt, dat_cnt, req_cnt, rsp_cnt;
  logic upg_pend;       // upgrade (Load Exclusive to P) waiting for its ACK
  laddr_t upg_addr;

  // requests held back, by line index
  idx_t pend_head;
  logic pend_empty, pend_full;
  logic [$clog2(MAX_LINES+1)-1:0] pend_count;
  logic pend_push, pend_pop;

  // decode the incoming request
  logic  req_grp;
  idx_t  req_idx;
  logic  req_to_q, req_upg;
  assign req_grp  = req.addr[IDX_W];
  assign req_idx  = req.addr[IDX_W-1:0];
  assign req_to_q = (req_grp != p_grp) && (req.op == LOAD_SHARED);
  assign req_upg  = (req_grp == p_grp) && (req.op == LOAD_EXCLUSIVE) && !active;

  // A Q request is always taken while the round has room; an upgrade waits
  // for the ACK channel to be free.
  assign req_ready = (req_to_q && !pend_full && (!active || req_cnt < n_round)) ||
                     (req_upg && !upg_pend);
  assign pend_push = req_valid && req_ready && req_to_q;

  sync_fifo #(.T(idx_t), .DEPTH(MAX_LINES)) u_pend (
    .clk, .rst_n,
    .wr_en(pend_push), .wr_data(req_idx),
    .rd_en(pend_pop),  .rd_data(pend_head),
    .full(pend_full),  .empty(pend_empty), .count(pend_count)
  );

  // ---------------- invalidations of P ----------------
  logic round_n_ok;
  assign round_n_ok = active;
  assign fwd_valid  = active && (inv_cnt < n_round);
  assign fwd.op     = FWD_INV;
  assign fwd.addr   = mk_addr(REGION, OFFS_W'({p_grp, inv_cnt[IDX_W-1:0]}));

  // Data replies: arguments (normal round) or discarded (retry round).
  logic data_for_p;
  assign data_for_p = data.addr[IDX_W] == p_grp;
  assign arg_valid  = active && data_valid && !retry && data_for_p;
  assign arg_idx    = data.addr[IDX_W-1:0];
  assign arg_data   = data.data;
  assign data_ready = active && (retry ? 1'b1 : arg_ready);
  logic data_take;
  assign data_take  = data_valid && data_ready;

  assign fu_n = n_round;

  // ---------------- responses ----------------
  logic can_answer;
  assign can_answer = active && !pend_empty && (res_ready || nack_mode);
  assign res_idx    = pend_head;
  always_comb begin
    rsp_valid = 1'b0;
    rsp       = '0;
    pend_pop  = 1'b0;
    if (upg_pend) begin
      rsp_valid    = 1'b1;
      rsp.has_data = 1'b0;
      rsp.grant    = GRANT_E;
      rsp.addr     = upg_addr;
      rsp.data     = '0;
    end else if (can_answer) begin
      rsp_valid    = 1'b1;
      rsp.has_data = 1'b1;
      rsp.grant    = cfg_grant_excl ? GRANT_E : GRANT_S;
      rsp.addr     = mk_addr(REGION, OFFS_W'({~p_grp, pend_head}));
      rsp.data     = nack_mode ? line_t'(NOT_READY_WORD) : res_data;
      pend_pop     = rsp_ready;
    end
  end

  // ---------------- timeout ----------------
  logic to_fire, to_fired;
  nack_timer #(.CNT_W(TO_W)) u_timer (
    .clk, .rst_n,
    .run  (active && !pend_empty && !res_ready && !nack_mode),
    .clear(!active),
    .limit(cfg_timeout),
    .fire (to_fire),
    .fired(to_fired)
  );
  assign nack_pulse = to_fire;

  logic round_done;
  assign round_done = active && (rsp_cnt == n_round) && (dat_cnt == n_round) &&
                      (inv_cnt == n_round);

  assign fu_start = active && !retry && !started && (dat_cnt == n_round);
  assign fu_ack   = round_done && !nack_mode;
  assign busy     = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_grp <= 1'b0; active <= 1'b0; retry <= 1'b0; nack_mode <= 1'b0;
      started <= 1'b0; res_ready <= 1'b0; n_round <= '0;
      inv_cnt <= '0; dat_cnt <= '0; req_cnt <= '0; rsp_cnt <= '0;
      upg_pend <= 1'b0; upg_addr <= '0; proto_err <= 1'b0;
    end else begin
      // round start
      if (pend_push && !active) begin
        active  <= 1'b1;
        n_round <= (cfg_n_lines == '0) ? CNT_W'(1) :
                   (cfg_n_lines > CNT_W'(MAX_LINES)) ? CNT_W'(MAX_LINES) : cfg_n_lines;
        req_cnt <= CNT_W'(1);
      end else if (pend_push) begin
        req_cnt <= req_cnt + 1'b1;
      end
      if (fwd_valid && fwd_ready) inv_cnt <= inv_cnt + 1'b1;
      if (active && data_take) begin
        dat_cnt <= dat_cnt + 1'b1;
        if (!data_for_p) proto_err <= 1'b1;
      end
      if (fu_start) started <= 1'b1;
      if (fu_done && started) res_ready <= 1'b1;
      if (to_fire) nack_mode <= 1'b1;
      if (pend_pop) rsp_cnt <= rsp_cnt + 1'b1;
      // upgrade path
      if (req_valid && req_ready && req_upg) begin
        upg_pend <= 1'b1;
        upg_addr <= req.addr;
      end else if (upg_pend && rsp_ready) begin
        upg_pend <= 1'b0;
      end
      if (req_valid && !req_to_q && !req_upg && !active) proto_err <= 1'b1;
      // round end: swap roles
      if (round_done) begin
        active    <= 1'b0;
        p_grp     <= ~p_grp;
        inv_cnt   <= '0; dat_cnt <= '0; req_cnt <= '0; rsp_cnt <= '0;
        retry     <= nack_mode;
        nack_mode <= 1'b0;
        if (!nack_mode) begin
          started   <= 1'b0;
          res_ready <= 1'b0;
        end
      end
    end
  end

  // Rules of the message handshakes.
  a_fwd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    fwd_valid && !fwd_ready |=> fwd_valid && $stable(fwd));
  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp.addr));

  logic unused;
  assign unused = ^{round_n_ok, to_fired, pend_count};
endmodule
