// tb_pio_invoke: drives the invocation endpoint from a model of the CPU
// cache (coh_cpu_bfm) and a model function unit that returns the bitwise
// inverse of each argument line after FU_DELAY cycles. Checks, per round:
// one Inv per payload line, result line i = ~argument line i at the
// address the CPU read, the granted state (Exclusive, or Shared in the
// unoptimised mode and then the upgrade path), the swap of the two groups,
// and the cycles from the CPU's read to the first Inv. A slow function unit
// makes the timeout answer "not ready yet"; the retry round must then
// deliver the right result and must not take the retry lines as arguments.
//
// Protocol per the paper's combined variant with two groups of n lines; the
// not-ready word and retry rule are this design's.
module tb_pio_invoke;
  import eci_pio_pkg::*;
  localparam int MAX_LINES = 64;
  localparam int IDX_W = $clog2(MAX_LINES);
  logic clk = 1'b0, rst_n = 1'b0;
  logic [IDX_W:0] cfg_n_lines = '0;
  logic cfg_grant_excl = 1'b1;
  logic [31:0] cfg_timeout = 32'd100000;
  logic req_valid, req_ready, fwd_valid, fwd_ready, data_valid, data_ready, rsp_valid, rsp_ready;
  cpu_req_t req; dev_fwd_t fwd; cpu_data_t data; dev_rsp_t rsp;
  logic arg_valid, arg_ready, fu_start, fu_done, fu_ack, busy, nack_pulse, proto_err;
  logic [IDX_W-1:0] arg_idx, res_idx;
  line_t arg_data, res_data;
  logic [IDX_W:0] fu_n;
  int checks = 0, failures = 0;
  int fu_delay = 5;
  int n_args = 0, n_nack = 0;
  longint unsigned cycle = 0;

  pio_invoke #(.MAX_LINES(MAX_LINES), .REGION(REGION_INVOKE)) dut (.*);
  coh_cpu_bfm bfm (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // model function unit: result = ~argument, fu_delay cycles after start
  line_t fmem [MAX_LINES];
  int    fcnt;
  assign arg_ready = 1'b1;
  assign res_data  = ~fmem[res_idx];
  always @(posedge clk) begin
    if (!rst_n) begin fu_done <= 1'b0; fcnt = -1; end
    else begin
      if (arg_valid) begin fmem[arg_idx] <= arg_data; n_args++; end
      if (fu_start) fcnt = fu_delay;
      else if (fcnt > 0) fcnt--;
      if (fcnt == 0) begin fu_done <= 1'b1; fcnt = -1; end
      if (fu_ack) fu_done <= 1'b0;
      if (nack_pulse) n_nack++;
    end
  end

  longint unsigned t_first_fwd;
  bit seen_fwd;
  always @(posedge clk) if (fwd_valid && !seen_fwd) begin seen_fwd = 1; t_first_fwd = cycle; end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic laddr_t la(bit grp, int idx);
    return mk_addr(REGION_INVOKE, OFFS_W'({grp, IDX_W'(idx)}));
  endfunction

  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < 32; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction

  bit p = 1'b0;   // payload group as the CPU sees it

  // one invocation of n lines; expect_nack: the device will time out
  task automatic invoke(input int n, input bit grant_excl, input bit expect_nack,
                        input bit retry, ref line_t args[MAX_LINES]);
    int order[MAX_LINES];
    int inv0, args0;
    longint unsigned t_req;
    inv0 = bfm.n_inv; args0 = n_args;
    cfg_n_lines = (IDX_W+1)'(n);
    cfg_grant_excl = grant_excl;
    // the CPU must own a line before writing it (first use, or a larger group)
    for (int i = 0; i < n; i++) if (!bfm.holds(la(p, i))) begin
      line_t d0; grant_e g0;
      bfm.issue(LOAD_EXCLUSIVE, la(p, i));
      bfm.wait_rsp(la(p, i), d0, g0);
    end
    if (!retry) begin
      for (int i = 0; i < n; i++) begin
        args[i] = rnd_line();
        bfm.write_line(la(p, i), args[i]);
      end
    end else begin
      for (int i = 0; i < n; i++) bfm.write_line(la(p, i), '1);
    end
    for (int i = 0; i < n; i++) order[i] = i;
    for (int i = n - 1; i > 0; i--) begin
      int j, t; j = $urandom_range(i); t = order[i]; order[i] = order[j]; order[j] = t;
    end
    seen_fwd = 0;
    t_req = cycle;
    for (int i = 0; i < n; i++) bfm.issue(LOAD_SHARED, la(!p, order[i]));
    for (int i = 0; i < n; i++) begin
      line_t d; grant_e g;
      bfm.wait_rsp(la(!p, i), d, g);
      if (expect_nack)
        check(d == line_t'(NOT_READY_WORD), $sformatf("line %0d not-ready word", i));
      else
        check(d == ~args[i], $sformatf("result line %0d", i));
      check(g == (grant_excl ? GRANT_E : GRANT_S), $sformatf("grant of line %0d", i));
    end
    // first Inv within 3 cycles of the first request being taken
    check(seen_fwd && (t_first_fwd - t_req) <= 4, $sformatf("Inv %0d cycles after request",
          t_first_fwd - t_req));
    while (busy) @(posedge clk);
    check(bfm.n_inv - inv0 == n, $sformatf("%0d Inv for %0d lines", bfm.n_inv - inv0, n));
    check((n_args - args0) == (retry ? 0 : n), $sformatf("%0d arguments taken", n_args - args0));
    p = !p;
    repeat (2) @(posedge clk);
  endtask

  initial begin
    line_t args[MAX_LINES];
    repeat (3) @(posedge clk); rst_n = 1'b1; repeat (2) @(posedge clk);
    // basic single-line protocol, Exclusive return
    invoke(1, 1'b1, 1'b0, 1'b0, args);
    invoke(1, 1'b1, 1'b0, 1'b0, args);
    // groups of lines
    invoke(8, 1'b1, 1'b0, 1'b0, args);
    invoke(MAX_LINES, 1'b1, 1'b0, 1'b0, args);
    // unoptimised: returned Shared; next round needs upgrades
    invoke(4, 1'b0, 1'b0, 1'b0, args);
    begin
      line_t d; grant_e g;
      for (int i = 0; i < 4; i++) begin
        bfm.issue(LOAD_EXCLUSIVE, la(p, i));
        bfm.wait_rsp(la(p, i), d, g);
        check(g == GRANT_E && !bfm.last_had_data(la(p, i)), "upgrade ACK grants Exclusive");
      end
    end
    invoke(4, 1'b1, 1'b0, 1'b0, args);
    // timeout: slow function unit, then a retry round
    fu_delay = 400; cfg_timeout = 32'd50;
    invoke(3, 1'b1, 1'b1, 1'b0, args);
    check(n_nack == 1, "one timeout");
    cfg_timeout = 32'd100000;
    invoke(3, 1'b1, 1'b0, 1'b1, args);
    fu_delay = 5;
    invoke(2, 1'b1, 1'b0, 1'b0, args);
    check(!proto_err, "no protocol error");
    check(bfm.n_stray == 0, "no downgrade of a line the CPU never held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired act=%0d inv=%0d dat=%0d req=%0d rsp=%0d n=%0d rr=%0d pe=%0d", dut.active, dut.inv_cnt, dut.dat_cnt, dut.req_cnt, dut.rsp_cnt, dut.n_round, dut.res_ready, dut.pend_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
