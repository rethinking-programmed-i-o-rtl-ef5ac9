// tb_nic_rx_pio: drives the RX endpoint from the CPU-cache model with frames
// queued in a model packet SRAM (one-cycle registered read). Checks: the
// control-line read is held until a frame is queued and then returns the
// header and first 120 bytes; overflow line j returns frame bytes from
// 120+128j; the next control read invalidates the other control line and
// every overflow line the CPU read, and only then releases the old slot;
// with no frame the timeout answers with an invalid header; a frame already
// queued is delivered a fixed few cycles after the request.
//
// Protocol per the paper's read-from-device variant with overflow lines; line
// layout and timeout answer are this design's.
module tb_nic_rx_pio;
  import eci_pio_pkg::*;
  localparam int SLOTS = 4, SLOT_LINES = 76, LINES = SLOTS * SLOT_LINES, OVF = 75;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] cfg_timeout = 32'd100000;
  logic req_valid, req_ready, fwd_valid, fwd_ready, data_valid, data_ready, rsp_valid, rsp_ready;
  cpu_req_t req; dev_fwd_t fwd; cpu_data_t data; dev_rsp_t rsp;
  logic pkt_valid = 1'b0, pkt_ready; logic [1:0] pkt_slot = '0; logic [15:0] pkt_len = '0;
  logic free, rd_en; logic [$clog2(LINES)-1:0] rd_addr; line_t rd_data;
  logic nack_pulse, proto_err;
  int checks = 0, failures = 0, frees = 0, nacks = 0;
  line_t sram [LINES];
  longint unsigned cycle = 0;

  nic_rx_pio #(.OVF_LINES(OVF), .SLOTS(SLOTS), .SLOT_LINES(SLOT_LINES)) dut (.*);
  coh_cpu_bfm bfm (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rd_en) rd_data <= sram[rd_addr];
  always @(posedge clk) if (rst_n && free) frees++;
  always @(posedge clk) if (rst_n && nack_pulse) nacks++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic laddr_t ctrl(int k);
    return mk_addr(REGION_NIC_RX, OFFS_W'(k));
  endfunction
  function automatic laddr_t ovf(int j);
    return mk_addr(REGION_NIC_RX, OFFS_W'(16'h100 + j));
  endfunction

  byte unsigned frame [];
  task automatic make_frame(input int slot, input int len);
    nic_hdr_t h;
    frame = new[len];
    for (int i = 0; i < len; i++) frame[i] = 8'($urandom);
    for (int l = 0; l < SLOT_LINES; l++) sram[slot * SLOT_LINES + l] = '0;
    h = '0; h.valid = 1'b1; h.len = 16'(len);
    sram[slot * SLOT_LINES][63:0] = 64'(h);
    for (int i = 0; i < len; i++) begin
      int k; k = i + 8;
      sram[slot * SLOT_LINES + k / 128][8*(k % 128) +: 8] = frame[i];
    end
  endtask

  task automatic offer(input int slot, input int len);
    @(negedge clk);
    pkt_valid = 1'b1; pkt_slot = 2'(slot); pkt_len = 16'(len);
    do @(posedge clk); while (!pkt_ready);
    #1 pkt_valid = 1'b0;
  endtask

  int cur = 0;
  int inv0 = 0;
  task automatic ask();
    inv0 = bfm.n_inv;
    bfm.issue(LOAD_SHARED, ctrl(cur));
  endtask
  // CPU reads control line `cur` and then the overflow lines of the frame
  task automatic receive(input int len, input bit expect_frame, input int inv_expected,
                         input int frees_expected);
    line_t d; grant_e g;
    nic_hdr_t h;
    bfm.wait_rsp(ctrl(cur), d, g);
    h = nic_hdr_t'(d[63:0]);
    check(g == GRANT_S, "control line granted Shared");
    check(bfm.n_inv - inv0 == inv_expected,
          $sformatf("%0d Inv, expected %0d", bfm.n_inv - inv0, inv_expected));
    check(frees == frees_expected, $sformatf("%0d slots released, expected %0d", frees, frees_expected));
    if (!expect_frame) begin
      check(!h.valid, "timeout answer carries an invalid header");
    end else begin
      check(h.valid && h.len == 16'(len), $sformatf("header len %0d", h.len));
      for (int i = 0; i < len && i < 120; i++)
        if (d[64 + 8*i +: 8] != frame[i]) begin failures++; $display("FAIL ctrl byte %0d", i); break; end
      checks++;
      for (int j = 0; 120 + 128 * j < len; j++) begin
        bfm.issue(LOAD_SHARED, ovf(j));
        bfm.wait_rsp(ovf(j), d, g);
        for (int b = 0; b < 128 && 120 + 128 * j + b < len; b++)
          if (d[8*b +: 8] != frame[120 + 128 * j + b]) begin
            failures++; $display("FAIL ovf %0d byte %0d", j, b); break;
          end
        checks++;
      end
    end
    cur = 1 - cur;
  endtask

  function automatic int novf(int len);
    return (len <= 120) ? 0 : (len - 120 + 127) / 128;
  endfunction

  initial begin
    longint unsigned t0;
    repeat (3) @(posedge clk); rst_n = 1'b1; repeat (2) @(posedge clk);
    // 1: CPU waits first, frame arrives later (the CPU is stalled meanwhile)
    make_frame(0, 64);
    ask();
    repeat (20) @(posedge clk);
    check(!bfm.has_rsp(ctrl(cur)), "control read held while no frame");
    offer(0, 64);
    receive(64, 1, 0, 0);
    // 2: 1536-byte frame; the previous control line is invalidated, the
    //    first slot released
    make_frame(1, 1536);
    ask();
    offer(1, 1536);
    receive(1536, 1, 1, 1);
    // 3: jumbo frame; Inv for control line + 12 overflow lines read before
    make_frame(2, 9600);
    fork offer(2, 9600); join_none
    repeat (5) @(posedge clk);
    t0 = cycle;
    ask();
    while (!bfm.has_rsp(ctrl(cur))) @(posedge clk);
    check(cycle - t0 < 40, $sformatf("queued frame answered after %0d cycles", cycle - t0));
    receive(9600, 1, 1 + novf(1536), 2);
    // 4: timeout with no frame
    cfg_timeout = 32'd30;
    ask();
    receive(0, 0, 1 + novf(9600), 3);
    check(nacks == 1, "one timeout");
    cfg_timeout = 32'd100000;
    // 5: normal frame after the timeout round
    make_frame(3, 300);
    ask();
    offer(3, 300);
    receive(300, 1, 1, 3);
    check(!proto_err, "no protocol error");
    check(bfm.n_stray == 0, "no downgrade of a line the CPU never held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
