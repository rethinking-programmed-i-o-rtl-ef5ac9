// tb_eci_pio_top: end-to-end test of the coherent-PIO device at its default
// sizes, with a model of the CPU cache on the message port and a model MAC
// on the two AXI-Streams. It runs:
//   - invocations through the Block-RAM accelerator of every size from 1
//     line to 512 lines (64 KiB each way), Exclusive and Shared return
//     (with upgrades)
//   - invocations through the Bloom-filter hash unit, batches of 1 to 64
//     elements, checked against a byte-serial reference, including one
//     that times out ("not ready yet") and is completed by a retry round
//   - frames 64, 1536 and 9600 bytes from the MAC to the CPU, plus one
//     control read that times out with no frame
//   - frames 64, 1536 and 9600 bytes from the CPU to the MAC, and a burst
//     that fills every TX slot so that a doorbell stalls
// Each mechanism is counted, and one that never happened counts a failure.
//
// Sizes (64 KiB invocations, 64/1536/9600-byte frames) are the paper's; the
// model CPU and MAC are this design's.
module tb_eci_pio_top;
  import eci_pio_pkg::*;
  localparam int MAX_LINES = 512, SLOTS = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [9:0] cfg_n_lines = 10'd1;
  logic cfg_grant_excl = 1'b1, cfg_func_sel = 1'b0;
  logic [31:0] cfg_invoke_timeout = 32'd1000000, cfg_rx_timeout = 32'd1000000;
  logic up_req_valid, up_req_ready, up_fwd_valid, up_fwd_ready, up_data_valid, up_data_ready;
  logic up_rsp_valid, up_rsp_ready;
  cpu_req_t up_req; dev_fwd_t up_fwd; cpu_data_t up_data; dev_rsp_t up_rsp;
  logic rx_tvalid = 1'b0, rx_tready, rx_tlast = 1'b0;
  logic [511:0] rx_tdata = '0; logic [63:0] rx_tkeep = '0;
  logic tx_tvalid, tx_tready = 1'b1, tx_tlast; logic [511:0] tx_tdata; logic [63:0] tx_tkeep;
  logic invoke_busy, invoke_nack, rx_nack, tx_slot_stall, rx_overrun, unmapped;
  logic [2:0] proto_err;
  int checks = 0, failures = 0;
  int n_invoke_nack = 0, n_rx_nack = 0, n_tx_stall = 0, n_upgrade = 0, n_bloom = 0;
  int n_bram = 0, n_rx_frames = 0, n_tx_frames = 0, n_shared_return = 0, n_rx_backpressure = 0;

  eci_pio_top dut (.*);

  coh_cpu_bfm bfm (
    .clk, .rst_n,
    .req_valid(up_req_valid), .req_ready(up_req_ready), .req(up_req),
    .fwd_valid(up_fwd_valid), .fwd_ready(up_fwd_ready), .fwd(up_fwd),
    .data_valid(up_data_valid), .data_ready(up_data_ready), .data(up_data),
    .rsp_valid(up_rsp_valid), .rsp_ready(up_rsp_ready), .rsp(up_rsp)
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (invoke_nack) n_invoke_nack++;
    if (rx_nack) n_rx_nack++;
    if (tx_slot_stall) n_tx_stall++;
    if (rx_tvalid && !rx_tready) n_rx_backpressure++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < 32; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction

  // ---------------- invocation ----------------
  bit p = 1'b0;
  function automatic laddr_t inv_addr(bit grp, int idx);
    return mk_addr(REGION_INVOKE, OFFS_W'({grp, 9'(idx)}));
  endfunction

  function automatic logic [63:0] ref_hash(line_t e, int j);
    logic [63:0] h;
    h = (64'h9E3779B97F4A7C15 * 64'(j + 1)) ^ 64'hC2B2AE3D27D4EB4F;
    for (int b = 0; b < 128; b++) h = h ^ ((h << 5) + (h >> 2) + {56'd0, e[8*b +: 8]});
    return h;
  endfunction

  function automatic line_t expect_line(line_t arg, bit bloom);
    line_t r;
    if (!bloom) return arg;
    r = '0;
    for (int j = 0; j < 8; j++) r[64*j +: 64] = ref_hash(arg, j);
    return r;
  endfunction

  line_t args [MAX_LINES];

  task automatic invoke(input int n, input bit excl, input bit bloom,
                        input bit expect_nack, input bit retry);
    int inv0;
    cfg_n_lines = 10'(n); cfg_grant_excl = excl; cfg_func_sel = bloom;
    // the CPU must own a line before writing it (first use, or a larger group)
    for (int i = 0; i < n; i++) if (!bfm.holds(inv_addr(p, i))) begin
      line_t d0; grant_e g0;
      bfm.issue(LOAD_EXCLUSIVE, inv_addr(p, i));
      bfm.wait_rsp(inv_addr(p, i), d0, g0);
    end
    if (!retry) for (int i = 0; i < n; i++) begin
      args[i] = rnd_line();
      bfm.write_line(inv_addr(p, i), args[i]);
    end
    inv0 = bfm.n_inv;
    for (int i = 0; i < n; i++) bfm.issue(LOAD_SHARED, inv_addr(!p, i));
    for (int i = 0; i < n; i++) begin
      line_t d; grant_e g;
      bfm.wait_rsp(inv_addr(!p, i), d, g);
      if (expect_nack) check(d == line_t'(NOT_READY_WORD), "not-ready answer");
      else if (d != expect_line(args[i], bloom)) begin
        failures++; $display("FAIL: invoke n=%0d bloom=%0d line %0d", n, bloom, i);
      end
      checks++;
      check(g == (excl ? GRANT_E : GRANT_S), "grant");
    end
    // two round trips per line: one Inv of each payload line, nothing more
    check(bfm.n_inv - inv0 == n, $sformatf("%0d Inv for %0d lines", bfm.n_inv - inv0, n));
    if (!excl) n_shared_return++;
    if (!expect_nack) begin if (bloom) n_bloom++; else n_bram++; end
    while (invoke_busy) @(posedge clk);
    p = !p;
    if (!excl) begin
      // next round the CPU must upgrade its Shared copies before writing
      for (int i = 0; i < n; i++) begin
        line_t d; grant_e g;
        bfm.issue(LOAD_EXCLUSIVE, inv_addr(p, i));
        bfm.wait_rsp(inv_addr(p, i), d, g);
        check(g == GRANT_E, "upgrade");
        n_upgrade++;
      end
    end
  endtask

  // ---------------- NIC ----------------
  function automatic laddr_t nic(logic [3:0] region, int offs);
    return mk_addr(region, OFFS_W'(offs));
  endfunction
  function automatic int novf(int len);
    return (len <= 120) ? 0 : (len - 120 + 127) / 128;
  endfunction

  byte unsigned rx_frames [$][$];
  task automatic mac_send(input int len);
    byte unsigned f[$];
    int beats;
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    rx_frames.push_back(f);
    beats = (len + 63) / 64;
    for (int b = 0; b < beats; b++) begin
      @(negedge clk);
      rx_tvalid = 1'b1; rx_tlast = (b == beats - 1); rx_tkeep = '0; rx_tdata = '0;
      for (int k = 0; k < 64; k++) if (64*b + k < len) begin
        rx_tdata[8*k +: 8] = f[64*b + k]; rx_tkeep[k] = 1'b1;
      end
      do @(posedge clk); while (!rx_tready);
    end
    @(negedge clk);
    rx_tvalid = 1'b0; rx_tlast = 1'b0;
  endtask

  int rx_cur = 0;
  task automatic cpu_receive(input bit expect_frame);
    line_t d; grant_e g;
    nic_hdr_t h;
    byte unsigned f[$];
    bfm.issue(LOAD_SHARED, nic(REGION_NIC_RX, rx_cur));
    bfm.wait_rsp(nic(REGION_NIC_RX, rx_cur), d, g);
    rx_cur = 1 - rx_cur;
    h = nic_hdr_t'(d[63:0]);
    if (!expect_frame) begin
      check(!h.valid, "RX timeout answers with an invalid header");
      return;
    end
    f = rx_frames.pop_front();
    check(h.valid && h.len == 16'(f.size()), $sformatf("RX header len %0d", h.len));
    for (int i = 0; i < f.size() && i < 120; i++)
      if (d[64 + 8*i +: 8] != f[i]) begin failures++; $display("FAIL: RX ctrl byte %0d", i); break; end
    for (int j = 0; j < novf(f.size()); j++) bfm.issue(LOAD_SHARED, nic(REGION_NIC_RX, 256 + j));
    for (int j = 0; j < novf(f.size()); j++) begin
      bfm.wait_rsp(nic(REGION_NIC_RX, 256 + j), d, g);
      for (int b = 0; b < 128 && 120 + 128*j + b < f.size(); b++)
        if (d[8*b +: 8] != f[120 + 128*j + b]) begin
          failures++; $display("FAIL: RX ovf %0d byte %0d", j, b); break;
        end
    end
    checks++;
    n_rx_frames++;
  endtask

  int tx_a = 0;
  bit tx_held = 0;
  bit tx_ovf_copy [75];
  byte unsigned tx_frames [$][$];
  task automatic cpu_send(input int len, input bit wait_ack);
    byte unsigned f[$];
    line_t img [76];
    nic_hdr_t h;
    line_t d; grant_e g;
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    tx_frames.push_back(f);
    foreach (img[l]) img[l] = '0;
    h = '0; h.valid = 1'b1; h.len = 16'(len);
    img[0][63:0] = 64'(h);
    for (int i = 0; i < len; i++) img[(i + 8) / 128][8*((i + 8) % 128) +: 8] = f[i];
    if (!tx_held) begin
      bfm.issue(LOAD_EXCLUSIVE, nic(REGION_NIC_TX, 1 - tx_a));
      bfm.wait_rsp(nic(REGION_NIC_TX, 1 - tx_a), d, g);
      check(g == GRANT_E, "TX payload line Exclusive");
    end
    bfm.write_line(nic(REGION_NIC_TX, 1 - tx_a), img[0]);
    for (int j = 0; j < novf(len); j++) begin
      bfm.issue(LOAD_EXCLUSIVE, nic(REGION_NIC_TX, 256 + j));
      bfm.wait_rsp(nic(REGION_NIC_TX, 256 + j), d, g);
      check(bfm.last_had_data(nic(REGION_NIC_TX, 256 + j)) == !tx_ovf_copy[j], "TX grant data");
      tx_ovf_copy[j] = 1;
      bfm.write_line(nic(REGION_NIC_TX, 256 + j), img[j + 1]);
    end
    bfm.issue(LOAD_EXCLUSIVE, nic(REGION_NIC_TX, tx_a));
    if (wait_ack) tx_doorbell_ack();
  endtask

  task automatic tx_doorbell_ack();
    line_t d; grant_e g;
    bfm.wait_rsp(nic(REGION_NIC_TX, tx_a), d, g);
    check(g == GRANT_E, "TX doorbell ACK");
    tx_a = 1 - tx_a;
    tx_held = 1;
  endtask

  // MAC side: collect frames leaving on the TX stream and compare
  byte unsigned tx_got[$];
  always @(posedge clk) if (rst_n && tx_tvalid && tx_tready) begin
    for (int k = 0; k < 64; k++) if (tx_tkeep[k]) tx_got.push_back(tx_tdata[8*k +: 8]);
    if (tx_tlast) begin
      byte unsigned f[$];
      f = tx_frames.pop_front();
      checks++;
      if (f != tx_got) begin
        failures++; $display("FAIL: TX frame of %0d bytes (got %0d)", f.size(), tx_got.size());
      end
      tx_got = {};
      n_tx_frames++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1'b1; repeat (2) @(posedge clk);
    // invocation, Block RAM
    // every payload size from one line up to 64 KiB, doubling
    for (int n = 1; n <= MAX_LINES; n *= 2) invoke(n, 1, 0, 0, 0);
    invoke(3, 0, 0, 0, 0);
    invoke(1, 1, 0, 0, 0);
    // Bloom filter offload
    // Bloom batches of 128 B to 8 KiB (1 to 64 elements)
    for (int n = 1; n <= 64; n *= 2) invoke(n, 1, 1, 0, 0);
    cfg_invoke_timeout = 32'd20;
    invoke(16, 1, 1, 1, 0);
    cfg_invoke_timeout = 32'd1000000;
    invoke(16, 1, 1, 0, 1);
    // NIC receive
    fork mac_send(64); cpu_receive(1); join
    fork mac_send(1536); cpu_receive(1); join
    fork mac_send(9600); cpu_receive(1); join
    cfg_rx_timeout = 32'd50;
    cpu_receive(0);
    cfg_rx_timeout = 32'd1000000;
    // fill the RX slots from the MAC before the CPU reads: back-pressure
    fork for (int i = 0; i < SLOTS + 1; i++) mac_send(200 + i); join_none
    repeat (300) @(posedge clk);
    for (int i = 0; i < SLOTS + 1; i++) cpu_receive(1);
    // NIC transmit
    cpu_send(64, 1);
    cpu_send(1536, 1);
    cpu_send(9600, 1);
    // MAC stalls: every slot fills and the next doorbell is held
    while (n_tx_frames < 3) @(posedge clk);
    @(negedge clk) tx_tready = 1'b0;
    for (int i = 0; i < SLOTS; i++) cpu_send(300 + i, 1);
    cpu_send(700, 0);
    repeat (50) @(posedge clk);
    @(negedge clk) tx_tready = 1'b1;
    tx_doorbell_ack();
    repeat (500) @(posedge clk);
    check(n_tx_frames == 3 + SLOTS + 1, $sformatf("%0d TX frames", n_tx_frames));
    check(proto_err == '0 && !unmapped && !rx_overrun, "no error flags");
    // every mechanism happened
    check(n_bram > 0,            "Block-RAM invocation");
    check(n_bloom > 0,           "Bloom invocation");
    check(n_shared_return > 0,   "Shared (unoptimised) return");
    check(n_upgrade > 0,         "upgrade after Shared return");
    check(n_invoke_nack > 0,     "invocation timeout");
    check(n_rx_nack > 0,         "RX timeout");
    check(n_rx_backpressure > 0, "RX back-pressure");
    check(n_tx_stall > 0,        "TX doorbell stall");
    check(bfm.n_inv > 0 && bfm.n_sinv > 0, "Inv and SInv");
    $display("mechanisms: bram=%0d bloom=%0d shared=%0d upgrade=%0d invoke_nack=%0d rx_nack=%0d rx_bp=%0d tx_stall=%0d inv=%0d sinv=%0d rx=%0d tx=%0d",
             n_bram, n_bloom, n_shared_return, n_upgrade, n_invoke_nack, n_rx_nack,
             n_rx_backpressure, n_tx_stall, bfm.n_inv, bfm.n_sinv, n_rx_frames, n_tx_frames);
    check(bfm.n_stray == 0, "no downgrade of a line the CPU never held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
