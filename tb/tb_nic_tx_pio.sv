// tb_nic_tx_pio: drives the TX endpoint from the CPU-cache model. For each
// frame the CPU acquires the payload control line and the overflow lines it
// needs (checking Exclusive grants, with data only when it had no copy),
// writes the frame, and rings the doorbell with Load Exclusive on the other
// control line. Checks: one SInv per written line, the slot image captured
// from the packet-SRAM writes, the queued length, the doorbell ACK granted
// Exclusive, and that the doorbell is held (slot_stall) while every slot is
// in use and released when one is freed.
//
// Protocol per the paper's write-to-device variant (Load Exclusive, SInv,
// Data, ACK); the doorbell layout is this design's.
module tb_nic_tx_pio;
  import eci_pio_pkg::*;
  localparam int SLOTS = 4, SLOT_LINES = 76, LINES = SLOTS * SLOT_LINES, OVF = 75;
  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_ready, fwd_valid, fwd_ready, data_valid, data_ready, rsp_valid, rsp_ready;
  cpu_req_t req; dev_fwd_t fwd; cpu_data_t data; dev_rsp_t rsp;
  logic wr_en; logic [1:0] wr_be; logic [$clog2(LINES)-1:0] wr_addr; line_t wr_data;
  logic pkt_valid, pkt_ready = 1'b0; logic [1:0] pkt_slot; logic [15:0] pkt_len;
  logic free = 1'b0, slot_stall, proto_err;
  int checks = 0, failures = 0, stall_cycles = 0;
  line_t sram [LINES];

  nic_tx_pio #(.OVF_LINES(OVF), .SLOTS(SLOTS), .SLOT_LINES(SLOT_LINES)) dut (.*);
  coh_cpu_bfm bfm (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (wr_en && wr_be == 2'b11) sram[wr_addr] <= wr_data;
  always @(posedge clk) if (rst_n && slot_stall) stall_cycles++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic laddr_t ctrl(int k);
    return mk_addr(REGION_NIC_TX, OFFS_W'(k));
  endfunction
  function automatic laddr_t ovf(int j);
    return mk_addr(REGION_NIC_TX, OFFS_W'(16'h100 + j));
  endfunction
  function automatic int novf(int len);
    return (len <= 120) ? 0 : (len - 120 + 127) / 128;
  endfunction

  int a = 0;              // doorbell line
  bit held_b = 0;         // CPU already holds the payload line Exclusive
  bit ovf_seen [OVF];     // CPU has a copy of overflow line j
  byte unsigned frames [$][$];

  task automatic acquire(input laddr_t l, input bit had_copy);
    line_t d; grant_e g;
    bfm.issue(LOAD_EXCLUSIVE, l);
    bfm.wait_rsp(l, d, g);
    check(g == GRANT_E, "write permission granted Exclusive");
    check(bfm.last_had_data(l) == !had_copy, "ACK+Data only without a copy");
  endtask

  task automatic send(input int len, input bit wait_ack);
    byte unsigned f[$];
    line_t img [SLOT_LINES];
    nic_hdr_t h;
    int s0;
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    frames.push_back(f);
    foreach (img[l]) img[l] = '0;
    h = '0; h.valid = 1'b1; h.len = 16'(len);
    img[0][63:0] = 64'(h);
    for (int i = 0; i < len; i++) begin
      int k; k = i + 8;
      img[k / 128][8*(k % 128) +: 8] = f[i];
    end
    if (!held_b) acquire(ctrl(1 - a), 1'b0);
    bfm.write_line(ctrl(1 - a), img[0]);
    for (int j = 0; j < novf(len); j++) begin
      acquire(ovf(j), ovf_seen[j]);
      ovf_seen[j] = 1;
      bfm.write_line(ovf(j), img[j + 1]);
    end
    s0 = bfm.n_sinv;
    bfm.issue(LOAD_EXCLUSIVE, ctrl(a));
    if (wait_ack) begin
      line_t d; grant_e g;
      bfm.wait_rsp(ctrl(a), d, g);
      check(g == GRANT_E, "doorbell ACK grants Exclusive");
      check(bfm.n_sinv - s0 == 1 + novf(len),
            $sformatf("%0d SInv, expected %0d", bfm.n_sinv - s0, 1 + novf(len)));
      a = 1 - a;
      held_b = 1;
    end
  endtask

  task automatic drain(input int len);
    byte unsigned f[$];
    int slot;
    nic_hdr_t h;
    f = frames.pop_front();
    while (!pkt_valid) @(posedge clk);
    #1;
    slot = int'(pkt_slot);
    check(pkt_len == 16'(len), $sformatf("queued len %0d, expected %0d", pkt_len, len));
    h = nic_hdr_t'(sram[slot * SLOT_LINES][63:0]);
    check(h.len == 16'(len), "header in slot");
    for (int i = 0; i < len; i++) begin
      int k; k = i + 8;
      if (sram[slot * SLOT_LINES + k / 128][8*(k % 128) +: 8] != f[i]) begin
        failures++; $display("FAIL len %0d byte %0d", len, i); break;
      end
    end
    checks++;
    pkt_ready = 1'b1; @(posedge clk); #1; pkt_ready = 1'b0;
  endtask

  task automatic release_slot();
    free = 1'b1; @(posedge clk); #1; free = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1'b1; repeat (2) @(posedge clk);
    send(64, 1);   drain(64);   release_slot();
    send(1536, 1); drain(1536); release_slot();
    send(9600, 1); drain(9600); release_slot();
    send(200, 1);  drain(200);  release_slot();
    // fill all slots, then one more doorbell must wait for a free slot
    for (int i = 0; i < SLOTS; i++) begin send(100 + 10 * i, 1); drain(100 + 10 * i); end
    send(500, 0);
    repeat (30) @(posedge clk);
    check(slot_stall && !bfm.has_rsp(ctrl(a)), "doorbell held while all slots are in use");
    release_slot();
    begin
      line_t d; grant_e g;
      bfm.wait_rsp(ctrl(a), d, g);
      check(g == GRANT_E, "held doorbell answered after a slot is freed");
      a = 1 - a;
    end
    drain(500);
    check(stall_cycles >= 30, "stall observed");
    check(!proto_err, "no protocol error");
    check(bfm.n_stray == 0, "no downgrade of a line the CPU never held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
