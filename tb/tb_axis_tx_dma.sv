// tb_axis_tx_dma: preloads slot images (header + frame bytes from byte 8) in
// a model packet SRAM with a one-cycle registered read, queues frames of
// many lengths, and checks the bytes, tkeep and tlast seen on the stream,
// the slot release, and one beat per cycle (plus two cycles of read-ahead)
// while tready is high; then repeats with random tready.
//
// Frame sizes 64, 1536 and 9600 are the paper's; the slot layout is this
// design's own.
module tb_axis_tx_dma;
  import eci_pio_pkg::*;
  localparam int SLOTS = 4, SLOT_LINES = 76, LINES = SLOTS * SLOT_LINES;
  logic clk = 1'b0, rst_n = 1'b0;
  logic pkt_valid = 1'b0, pkt_ready; logic [1:0] pkt_slot = '0; logic [15:0] pkt_len = '0;
  logic free;
  logic rd_en; logic [$clog2(LINES)-1:0] rd_addr; line_t rd_data;
  logic m_tvalid, m_tready = 1'b1, m_tlast; logic [511:0] m_tdata; logic [63:0] m_tkeep;
  int checks = 0, failures = 0, frees = 0;
  line_t sram [LINES];
  longint unsigned cycle = 0;
  bit rand_ready = 0;

  axis_tx_dma #(.SLOTS(SLOTS), .SLOT_LINES(SLOT_LINES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rd_en) rd_data <= sram[rd_addr];
  always @(posedge clk) if (rst_n && free) frees++;
  always @(posedge clk) m_tready <= rand_ready ? ($urandom_range(2) != 0) : 1'b1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(input int slot, input int len);
    byte unsigned f[];
    byte unsigned got[$];
    longint unsigned t0, t_last;
    int f0;
    bit seen_last;
    f = new[len];
    for (int i = 0; i < len; i++) f[i] = 8'($urandom);
    for (int l = 0; l < SLOT_LINES; l++) sram[slot * SLOT_LINES + l] = '0;
    begin
      nic_hdr_t h;
      h = '0; h.valid = 1'b1; h.len = 16'(len);
      sram[slot * SLOT_LINES][63:0] = 64'(h);
    end
    for (int i = 0; i < len; i++) begin
      int k; k = i + 8;
      sram[slot * SLOT_LINES + k / 128][8*(k % 128) +: 8] = f[i];
    end
    f0 = frees;
    @(negedge clk);
    pkt_valid = 1'b1; pkt_slot = 2'(slot); pkt_len = 16'(len);
    t0 = cycle;
    @(posedge clk); #1;
    pkt_valid = 1'b0;
    seen_last = 0;
    while (!seen_last) begin
      @(posedge clk);
      if (m_tvalid && m_tready) begin
        for (int k = 0; k < 64; k++) if (m_tkeep[k]) got.push_back(m_tdata[8*k +: 8]);
        if (m_tlast) begin seen_last = 1; t_last = cycle; end
      end
    end
    check(got.size() == len, $sformatf("%0d bytes out, expected %0d", got.size(), len));
    for (int i = 0; i < len && i < got.size(); i++)
      if (got[i] != f[i]) begin failures++; $display("FAIL: len %0d byte %0d", len, i); break; end
    checks++;
    if (!rand_ready)
      check(t_last - t0 == longint'((len + 63) / 64 + 1),
            $sformatf("len %0d took %0d cycles", len, t_last - t0));
    repeat (2) @(posedge clk);
    check(frees == f0 + 1, "slot released once");
  endtask

  initial begin
    int lens[] = '{64, 1536, 9600, 1, 55, 56, 57, 63, 65, 119, 120, 121, 128, 129, 1000};
    repeat (3) @(posedge clk); rst_n = 1'b1; @(posedge clk);
    foreach (lens[i]) one(i % SLOTS, lens[i]);
    rand_ready = 1;
    foreach (lens[i]) one((i + 1) % SLOTS, lens[i]);
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
