// tb_axis_rx_dma: sends frames of many lengths (1 to 9600 bytes, including
// the 56/57-byte and 120/121-byte edges of the 8-byte shift) from a model
// MAC, captures the packet-SRAM writes in a model array, and checks the slot
// image (header + frame bytes), the queued (slot, len), back-pressure when
// all slots are full, and one beat per cycle while tready is high.
//
// The 9600-byte jumbo size is the paper's; the slot image layout is this
// design's own.
module tb_axis_rx_dma;
  import eci_pio_pkg::*;
  localparam int SLOTS = 4, SLOT_LINES = 76, LINES = SLOTS * SLOT_LINES;
  logic clk = 1'b0, rst_n = 1'b0;
  logic s_tvalid = 1'b0, s_tready, s_tlast = 1'b0;
  logic [511:0] s_tdata = '0;
  logic [63:0] s_tkeep = '0;
  logic wr_en; logic [1:0] wr_be; logic [$clog2(LINES)-1:0] wr_addr; line_t wr_data;
  logic pkt_valid, pkt_ready = 1'b0; logic [1:0] pkt_slot; logic [15:0] pkt_len;
  logic free = 1'b0, dropped_bytes;
  int checks = 0, failures = 0;
  line_t sram [LINES];
  byte unsigned frames [$][$];
  longint unsigned cycle = 0;

  axis_rx_dma #(.SLOTS(SLOTS), .SLOT_LINES(SLOT_LINES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (wr_en) begin
    if (wr_be[0]) sram[wr_addr][511:0]    <= wr_data[511:0];
    if (wr_be[1]) sram[wr_addr][1023:512] <= wr_data[1023:512];
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input int len, output int cycles);
    byte unsigned f[$];
    int beats;
    longint unsigned t0;
    for (int i = 0; i < len; i++) f.push_back(8'($urandom));
    frames.push_back(f);
    beats = (len + 63) / 64;
    t0 = cycle;
    for (int b = 0; b < beats; b++) begin
      s_tvalid = 1'b1;
      s_tlast  = (b == beats - 1);
      s_tkeep  = '0;
      s_tdata  = '0;
      for (int k = 0; k < 64; k++) if (64*b + k < len) begin
        s_tdata[8*k +: 8] = f[64*b + k];
        s_tkeep[k] = 1'b1;
      end
      do @(posedge clk); while (!s_tready);
      #1;
    end
    cycles = int'(cycle - t0);
    s_tvalid = 1'b0; s_tlast = 1'b0;
  endtask

  task automatic check_slot(input int len);
    byte unsigned f[$];
    int slot;
    nic_hdr_t h;
    f = frames.pop_front();
    while (!pkt_valid) @(posedge clk);
    #1;
    slot = int'(pkt_slot);
    check(pkt_len == 16'(len), $sformatf("len %0d, expected %0d", pkt_len, len));
    h = nic_hdr_t'(sram[slot * SLOT_LINES][63:0]);
    check(h.valid && h.len == 16'(len), "header in slot line 0");
    for (int i = 0; i < len && i < 9600; i++) begin
      int k;
      k = i + 8;
      if (sram[slot * SLOT_LINES + k / 128][8*(k % 128) +: 8] !== f[i]) begin
        failures++; $display("FAIL: len %0d byte %0d", len, i); break;
      end
    end
    checks++;
    pkt_ready = 1'b1; @(posedge clk); #1; pkt_ready = 1'b0;
    free = 1'b1; @(posedge clk); #1; free = 1'b0;
  endtask

  initial begin
    int lens[] = '{64, 1536, 9600, 1, 55, 56, 57, 63, 64, 65, 119, 120, 121, 127, 128, 129, 1000, 4097};
    int c;
    repeat (3) @(posedge clk); rst_n = 1'b1; @(posedge clk); #1;
    foreach (lens[i]) begin
      send(lens[i], c);
      check(c == (lens[i] + 63) / 64, $sformatf("%0d beats in %0d cycles", (lens[i] + 63) / 64, c));
      check_slot(lens[i]);
    end
    // fill all slots without releasing: the fifth frame must wait
    for (int i = 0; i < SLOTS; i++) send(100 + i, c);
    repeat (3) @(posedge clk); #1;
    check(!s_tready, "back-pressure with all slots in use");
    fork
      send(200, c);
      begin
        repeat (10) @(posedge clk); #1;
        check(s_tvalid && !s_tready, "fifth frame held");
        for (int i = 0; i < SLOTS; i++) check_slot(100 + i);
      end
    join
    check_slot(200);
    check(!dropped_bytes, "no overrun");
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
