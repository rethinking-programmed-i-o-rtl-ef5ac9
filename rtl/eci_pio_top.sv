// eci_pio_top: coherent programmed-I/O device.
//
// The device end of a family of message protocols that run over an
// unmodified CPU cache-coherence protocol. The device owns (is home for) a
// few cache lines and, instead of caching them, reacts to the individual
// coherence messages for them: a CPU read of one line is taken as a doorbell
// for data in another, the reply is withheld until the answer exists, and
// lines are handed back in Exclusive so that the next round needs no extra
// messages. Three users of that idea share one message port:
//   region 0  pio_invoke + accel_bram / bloom_accel: synchronous invocation
//             of a function on the device, arguments and results in groups
//             of up to 512 lines (cfg_func_sel: 0 Block RAM write-then-read,
//             1 Bloom-filter hashes)
//   region 1  nic_rx_pio + axis_rx_dma + RX packet SRAM: frames from the MAC
//             to the CPU
//   region 2  nic_tx_pio + axis_tx_dma + TX packet SRAM: frames from the CPU
//             to the MAC
// coh_router steers CPU messages by region and merges device messages.
// Ports: the four message channels of the directory controller (up_*), the
// MAC's 512-bit AXI-Stream pair, configuration inputs and status outputs.
// The directory controller, the ECI link and the Ethernet MAC are outside.
// One clock for everything (the paper runs the invocation logic at about
// 300 MHz and the NIC logic at 250 MHz; a single domain is this design's
// simplification).
module eci_pio_top
  import eci_pio_pkg::*;
#(
  parameter int MAX_LINES  = 512,  // invocation group size, 64 KiB
  parameter int OVF_LINES  = 75,   // NIC overflow lines, 9600-byte frames
  parameter int SLOTS      = 4,    // packet SRAM slots per direction
  parameter int SLOT_LINES = 76,
  parameter int TO_W       = 32
) (
  input  logic clk,
  input  logic rst_n,
  // configuration
  input  logic [$clog2(MAX_LINES):0] cfg_n_lines,
  input  logic                       cfg_grant_excl,
  input  logic                       cfg_func_sel,
  input  logic [TO_W-1:0]            cfg_invoke_timeout,
  input  logic [TO_W-1:0]            cfg_rx_timeout,
  // directory controller message port
  input  logic      up_req_valid,
  output logic      up_req_ready,
  input  cpu_req_t  up_req,
  output logic      up_fwd_valid,
  input  logic      up_fwd_ready,
  output dev_fwd_t  up_fwd,
  input  logic      up_data_valid,
  output logic      up_data_ready,
  input  cpu_data_t up_data,
  output logic      up_rsp_valid,
  input  logic      up_rsp_ready,
  output dev_rsp_t  up_rsp,
  // Ethernet MAC
  input  logic         rx_tvalid,
  output logic         rx_tready,
  input  logic [511:0] rx_tdata,
  input  logic [63:0]  rx_tkeep,
  input  logic         rx_tlast,
  output logic         tx_tvalid,
  input  logic         tx_tready,
  output logic [511:0] tx_tdata,
  output logic [63:0]  tx_tkeep,
  output logic         tx_tlast,
  // status
  output logic         invoke_busy,
  output logic         invoke_nack,
  output logic         rx_nack,
  output logic         tx_slot_stall,
  output logic         rx_overrun,
  output logic [2:0]   proto_err,
  output logic         unmapped
);
  localparam int N     = 3;
  localparam int IDX_W = $clog2(MAX_LINES);
  localparam int LINES = SLOTS * SLOT_LINES;
  localparam int SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  localparam int AW    = $clog2(LINES);

  logic      ep_req_valid  [N];
  logic      ep_req_ready  [N];
  cpu_req_t  ep_req        [N];
  logic      ep_fwd_valid  [N];
  logic      ep_fwd_ready  [N];
  dev_fwd_t  ep_fwd        [N];
  logic      ep_data_valid [N];
  logic      ep_data_ready [N];
  cpu_data_t ep_data       [N];
  logic      ep_rsp_valid  [N];
  logic      ep_rsp_ready  [N];
  dev_rsp_t  ep_rsp        [N];

  coh_router #(.N(N)) u_router (
    .clk, .rst_n,
    .up_req_valid, .up_req_ready, .up_req,
    .up_fwd_valid, .up_fwd_ready, .up_fwd,
    .up_data_valid, .up_data_ready, .up_data,
    .up_rsp_valid, .up_rsp_ready, .up_rsp,
    .ep_req_valid, .ep_req_ready, .ep_req,
    .ep_fwd_valid, .ep_fwd_ready, .ep_fwd,
    .ep_data_valid, .ep_data_ready, .ep_data,
    .ep_rsp_valid, .ep_rsp_ready, .ep_rsp,
    .unmapped
  );

  // ---------------- invocation ----------------
  logic             arg_valid, arg_ready;
  logic [IDX_W-1:0] arg_idx, res_idx;
  line_t            arg_data, res_data;
  logic             fu_start, fu_done, fu_ack;
  logic [IDX_W:0]   fu_n;

  pio_invoke #(.MAX_LINES(MAX_LINES), .REGION(REGION_INVOKE), .TO_W(TO_W)) u_invoke (
    .clk, .rst_n,
    .cfg_n_lines, .cfg_grant_excl, .cfg_timeout(cfg_invoke_timeout),
    .req_valid (ep_req_valid[0]),  .req_ready (ep_req_ready[0]),  .req (ep_req[0]),
    .fwd_valid (ep_fwd_valid[0]),  .fwd_ready (ep_fwd_ready[0]),  .fwd (ep_fwd[0]),
    .data_valid(ep_data_valid[0]), .data_ready(ep_data_ready[0]), .data(ep_data[0]),
    .rsp_valid (ep_rsp_valid[0]),  .rsp_ready (ep_rsp_ready[0]),  .rsp (ep_rsp[0]),
    .arg_valid, .arg_ready, .arg_idx, .arg_data,
    .fu_start, .fu_n, .fu_done, .fu_ack, .res_idx, .res_data,
    .busy(invoke_busy), .nack_pulse(invoke_nack), .proto_err(proto_err[0])
  );

  logic  bram_arg_ready, bram_done, bloom_arg_ready, bloom_done;
  line_t bram_res, bloom_res;

  accel_bram #(.MAX_LINES(MAX_LINES)) u_bram (
    .clk, .rst_n,
    .arg_valid(arg_valid && !cfg_func_sel), .arg_ready(bram_arg_ready),
    .arg_idx, .arg_data,
    .fu_start(fu_start && !cfg_func_sel), .fu_n,
    .fu_done(bram_done), .fu_ack(fu_ack && !cfg_func_sel),
    .res_idx, .res_data(bram_res)
  );

  bloom_accel #(.MAX_LINES(MAX_LINES)) u_bloom (
    .clk, .rst_n,
    .arg_valid(arg_valid && cfg_func_sel), .arg_ready(bloom_arg_ready),
    .arg_idx, .arg_data,
    .fu_start(fu_start && cfg_func_sel), .fu_n,
    .fu_done(bloom_done), .fu_ack(fu_ack && cfg_func_sel),
    .res_idx, .res_data(bloom_res)
  );

  assign arg_ready = cfg_func_sel ? bloom_arg_ready : bram_arg_ready;
  assign fu_done   = cfg_func_sel ? bloom_done      : bram_done;
  assign res_data  = cfg_func_sel ? bloom_res       : bram_res;

  // ---------------- NIC receive ----------------
  logic           rxw_en, rxr_en;
  logic [1:0]     rxw_be;
  logic [AW-1:0]  rxw_addr, rxr_addr;
  line_t          rxw_data, rxr_data;
  logic           rxp_valid, rxp_ready, rx_free;
  logic [SW-1:0]  rxp_slot;
  logic [15:0]    rxp_len;

  axis_rx_dma #(.SLOTS(SLOTS), .SLOT_LINES(SLOT_LINES)) u_rx_dma (
    .clk, .rst_n,
    .s_tvalid(rx_tvalid), .s_tready(rx_tready), .s_tdata(rx_tdata),
    .s_tkeep(rx_tkeep), .s_tlast(rx_tlast),
    .wr_en(rxw_en), .wr_be(rxw_be), .wr_addr(rxw_addr), .wr_data(rxw_data),
    .pkt_valid(rxp_valid), .pkt_ready(rxp_ready), .pkt_slot(rxp_slot), .pkt_len(rxp_len),
    .free(rx_free), .dropped_bytes(rx_overrun)
  );

  pkt_sram #(.LINES(LINES)) u_rx_sram (
    .clk, .wr_en(rxw_en), .wr_be(rxw_be), .wr_addr(rxw_addr), .wr_data(rxw_data),
    .rd_en(rxr_en), .rd_addr(rxr_addr), .rd_data(rxr_data)
  );

  nic_rx_pio #(.REGION(REGION_NIC_RX), .OVF_LINES(OVF_LINES), .SLOTS(SLOTS),
               .SLOT_LINES(SLOT_LINES), .TO_W(TO_W)) u_rx_pio (
    .clk, .rst_n, .cfg_timeout(cfg_rx_timeout),
    .req_valid (ep_req_valid[1]),  .req_ready (ep_req_ready[1]),  .req (ep_req[1]),
    .fwd_valid (ep_fwd_valid[1]),  .fwd_ready (ep_fwd_ready[1]),  .fwd (ep_fwd[1]),
    .data_valid(ep_data_valid[1]), .data_ready(ep_data_ready[1]), .data(ep_data[1]),
    .rsp_valid (ep_rsp_valid[1]),  .rsp_ready (ep_rsp_ready[1]),  .rsp (ep_rsp[1]),
    .pkt_valid(rxp_valid), .pkt_ready(rxp_ready), .pkt_slot(rxp_slot), .pkt_len(rxp_len),
    .free(rx_free),
    .rd_en(rxr_en), .rd_addr(rxr_addr), .rd_data(rxr_data),
    .nack_pulse(rx_nack), .proto_err(proto_err[1])
  );

  // ---------------- NIC transmit ----------------
  logic           txw_en, txr_en;
  logic [1:0]     txw_be;
  logic [AW-1:0]  txw_addr, txr_addr;
  line_t          txw_data, txr_data;
  logic           txp_valid, txp_ready, tx_free;
  logic [SW-1:0]  txp_slot;
  logic [15:0]    txp_len;

  nic_tx_pio #(.REGION(REGION_NIC_TX), .OVF_LINES(OVF_LINES), .SLOTS(SLOTS),
               .SLOT_LINES(SLOT_LINES)) u_tx_pio (
    .clk, .rst_n,
    .req_valid (ep_req_valid[2]),  .req_ready (ep_req_ready[2]),  .req (ep_req[2]),
    .fwd_valid (ep_fwd_valid[2]),  .fwd_ready (ep_fwd_ready[2]),  .fwd (ep_fwd[2]),
    .data_valid(ep_data_valid[2]), .data_ready(ep_data_ready[2]), .data(ep_data[2]),
    .rsp_valid (ep_rsp_valid[2]),  .rsp_ready (ep_rsp_ready[2]),  .rsp (ep_rsp[2]),
    .wr_en(txw_en), .wr_be(txw_be), .wr_addr(txw_addr), .wr_data(txw_data),
    .pkt_valid(txp_valid), .pkt_ready(txp_ready), .pkt_slot(txp_slot), .pkt_len(txp_len),
    .free(tx_free), .slot_stall(tx_slot_stall), .proto_err(proto_err[2])
  );

  pkt_sram #(.LINES(LINES)) u_tx_sram (
    .clk, .wr_en(txw_en), .wr_be(txw_be), .wr_addr(txw_addr), .wr_data(txw_data),
    .rd_en(txr_en), .rd_addr(txr_addr), .rd_data(txr_data)
  );

  axis_tx_dma #(.SLOTS(SLOTS), .SLOT_LINES(SLOT_LINES)) u_tx_dma (
    .clk, .rst_n,
    .pkt_valid(txp_valid), .pkt_ready(txp_ready), .pkt_slot(txp_slot), .pkt_len(txp_len),
    .free(tx_free),
    .rd_en(txr_en), .rd_addr(txr_addr), .rd_data(txr_data),
    .m_tvalid(tx_tvalid), .m_tready(tx_tready), .m_tdata(tx_tdata),
    .m_tkeep(tx_tkeep), .m_tlast(tx_tlast)
  );
endmodule
