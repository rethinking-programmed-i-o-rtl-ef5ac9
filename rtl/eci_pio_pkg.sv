// eci_pio_pkg: types and constants shared by the coherent-PIO device.
//
// The device sits behind a directory controller that exposes the coherence
// protocol one message at a time. Four channels cross that boundary, each a
// valid/ready handshake carrying one of the structs below:
//   cpu_req  CPU -> device  a request for a device-homed line (Load Shared,
//                           Load Exclusive)
//   dev_fwd  device -> CPU  a downgrade of a line the CPU caches (Inv: to
//                           Invalid, SInv: to Shared)
//   cpu_data CPU -> device  the CPU's reply to a downgrade, with the line
//   dev_rsp  device -> CPU  the reply to a request: ACK, or ACK+Data, with the
//                           state granted (Shared or Exclusive)
// The message names are the ones printed in the protocol diagrams of the
// design (Load Shared, Load Exclusive, Inv, SInv, Data, ACK, ACK+Data).
// Lines are 128 bytes, as on the ThunderX-1 CPU the design was built for.
// The line address width and the region map are this design's own choice.
//
// The 128-byte line and the message names (Load Shared, Load Exclusive, Inv,
// SInv, Data, ACK) follow the paper; the address map, the header layout and the
// not-ready word are this design's own choices.
package eci_pio_pkg;

  localparam int LINE_BYTES = 128;
  localparam int LINE_BITS  = LINE_BYTES * 8;
  localparam int HALF_BITS  = LINE_BITS / 2;       // 512-bit datapath beat
  localparam int ADDR_W     = 20;                  // line address width
  localparam int OFFS_W     = 16;                  // offset inside a region

  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [HALF_BITS-1:0] half_t;
  typedef logic [ADDR_W-1:0]    laddr_t;

  // Region of the device's line address space: laddr[19:16].
  localparam logic [3:0] REGION_INVOKE = 4'd0;
  localparam logic [3:0] REGION_NIC_RX = 4'd1;
  localparam logic [3:0] REGION_NIC_TX = 4'd2;

  typedef enum logic [0:0] {LOAD_SHARED = 1'b0, LOAD_EXCLUSIVE = 1'b1} req_op_e;
  typedef enum logic [0:0] {FWD_INV     = 1'b0, FWD_SINV       = 1'b1} fwd_op_e;
  typedef enum logic [0:0] {GRANT_S     = 1'b0, GRANT_E        = 1'b1} grant_e;

  typedef struct packed {
    req_op_e op;
    laddr_t  addr;
  } cpu_req_t;

  typedef struct packed {
    fwd_op_e op;
    laddr_t  addr;
  } dev_fwd_t;

  typedef struct packed {
    laddr_t addr;
    line_t  data;
  } cpu_data_t;

  typedef struct packed {
    logic   has_data;   // 1: ACK+Data, 0: ACK
    grant_e grant;
    laddr_t addr;
    line_t  data;
  } dev_rsp_t;

  // Word placed in the low 64 bits of a line returned as "not ready yet".
  localparam logic [63:0] NOT_READY_WORD = 64'h5944_4145_5254_4F4E; // "NOTREADY"

  // NIC control-line header (low 64 bits of a control line).
  typedef struct packed {
    logic [46:0] rsvd;
    logic        valid;   // 1: a packet follows, 0: no packet (not ready yet)
    logic [15:0] len;     // packet length in bytes
  } nic_hdr_t;

  function automatic laddr_t mk_addr(logic [3:0] region, logic [OFFS_W-1:0] offs);
    return {region, offs};
  endfunction

endpackage
