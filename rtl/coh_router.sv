// coh_router: connects the one message port of the directory controller to
// the device's protocol endpoints.
//
// CPU-to-device messages (requests and Data replies) are steered by the
// region field of the line address, laddr[19:16], to endpoint REGION_INVOKE
// (0), REGION_NIC_RX (1) or REGION_NIC_TX (2); a message for an unmapped
// region is dropped and flagged on `unmapped`. Device-to-CPU messages
// (Inv/SInv and ACK/ACK+Data) from the endpoints are merged by two
// round-robin arbiters; a grant is held until the message is taken, so a
// stalled channel never sees its message change. Purely combinational steering;
// the arbiter pointers are the only state.
// The paper does not describe this glue; it is this design's own.
module coh_router
  import eci_pio_pkg::*;
#(
  parameter int N = 3
) (
  input  logic clk,
  input  logic rst_n,
  // directory-controller side
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
  // endpoint side, index = region
  output logic      ep_req_valid  [N],
  input  logic      ep_req_ready  [N],
  output cpu_req_t  ep_req        [N],
  input  logic      ep_fwd_valid  [N],
  output logic      ep_fwd_ready  [N],
  input  dev_fwd_t  ep_fwd        [N],
  output logic      ep_data_valid [N],
  input  logic      ep_data_ready [N],
  output cpu_data_t ep_data       [N],
  input  logic      ep_rsp_valid  [N],
  output logic      ep_rsp_ready  [N],
  input  dev_rsp_t  ep_rsp        [N],
  output logic      unmapped
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;

  logic [3:0] req_reg, data_reg;
  assign req_reg  = up_req.addr[ADDR_W-1 -: 4];
  assign data_reg = up_data.addr[ADDR_W-1 -: 4];

  always_comb begin
    up_req_ready  = 1'b0;
    up_data_ready = 1'b0;
    unmapped      = 1'b0;
    for (int i = 0; i < N; i++) begin
      ep_req[i]        = up_req;
      ep_data[i]       = up_data;
      ep_req_valid[i]  = up_req_valid  && (req_reg  == 4'(i));
      ep_data_valid[i] = up_data_valid && (data_reg == 4'(i));
      if (req_reg  == 4'(i)) up_req_ready  = ep_req_ready[i];
      if (data_reg == 4'(i)) up_data_ready = ep_data_ready[i];
    end
    if (up_req_valid && req_reg >= 4'(N)) begin
      up_req_ready = 1'b1;
      unmapped     = 1'b1;
    end
    if (up_data_valid && data_reg >= 4'(N)) begin
      up_data_ready = 1'b1;
      unmapped      = 1'b1;
    end
  end

  // round-robin merge of the device-to-CPU channels
  logic [IW-1:0] fwd_sel, rsp_sel, fwd_last, rsp_last;
  logic          fwd_lock, rsp_lock;
  logic [IW-1:0] fwd_pick, rsp_pick;
  logic          fwd_any,  rsp_any;

  always_comb begin
    fwd_any = 1'b0; fwd_pick = '0;
    rsp_any = 1'b0; rsp_pick = '0;
    for (int k = N; k >= 1; k--) begin
      if (ep_fwd_valid[(int'(fwd_last) + k) % N]) begin
        fwd_any = 1'b1; fwd_pick = IW'((int'(fwd_last) + k) % N);
      end
      if (ep_rsp_valid[(int'(rsp_last) + k) % N]) begin
        rsp_any = 1'b1; rsp_pick = IW'((int'(rsp_last) + k) % N);
      end
    end
  end
  assign fwd_sel = fwd_lock ? fwd_last : fwd_pick;
  assign rsp_sel = rsp_lock ? rsp_last : rsp_pick;

  assign up_fwd_valid = fwd_lock || fwd_any;
  assign up_fwd       = ep_fwd[fwd_sel];
  assign up_rsp_valid = rsp_lock || rsp_any;
  assign up_rsp       = ep_rsp[rsp_sel];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      ep_fwd_ready[i] = up_fwd_valid && up_fwd_ready && (fwd_sel == IW'(i));
      ep_rsp_ready[i] = up_rsp_valid && up_rsp_ready && (rsp_sel == IW'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd_last <= IW'(N - 1); rsp_last <= IW'(N - 1);
      fwd_lock <= 1'b0;       rsp_lock <= 1'b0;
    end else begin
      if (up_fwd_valid) begin
        fwd_last <= fwd_sel;
        fwd_lock <= !up_fwd_ready;
      end
      if (up_rsp_valid) begin
        rsp_last <= rsp_sel;
        rsp_lock <= !up_rsp_ready;
      end
    end
  end
endmodule
