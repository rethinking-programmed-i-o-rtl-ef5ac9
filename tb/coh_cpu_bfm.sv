// coh_cpu_bfm: behavioural model of the CPU side of the coherence message
// port, for testbenches only (the CPU and its caches are not part of the
// design).
//
// It keeps the CPU's copy of every device-homed line it touches (line_mem)
// and answers every Inv / SInv from the device with a Data message carrying
// that copy. Replies go out in a random order and after random delays,
// to exercise the device's order-independence. ACK+Data responses update
// line_mem. Tasks:
//   issue(op, addr)       put one request on the request channel
//   wait_rsp(addr, d, g)  block until the response for addr arrives
//   write_line(addr, d)   model a CPU store into a line it holds
// Counters: n_inv, n_sinv, n_rsp, n_rsp_data, and n_stray for downgrades of
// lines the cache was never granted (always a device bug).
//
// The message set follows the paper's protocol figures; the random order and
// delays of Data replies are added to test that the device counts replies
// instead of relying on their order, which the paper warns about.
module coh_cpu_bfm
  import eci_pio_pkg::*;
#(
  parameter int RAND_READY = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  output logic      req_valid,
  input  logic      req_ready,
  output cpu_req_t  req,
  input  logic      fwd_valid,
  output logic      fwd_ready,
  input  dev_fwd_t  fwd,
  output logic      data_valid,
  input  logic      data_ready,
  output cpu_data_t data,
  input  logic      rsp_valid,
  output logic      rsp_ready,
  input  dev_rsp_t  rsp
);
  line_t  line_mem [laddr_t];
  line_t  rsp_data [laddr_t];
  grant_e rsp_grant[laddr_t];
  bit     rsp_hasd [laddr_t];
  laddr_t inv_q[$];
  bit     held [laddr_t];   // lines this cache holds a copy of
  int n_inv = 0, n_sinv = 0, n_rsp = 0, n_rsp_data = 0;
  int n_stray = 0;   // downgrades of lines this cache was never granted

  initial begin
    req_valid = 1'b0; req = '0; data_valid = 1'b0; data = '0;
    fwd_ready = 1'b0; rsp_ready = 1'b0;
  end

  // downgrade requests from the device
  always @(posedge clk) begin
    if (rst_n && fwd_valid && fwd_ready) begin
      inv_q.push_back(fwd.addr);
      if (fwd.op == FWD_INV) n_inv++; else n_sinv++;
      if (!held.exists(fwd.addr)) n_stray++;
      else if (fwd.op == FWD_INV) held.delete(fwd.addr);
    end
    fwd_ready <= (RAND_READY != 0) ? ($urandom_range(3) != 0) : 1'b1;
  end

  // Data replies, random order and delay
  always @(posedge clk) begin
    if (data_valid && data_ready) data_valid <= 1'b0;
    if (rst_n && (!data_valid || data_ready) && inv_q.size() > 0 &&
        ((RAND_READY == 0) || $urandom_range(2) != 0)) begin
      int k;
      laddr_t a;
      k = $urandom_range(inv_q.size() - 1);
      a = inv_q[k];
      inv_q.delete(k);
      data_valid <= 1'b1;
      data.addr  <= a;
      data.data  <= line_mem.exists(a) ? line_mem[a] : '0;
    end
  end

  // responses
  always @(posedge clk) begin
    if (rst_n && rsp_valid && rsp_ready) begin
      n_rsp++;
      rsp_hasd[rsp.addr]  = rsp.has_data;
      rsp_grant[rsp.addr] = rsp.grant;
      held[rsp.addr]      = 1'b1;
      if (rsp.has_data) begin
        n_rsp_data++;
        rsp_data[rsp.addr] = rsp.data;
        line_mem[rsp.addr] = rsp.data;
      end else begin
        rsp_data[rsp.addr] = line_mem.exists(rsp.addr) ? line_mem[rsp.addr] : '0;
      end
    end
    rsp_ready <= (RAND_READY != 0) ? ($urandom_range(3) != 0) : 1'b1;
  end

  // request queue, driven by the always block below
  cpu_req_t req_q[$];

  always @(posedge clk) begin
    if (req_valid && req_ready) req_valid <= 1'b0;
    if (rst_n && (!req_valid || req_ready) && req_q.size() > 0) begin
      req_valid <= 1'b1;
      req       <= req_q.pop_front();
    end
  end

  task automatic issue(input req_op_e op, input laddr_t addr);
    rsp_data.delete(addr);
    req_q.push_back('{op: op, addr: addr});
    @(posedge clk);
  endtask

  task automatic wait_rsp(input laddr_t addr, output line_t d, output grant_e g);
    while (!rsp_data.exists(addr)) @(posedge clk);
    d = rsp_data[addr];
    g = rsp_grant[addr];
    rsp_data.delete(addr);
  endtask

  function automatic bit holds(laddr_t addr);
    return held.exists(addr);
  endfunction

  function automatic bit has_rsp(laddr_t addr);
    return rsp_data.exists(addr);
  endfunction

  function automatic bit last_had_data(laddr_t addr);
    return rsp_hasd.exists(addr) ? rsp_hasd[addr] : 1'b0;
  endfunction

  function automatic void write_line(laddr_t addr, line_t d);
    line_mem[addr] = d;
  endfunction
endmodule
