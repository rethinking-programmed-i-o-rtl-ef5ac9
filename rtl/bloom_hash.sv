// bloom_hash: Bloom-filter hash pipeline for 128-byte elements.
//
// Each element is hashed by K = 8 hash functions that consume one byte at a
// time. The byte loop is unrolled by 2, so the 128 bytes take 64 pipeline
// stages and an element leaves 64 cycles after it entered. Elements arrive
// on a 512-bit bus as two beats (bytes 0-63, then bytes 64-127, little
// endian), so a new element can start every 2 cycles (initiation interval 2).
// The result is the K 64-bit hash values, hash j in out_hash[64*j +: 64].
// Timing: out_valid is high exactly LATENCY = 64 cycles after the cycle in
// which the second beat was taken (in_valid && in_second). No back-pressure:
// the pipeline always accepts.
// From the paper: 128-byte elements, k = 8 byte-wide hash functions built from
// shifts, additions and XORs, unroll 2, 64-cycle latency, interval 2, 512-bit
// bus, 8 x 64-bit result. This design's own: the hash itself, a
// shift-add-xor step h' = h ^ ((h << 5) + (h >> 2) + byte) with a different
// 64-bit seed per function, and the TAG carried alongside each element.
module bloom_hash #(
  parameter int K          = 8,
  parameter int ELEM_BYTES = 128,
  parameter int UNROLL     = 2,
  parameter int BUS_W      = 512,
  parameter int TAG_W      = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_second,   // 0: bytes 0..63, 1: bytes 64..127
  input  logic [BUS_W-1:0]   in_data,
  input  logic [TAG_W-1:0]   in_tag,
  output logic               out_valid,
  output logic [K*64-1:0]    out_hash,
  output logic [TAG_W-1:0]   out_tag
);
  localparam int STAGES = ELEM_BYTES / UNROLL;   // 64
  localparam int ELEM_W = ELEM_BYTES * 8;

  typedef logic [63:0] h_t;

  function automatic h_t seed(int j);
    return 64'h9E37_79B9_7F4A_7C15 * 64'(j + 1) ^ 64'hC2B2_AE3D_27D4_EB4F;
  endfunction

  function automatic h_t sax(h_t h, logic [7:0] b);
    return h ^ ((h << 5) + (h >> 2) + 64'(b));
  endfunction

  // first half of the element, held until the second beat
  logic [BUS_W-1:0] first_q;
  always_ff @(posedge clk) begin
    if (in_valid && !in_second) first_q <= in_data;
  end

  logic [ELEM_W-1:0] elem_in;
  assign elem_in = {in_data, first_q};

  // pipeline registers, stage s holds the state after 2*s bytes
  logic              v_q   [1:STAGES];
  logic [ELEM_W-1:0] e_q   [1:STAGES];
  logic [TAG_W-1:0]  t_q   [1:STAGES];
  h_t                h_q   [1:STAGES][K];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 1; s <= STAGES; s++) v_q[s] <= 1'b0;
    end else begin
      v_q[1] <= in_valid && in_second;
      for (int s = 2; s <= STAGES; s++) v_q[s] <= v_q[s-1];
    end
  end

  always_ff @(posedge clk) begin
    // stage 1: bytes 0 and 1
    e_q[1] <= elem_in;
    t_q[1] <= in_tag;
    for (int j = 0; j < K; j++) begin
      h_t h;
      h = seed(j);
      for (int u = 0; u < UNROLL; u++) h = sax(h, elem_in[8*u +: 8]);
      h_q[1][j] <= h;
    end
    for (int s = 2; s <= STAGES; s++) begin
      e_q[s] <= e_q[s-1];
      t_q[s] <= t_q[s-1];
      for (int j = 0; j < K; j++) begin
        h_t h;
        h = h_q[s-1][j];
        for (int u = 0; u < UNROLL; u++) h = sax(h, e_q[s-1][8*(UNROLL*(s-1)+u) +: 8]);
        h_q[s][j] <= h;
      end
    end
  end

  assign out_valid = v_q[STAGES];
  assign out_tag   = t_q[STAGES];
  always_comb begin
    for (int j = 0; j < K; j++) out_hash[64*j +: 64] = h_q[STAGES][j];
  end
endmodule
