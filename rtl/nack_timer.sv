// nack_timer: the "not ready yet" timeout state machine.
//
// A device that holds back its reply to a CPU cache request must still answer
// before the CPU's own timeout fires. This timer counts the cycles during
// which `run` is high (a request is being held and no result is ready). When
// the count reaches `limit` it raises `fire` for one cycle and moves to the
// FIRED state, where it waits for `clear` (the held request has been
// answered). `clear` also restarts an unfired count. States: IDLE (not
// counting), COUNT, FIRED.
// Timing: with run high from cycle 0, fire is high in cycle limit-1 (counted
// from the first cycle run is seen high); limit = 0 is treated as 1.
// The paper calls for a small state machine that answers "not ready yet"
// before the timeout; the counter form and the run/clear interface are this
// design's own.
module nack_timer #(
  parameter int CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             run,
  input  logic             clear,
  input  logic [CNT_W-1:0] limit,
  output logic             fire,
  output logic             fired
);
  typedef enum logic [1:0] {IDLE, COUNT, FIRED} state_e;
  state_e state;
  logic [CNT_W-1:0] cnt;
  logic [CNT_W-1:0] lim;

  assign lim   = (limit == '0) ? CNT_W'(1) : limit;
  assign fired = (state == FIRED);
  assign fire  = run && !clear && (state != FIRED) &&
                 ((state == IDLE) ? (lim == CNT_W'(1)) : (cnt + 1'b1 == lim));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      cnt   <= '0;
    end else if (clear) begin
      state <= IDLE;
      cnt   <= '0;
    end else begin
      case (state)
        IDLE:  if (run) begin
                 cnt   <= CNT_W'(1);
                 state <= fire ? FIRED : COUNT;
               end
        COUNT: if (run) begin
                 cnt   <= cnt + 1'b1;
                 if (fire) state <= FIRED;
               end
        FIRED: ;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
