// ladder_cntl: controller of the Montgomery ladder with temporary register.
//
// Walks the private key k from its most significant set bit down to bit 0
// and runs, for every remaining bit k_i, one ladder step on the two point
// adders, which always work in parallel and in lock step:
//   PA0: R0 <- (k_i ? R1 : R0) + R0      (R0 + R1 if k_i = 1, 2*R0 if 0)
//   PA1: R1 <- (k_i ? R1 : R0) + R1      (2*R1 if k_i = 1, R0 + R1 if 0)
//   Rt  <- (k_i ? R0 : R1)               (temporary register, loaded too)
// so that R0, R1 and Rt are written together at the end of every step
// whatever the key bit is; only the operand selects depend on k_i.
// Before the loop R0 <- P is loaded and one step with PA1's second operand
// switched to the input point P makes R1 <- 2P. After the loop the
// inversion unit converts R0 to affine coordinates in Rt.
//
// Sequence: IDLE -> LOAD -> SCAN (one cycle per leading zero bit of k and
// one for the leading one) -> INIT (R1 <- 2P) -> STEP x (t - 1) -> CONV ->
// FIN. k = 0 is refused (err) since it has no set bit.
//
// Interface: start (one cycle, while busy is low) captures k. The outputs
// are decoded from the state: pa_start pulses once per step, ki is the key
// bit of the step and stays valid until pa_done, init marks the 2P step,
// r0_we/r1_we/rt_we commit the step on pa_done, bia_active hands R1 and Rt
// to the inversion unit, done pulses at the end with err.
//
// The ladder with the temporary register and parallel loading follows the
// paper; the leading-bit scan (the paper assumes k_{t-1} = 1), the handling
// of k = 0 and the state encoding are this design's own choices. The scan
// takes one cycle per leading zero of k and so reveals the bit length of k.
module ladder_cntl #(
  parameter int unsigned KEY_BITS = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [KEY_BITS-1:0] k,
  input  logic                pa_done,
  input  logic                bia_done,
  input  logic                bia_fail,
  output logic                load_p,
  output logic                pa_start,
  output logic                ki,
  output logic                init,
  output logic                r0_we,
  output logic                r1_we,
  output logic                rt_we,
  output logic                bia_start,
  output logic                bia_active,
  output logic                busy,
  output logic                done,
  output logic                err
);

  localparam int unsigned IW = (KEY_BITS > 1) ? $clog2(KEY_BITS) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_SCAN, S_INIT, S_INIT_W, S_STEP, S_STEP_W, S_CONV, S_CONV_W, S_FIN
  } state_t;

  state_t              state;
  logic [KEY_BITS-1:0] k_q;
  logic [IW-1:0]       idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k_q   <= '0;
      idx   <= '0;
      err   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          k_q   <= k;
          idx   <= IW'(KEY_BITS - 1);
          err   <= 1'b0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (k_q == '0) begin
            err   <= 1'b1;
            state <= S_FIN;
          end else begin
            state <= S_SCAN;
          end
        end
        S_SCAN: if (k_q[idx]) state <= S_INIT; else idx <= idx - 1'b1;
        S_INIT: state <= S_INIT_W;
        S_INIT_W, S_STEP_W: if (pa_done) begin
          if (idx == '0) begin
            state <= S_CONV;
          end else begin
            idx   <= idx - 1'b1;
            state <= S_STEP;
          end
        end
        S_STEP: state <= S_STEP_W;
        S_CONV: state <= S_CONV_W;
        S_CONV_W: if (bia_done) begin
          err   <= bia_fail;
          state <= S_FIN;
        end
        S_FIN: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    load_p     = (state == S_LOAD);
    pa_start   = (state == S_INIT) || (state == S_STEP);
    init       = (state == S_INIT) || (state == S_INIT_W);
    ki         = ((state == S_STEP) || (state == S_STEP_W)) ? k_q[idx] : 1'b0;
    r0_we      = (state == S_STEP_W) && pa_done;
    r1_we      = ((state == S_STEP_W) || (state == S_INIT_W)) && pa_done;
    rt_we      = (state == S_STEP_W) && pa_done;
    bia_start  = (state == S_CONV);
    bia_active = (state == S_CONV) || (state == S_CONV_W);
    busy       = (state != S_IDLE);
    done       = (state == S_FIN);
  end

endmodule
