// malu: modular arithmetic logic unit for GF(p), p the SECP256K1 prime.
//
// Performs c = a + b, a - b or a * b (mod p) on 256-bit operands that are
// already reduced into [0, p). Addition and subtraction take one cycle.
// Multiplication is the interleaved shift-and-add method, most significant
// multiplier bit first: for every bit of b the accumulator is first doubled
// (acc = acc + acc mod p) and then, in a second cycle, a is added
// (acc = acc + a mod p). The second cycle always computes the sum and only
// the selection of the result depends on the bit, so the schedule of a
// multiplication never depends on the operand values. A single modular adder
// serves all three operations.
//
// Interface: start is sampled while the unit is idle together with op, a and
// b (which are captured). done pulses for one cycle with the result valid on
// c; c holds its value until the next operation completes.
// Timing: ADD/SUB finish 2 cycles after start (start cycle + compute cycle),
// MUL 2*256 + 1 cycles after start.
//
// The paper names the unit and its shift-and-add method; the two-cycles-per-
// bit schedule, the single shared adder and the start/done handshake are
// this design's own choices.
module malu
  import secp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  malu_op_t op,
  input  fe_t      a,
  input  fe_t      b,
  output fe_t      c,
  output logic     done
);

  typedef enum logic [1:0] {S_IDLE, S_ADDSUB, S_DBL, S_ADD} state_t;

  state_t   state;
  malu_op_t op_q;
  fe_t      a_q, b_q, acc;
  logic [7:0] bit_idx;

  // one shared modular adder: operand selection depends only on the state
  fe_t add_x, add_y, add_s, sub_d;
  always_comb begin
    add_x = acc;
    add_y = a_q;
    if (state == S_ADDSUB) begin
      add_x = a_q;
      add_y = b_q;
    end else if (state == S_DBL) begin
      add_y = acc;
    end
    add_s = mod_add(add_x, add_y);
    sub_d = mod_sub(a_q, b_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      op_q    <= OP_ADD;
      a_q     <= '0;
      b_q     <= '0;
      acc     <= '0;
      c       <= '0;
      done    <= 1'b0;
      bit_idx <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q    <= op;
          a_q     <= a;
          b_q     <= b;
          acc     <= '0;
          bit_idx <= 8'(FW - 1);
          state   <= (op == OP_MUL) ? S_DBL : S_ADDSUB;
        end
        S_ADDSUB: begin
          c     <= (op_q == OP_SUB) ? sub_d : add_s;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_DBL: begin
          acc   <= add_s;
          state <= S_ADD;
        end
        S_ADD: begin
          if (b_q[bit_idx]) acc <= add_s;
          if (bit_idx == 0) begin
            c     <= b_q[0] ? add_s : acc;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            bit_idx <= bit_idx - 8'd1;
            state   <= S_DBL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
