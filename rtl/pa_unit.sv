// pa_unit: complete projective point addition P3 = P1 + P2 on y^2 = x^3 + 7.
//
// The unit runs the 33-step complete addition program for a = 0 curves
// (12 general multiplications, 2 multiplications by b3 = 21, 19 additions or
// subtractions; see secp_pkg::pa_ucode). It is also used for doubling by
// presenting the same point on both inputs: the formulas have no special
// cases, so P1 = P2, P = O or P = -Q need no branch.
//
// Structure: two operand multiplexers pick A and B from the eight-word
// register file (t0..t4, X3, Y3, Z3), the two input points and b3; one MALU
// computes A op B; a small controller steps a program counter, drives the
// multiplexer selects and the MALU op, and enables the write of the result
// into the register file. X3, Y3, Z3 of the register file are the output.
//
// Interface: pulse start while idle; p1, p2 and b3 must stay stable until
// done. done pulses for one cycle when p3 holds the sum; p3 then holds its
// value until the next start.
// Timing: 14 * 514 + 19 * 3 + 1 = 7254 cycles from start to done, the same
// for every input (the schedule is fixed, the MALU is constant time).
//
// The register file size (8 x 256), the MALU and the controller with sel,
// op and en follow the paper's figure; the program is the published complete
// addition formula. The program-counter encoding is this design's own.
module pa_unit
  import secp_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  point_t p1,
  input  point_t p2,
  input  fe_t    b3,
  output point_t p3,
  output logic   busy,
  output logic   done
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_t;

  state_t     state;
  logic [5:0] pc;
  fe_t        rf [8];          // t0..t4, X3, Y3, Z3
  pa_uop_t    uop;
  fe_t        opa, opb, res;
  logic       malu_start, malu_done;

  assign uop = pa_ucode(pc);

  // operand multiplexers
  function automatic fe_t pick(pa_src_t s, fe_t r[8], point_t q1, point_t q2, fe_t k3);
    unique case (s)
      S_X1:    return q1.x;
      S_Y1:    return q1.y;
      S_Z1:    return q1.z;
      S_X2:    return q2.x;
      S_Y2:    return q2.y;
      S_Z2:    return q2.z;
      S_B3:    return k3;
      default: return r[s[2:0]];
    endcase
  endfunction

  always_comb begin
    opa = pick(uop.a, rf, p1, p2, b3);
    opb = pick(uop.b, rf, p1, p2, b3);
  end

  assign malu_start = (state == S_ISSUE);

  malu u_malu (
    .clk   (clk),
    .rst_n (rst_n),
    .start (malu_start),
    .op    (uop.op),
    .a     (opa),
    .b     (opb),
    .c     (res),
    .done  (malu_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      pc    <= '0;
      done  <= 1'b0;
      for (int i = 0; i < 8; i++) rf[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          pc    <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: state <= S_WAIT;
        S_WAIT: if (malu_done) begin
          rf[uop.dst] <= res;         // en
          if (pc == 6'(PA_STEPS - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            pc    <= pc + 6'd1;
            state <= S_ISSUE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign p3   = '{x: rf[5], y: rf[6], z: rf[7]};

endmodule
