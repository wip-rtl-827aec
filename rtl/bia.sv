// bia: conversion of the ladder result to affine coordinates with the
// binary inversion algorithm.
//
// Given R^ = (x0 : y0 : z0) the unit computes r = z0^-1 mod p and then the
// affine point (x0 * r, y0 * r). The inversion is the binary variant of the
// extended Euclidean algorithm: u = z0, v = p, x1 = 1, x2 = 0; while neither
// u nor v is 1, halve an even u (and halve x1 mod p) or an even v (and x2),
// otherwise subtract the smaller of u, v from the larger and the matching
// x from the other x mod p. When u = 1 the inverse is x1, when v = 1 it is
// x2. Only additions, subtractions and shifts are used; one step per cycle.
// The two final products are formed by a MALU of the unit's own.
//
// The unit has no working registers of its own: like the published
// architecture it reuses the point registers R1 and Rt. It reads them on
// r1_q / rt_q and writes them through r1_d/r1_we and rt_d/rt_we (we bit 0
// = x, 1 = y, 2 = z). Mapping: u = R1.x, v = R1.y, x1 = Rt.x, x2 = Rt.y;
// only the x and y words of R1 are written, as in the figure of the
// architecture, where R1.z is fed from PA1 alone (r1_we[2] stays 0 and
// r1_d.z simply repeats r1_q.z). When the loop ends the
// inverse r is already in Rt.x (u = 1) or Rt.y (v = 1). The unit then
// multiplies the other coordinate first and the one whose word holds r
// last (the MALU captures r when it starts, so r may then be overwritten).
// At the end Rt = (x, y, 1) holds the affine result.
//
// Interface: pulse start while idle with r_hat stable until done. done
// pulses for one cycle; fail is set with it when z0 = 0 (point at infinity,
// which has no affine form); Rt is then left unchanged.
// Timing: 1 load cycle, one cycle per inversion step (data dependent, at
// most about 3 * 256), 2 x 514 cycles for the two products, about 1.6k
// cycles in all. The inversion time depends on z0; the published design
// does not say whether its unit is constant time.
//
// The choice of the binary inversion algorithm, the reuse of R1 and Rt and
// the result in Rt follow the paper; the register mapping, the MALU for the
// two products, the order of the products and the handshake are this
// design's own choices.
module bia
  import secp_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  point_t     r_hat,
  input  point_t     r1_q,
  input  point_t     rt_q,
  output point_t     r1_d,
  output logic [2:0] r1_we,
  output point_t     rt_d,
  output logic [2:0] rt_we,
  output logic       busy,
  output logic       done,
  output logic       fail
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_INV, S_MUL1, S_W1, S_MUL2, S_W2} state_t;

  state_t state;
  fe_t    u, v, x1, x2;
  fe_t    m_a, m_b, m_c;
  logic   r_in_y;        // the inverse ended up in Rt.y (v reached 1)
  logic   m_start, m_done;

  assign u  = r1_q.x;
  assign v  = r1_q.y;
  assign x1 = rt_q.x;
  assign x2 = rt_q.y;

  // register update for the current state
  always_comb begin
    r1_d    = r1_q;
    rt_d    = rt_q;
    r1_we   = 3'b000;
    rt_we   = 3'b000;
    m_start = 1'b0;
    // first product: the coordinate whose word does not hold r
    m_a     = r_in_y ? r_hat.x : r_hat.y;
    m_b     = r_in_y ? rt_q.y  : rt_q.x;
    unique case (state)
      S_LOAD: begin
        r1_d.x = r_hat.z;  r1_d.y = P_MOD;  r1_we = 3'b011;
        rt_d.x = 256'd1;   rt_d.y = '0;     rt_we = 3'b011;
      end
      S_INV: begin
        if (u == 256'd1 || v == 256'd1) begin
          // done: r stays in Rt.x or Rt.y
        end else if (!u[0]) begin
          r1_d.x = u >> 1;       r1_we = 3'b001;
          rt_d.x = mod_half(x1); rt_we = 3'b001;
        end else if (!v[0]) begin
          r1_d.y = v >> 1;       r1_we = 3'b010;
          rt_d.y = mod_half(x2); rt_we = 3'b010;
        end else if (u >= v) begin
          r1_d.x = u - v;        r1_we = 3'b001;
          rt_d.x = mod_sub(x1, x2); rt_we = 3'b001;
        end else begin
          r1_d.y = v - u;        r1_we = 3'b010;
          rt_d.y = mod_sub(x2, x1); rt_we = 3'b010;
        end
      end
      S_MUL1: m_start = 1'b1;
      S_W1: begin
        if (r_in_y) rt_d.x = m_c; else rt_d.y = m_c;
        rt_we = m_done ? (r_in_y ? 3'b001 : 3'b010) : 3'b000;
      end
      S_MUL2: begin
        m_a     = r_in_y ? r_hat.y : r_hat.x;
        m_start = 1'b1;
      end
      S_W2: begin
        if (r_in_y) rt_d.y = m_c; else rt_d.x = m_c;
        rt_d.z = 256'd1;
        rt_we  = m_done ? (r_in_y ? 3'b110 : 3'b101) : 3'b000;
      end
      default: ;
    endcase
  end

  malu u_malu (
    .clk   (clk),
    .rst_n (rst_n),
    .start (m_start),
    .op    (OP_MUL),
    .a     (m_a),
    .b     (m_b),
    .c     (m_c),
    .done  (m_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      done   <= 1'b0;
      fail   <= 1'b0;
      r_in_y <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          if (r_hat.z == '0) begin
            fail  <= 1'b1;
            done  <= 1'b1;
          end else begin
            fail  <= 1'b0;
            state <= S_LOAD;
          end
        end
        S_LOAD: state <= S_INV;
        S_INV: if (u == 256'd1 || v == 256'd1) begin
          r_in_y <= (u != 256'd1);
          state  <= S_MUL1;
        end
        S_MUL1: state <= S_W1;
        S_W1:   if (m_done) state <= S_MUL2;
        S_MUL2: state <= S_W2;
        S_W2: if (m_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
