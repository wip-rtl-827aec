// secp_pkg: constants, types and field helpers shared by the SECP256K1
// point-multiplier blocks.
//
// The curve is y^2 = x^3 + 7 over GF(p), p = 2^256 - 2^32 - 977. Points are
// kept in homogeneous projective coordinates (X:Y:Z). The complete addition
// formula needs the constant b3 = 3*b = 21.
//
// The two field helpers below (mod_add, mod_sub) are the only arithmetic the
// datapath uses: every multiplication, halving and subtraction in the design
// is built from them. Both expect operands already reduced into [0, p).
package secp_pkg;

  localparam int unsigned FW = 256;  // field width in bits

  typedef logic [FW-1:0] fe_t;       // one field element

  // p of the SECP256K1 curve
  localparam fe_t P_MOD = 256'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFE_FFFFFC2F;
  // b3 = 3*b with b = 7
  localparam fe_t B3 = 256'd21;
  // generator G (x, y)
  localparam fe_t GX = 256'h79BE667E_F9DCBBAC_55A06295_CE870B07_029BFCDB_2DCE28D9_59F2815B_16F81798;
  localparam fe_t GY = 256'h483ADA77_26A3C465_5DA4FBFC_0E1108A8_FD17B448_A6855419_9C47D08F_FB10D4B8;

  // One point in projective coordinates.
  typedef struct packed {
    fe_t x;
    fe_t y;
    fe_t z;
  } point_t;

  // MALU operations
  typedef enum logic [1:0] {
    OP_ADD = 2'd0,
    OP_SUB = 2'd1,
    OP_MUL = 2'd2
  } malu_op_t;

  // (a + b) mod p for a, b in [0, p)
  function automatic fe_t mod_add(fe_t a, fe_t b);
    logic [FW:0] s;
    logic [FW:0] t;
    s = {1'b0, a} + {1'b0, b};
    t = s - {1'b0, P_MOD};
    return t[FW] ? s[FW-1:0] : t[FW-1:0];
  endfunction

  // (a - b) mod p for a, b in [0, p)
  function automatic fe_t mod_sub(fe_t a, fe_t b);
    logic [FW:0] d;
    d = {1'b0, a} - {1'b0, b};
    return d[FW] ? (d[FW-1:0] + P_MOD) : d[FW-1:0];
  endfunction

  // a / 2 mod p for a in [0, p): a >> 1 when a is even, (a + p) >> 1 otherwise
  function automatic fe_t mod_half(fe_t a);
    logic [FW:0] s;
    s = a[0] ? ({1'b0, a} + {1'b0, P_MOD}) : {1'b0, a};
    s = s >> 1;
    return s[FW-1:0];
  endfunction

  // ---------------------------------------------------------------------
  // Point-addition program (complete formulas for a = 0, 33 steps)
  // ---------------------------------------------------------------------
  // Operand sources of the PA unit: 0..7 its own register file
  // (t0..t4, X3, Y3, Z3), 8..13 the input points, 14 the constant b3.
  typedef enum logic [3:0] {
    S_T0 = 4'd0, S_T1 = 4'd1, S_T2 = 4'd2, S_T3 = 4'd3, S_T4 = 4'd4,
    S_X3 = 4'd5, S_Y3 = 4'd6, S_Z3 = 4'd7,
    S_X1 = 4'd8, S_Y1 = 4'd9, S_Z1 = 4'd10,
    S_X2 = 4'd11, S_Y2 = 4'd12, S_Z2 = 4'd13,
    S_B3 = 4'd14
  } pa_src_t;

  typedef struct packed {
    malu_op_t   op;
    pa_src_t    a;
    pa_src_t    b;
    logic [2:0] dst;   // register-file index 0..7
  } pa_uop_t;

  localparam int unsigned PA_STEPS = 33;

  // One step of the addition program: dst <- a op b.
  function automatic pa_uop_t pa_ucode(logic [5:0] pc);
    unique case (pc)
      6'd0:  return '{OP_MUL, S_X1, S_X2, 3'd0};  // t0 <- X1*X2
      6'd1:  return '{OP_MUL, S_Y1, S_Y2, 3'd1};  // t1 <- Y1*Y2
      6'd2:  return '{OP_MUL, S_Z1, S_Z2, 3'd2};  // t2 <- Z1*Z2
      6'd3:  return '{OP_ADD, S_X1, S_Y1, 3'd3};  // t3 <- X1+Y1
      6'd4:  return '{OP_ADD, S_X2, S_Y2, 3'd4};  // t4 <- X2+Y2
      6'd5:  return '{OP_MUL, S_T3, S_T4, 3'd3};  // t3 <- t3*t4
      6'd6:  return '{OP_ADD, S_T0, S_T1, 3'd4};  // t4 <- t0+t1
      6'd7:  return '{OP_SUB, S_T3, S_T4, 3'd3};  // t3 <- t3-t4
      6'd8:  return '{OP_ADD, S_Y1, S_Z1, 3'd4};  // t4 <- Y1+Z1
      6'd9:  return '{OP_ADD, S_Y2, S_Z2, 3'd5};  // X3 <- Y2+Z2
      6'd10: return '{OP_MUL, S_T4, S_X3, 3'd4};  // t4 <- t4*X3
      6'd11: return '{OP_ADD, S_T1, S_T2, 3'd5};  // X3 <- t1+t2
      6'd12: return '{OP_SUB, S_T4, S_X3, 3'd4};  // t4 <- t4-X3
      6'd13: return '{OP_ADD, S_X1, S_Z1, 3'd5};  // X3 <- X1+Z1
      6'd14: return '{OP_ADD, S_X2, S_Z2, 3'd6};  // Y3 <- X2+Z2
      6'd15: return '{OP_MUL, S_X3, S_Y3, 3'd5};  // X3 <- X3*Y3
      6'd16: return '{OP_ADD, S_T0, S_T2, 3'd6};  // Y3 <- t0+t2
      6'd17: return '{OP_SUB, S_X3, S_Y3, 3'd6};  // Y3 <- X3-Y3
      6'd18: return '{OP_ADD, S_T0, S_T0, 3'd5};  // X3 <- t0+t0
      6'd19: return '{OP_ADD, S_X3, S_T0, 3'd0};  // t0 <- X3+t0
      6'd20: return '{OP_MUL, S_B3, S_T2, 3'd2};  // t2 <- b3*t2
      6'd21: return '{OP_ADD, S_T1, S_T2, 3'd7};  // Z3 <- t1+t2
      6'd22: return '{OP_SUB, S_T1, S_T2, 3'd1};  // t1 <- t1-t2
      6'd23: return '{OP_MUL, S_B3, S_Y3, 3'd6};  // Y3 <- b3*Y3
      6'd24: return '{OP_MUL, S_T4, S_Y3, 3'd5};  // X3 <- t4*Y3
      6'd25: return '{OP_MUL, S_T3, S_T1, 3'd2};  // t2 <- t3*t1
      6'd26: return '{OP_SUB, S_T2, S_X3, 3'd5};  // X3 <- t2-X3
      6'd27: return '{OP_MUL, S_Y3, S_T0, 3'd6};  // Y3 <- Y3*t0
      6'd28: return '{OP_MUL, S_T1, S_Z3, 3'd1};  // t1 <- t1*Z3
      6'd29: return '{OP_ADD, S_T1, S_Y3, 3'd6};  // Y3 <- t1+Y3
      6'd30: return '{OP_MUL, S_T0, S_T3, 3'd0};  // t0 <- t0*t3
      6'd31: return '{OP_MUL, S_Z3, S_T4, 3'd7};  // Z3 <- Z3*t4
      default: return '{OP_ADD, S_Z3, S_T0, 3'd7}; // step 32: Z3 <- Z3+t0
    endcase
  endfunction

endpackage
