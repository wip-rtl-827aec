// secp256k1_top: side-channel hardened SECP256K1 scalar multiplier.
//
// Computes the public key Q = k * P of a private key k, for a point P given
// in projective coordinates (x : y : z), normally the generator G with
// z = 1, and returns Q in affine coordinates.
//
// Datapath: three 3 x 256 point registers R0, R1 and Rt; two complete
// point-addition units PA0 and PA1 that always run in parallel (PA0 feeds
// R0, PA1 feeds R1); operand multiplexers in front of them and of the
// registers; a controller (Cntl) that takes the key bits k_i and drives the
// selects and enables; and the binary-inversion unit (BIA) that converts
// the projective result R^ = R0 to affine form, using R1 and Rt as its
// working registers and leaving (x, y, 1) in Rt.
//   PA0 operands: A = k_i ? R1 : R0,  B = R0
//   PA1 operands: A = k_i ? R1 : R0,  B = init ? P : R1
//   R0 <- P (load) | PA0          R1 <- PA1 | BIA
//   Rt <- (k_i ? R0 : R1) | BIA
// Every ladder step is the same pair of point additions and writes all
// three registers at once; the key bit only steers multiplexers.
//
// Interface: hold px, py, pz stable and pulse start while busy is low.
// done pulses for one cycle; then qx, qy hold the affine result (also
// visible as Rt) and err tells whether k was 0 or the result was the point
// at infinity. r_hat shows R0, the projective result.
// Timing: t * 7255 cycles of ladder (the 2P step and t - 1 ladder steps)
// plus the leading-zero scan and about 1.6k cycles of affine conversion,
// for a key of bit length t: 1,858,844 cycles for one 256-bit key. Every
// ladder step takes 7255 cycles for k_i = 0 and k_i = 1 alike.
//
// The structure follows the paper's architecture figure and its ladder
// algorithm. Which operand each multiplexer input is, the way R1 <- 2P is
// formed and the handshake are this design's own reading of the figure.
module secp256k1_top
  import secp_pkg::*;
#(
  parameter int unsigned KEY_BITS = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [KEY_BITS-1:0] k,
  input  fe_t                 px,
  input  fe_t                 py,
  input  fe_t                 pz,
  output fe_t                 qx,
  output fe_t                 qy,
  output point_t              r_hat,
  output logic                busy,
  output logic                done,
  output logic                err
);

  point_t p_in;
  point_t r0, r1, rt;
  point_t r0_d, r1_d, rt_d;
  logic [2:0] r0_we, r1_we, rt_we;

  point_t pa0_a, pa0_b, pa1_a, pa1_b, pa0_q, pa1_q;
  logic   pa_start, pa0_done, pa1_done, pa0_busy, pa1_busy;

  point_t bia_r1_d, bia_rt_d;
  logic [2:0] bia_r1_we, bia_rt_we;
  logic   bia_start, bia_done, bia_fail, bia_busy;

  logic c_load_p, c_ki, c_init, c_r0_we, c_r1_we, c_rt_we, c_bia_active;

  assign p_in = '{x: px, y: py, z: pz};

  // ------------------------------------------------------------------ Cntl
  ladder_cntl #(.KEY_BITS(KEY_BITS)) u_cntl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .k          (k),
    .pa_done    (pa0_done),
    .bia_done   (bia_done),
    .bia_fail   (bia_fail),
    .load_p     (c_load_p),
    .pa_start   (pa_start),
    .ki         (c_ki),
    .init       (c_init),
    .r0_we      (c_r0_we),
    .r1_we      (c_r1_we),
    .rt_we      (c_rt_we),
    .bia_start  (bia_start),
    .bia_active (c_bia_active),
    .busy       (busy),
    .done       (done),
    .err        (err)
  );

  // ------------------------------------------------------- point adders
  assign pa0_a = c_ki ? r1 : r0;
  assign pa0_b = r0;
  assign pa1_a = c_ki ? r1 : r0;
  assign pa1_b = c_init ? p_in : r1;

  pa_unit u_pa0 (
    .clk   (clk),
    .rst_n (rst_n),
    .start (pa_start),
    .p1    (pa0_a),
    .p2    (pa0_b),
    .b3    (B3),
    .p3    (pa0_q),
    .busy  (pa0_busy),
    .done  (pa0_done)
  );

  pa_unit u_pa1 (
    .clk   (clk),
    .rst_n (rst_n),
    .start (pa_start),
    .p1    (pa1_a),
    .p2    (pa1_b),
    .b3    (B3),
    .p3    (pa1_q),
    .busy  (pa1_busy),
    .done  (pa1_done)
  );

  // ----------------------------------------------------------- inversion
  bia u_bia (
    .clk   (clk),
    .rst_n (rst_n),
    .start (bia_start),
    .r_hat (r0),
    .r1_q  (r1),
    .rt_q  (rt),
    .r1_d  (bia_r1_d),
    .r1_we (bia_r1_we),
    .rt_d  (bia_rt_d),
    .rt_we (bia_rt_we),
    .busy  (bia_busy),
    .done  (bia_done),
    .fail  (bia_fail)
  );

  // ------------------------------------------------ register input muxes
  always_comb begin
    r0_d  = c_load_p ? p_in : pa0_q;
    r0_we = {3{c_load_p | c_r0_we}};
    if (c_bia_active) begin
      r1_d  = bia_r1_d;
      r1_we = bia_r1_we;
      rt_d  = bia_rt_d;
      rt_we = bia_rt_we;
    end else begin
      r1_d  = pa1_q;
      r1_we = {3{c_r1_we}};
      rt_d  = c_ki ? r0 : r1;
      rt_we = {3{c_rt_we}};
    end
  end

  point_reg u_r0 (.clk(clk), .rst_n(rst_n), .we(r0_we), .d(r0_d), .q(r0));
  point_reg u_r1 (.clk(clk), .rst_n(rst_n), .we(r1_we), .d(r1_d), .q(r1));
  point_reg u_rt (.clk(clk), .rst_n(rst_n), .we(rt_we), .d(rt_d), .q(rt));

  assign qx    = rt.x;
  assign qy    = rt.y;
  assign r_hat = r0;

  // The two adders run the same fixed program from the same start pulse,
  // so they must stay in lock step: this is what makes a ladder step look
  // the same for k_i = 0 and k_i = 1.
  a_pa_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (pa0_done == pa1_done) && (pa0_busy == pa1_busy));
  // the inversion unit only works while the controller has handed it R1/Rt
  a_bia_owner: assert property (@(posedge clk) disable iff (!rst_n)
    bia_busy |-> c_bia_active);

endmodule
