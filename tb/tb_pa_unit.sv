// tb_pa_unit: self-checking testbench of the complete point adder.
//
// Builds curve points as multiples of G with the reference model, gives
// them random projective representations (x*z : y*z : z), and checks that
// the unit's result, taken back to affine form by the testbench, equals the
// reference affine sum. Cases: distinct points, doubling (same point on
// both inputs, also with different z), the point at infinity (0 : 1 : 0)
// on either input, and P + (-P), which must give Z = 0. Every addition must
// take the same number of cycles, PA_LAT.
module tb_pa_unit;
  import secp_pkg::*;
  import secp_ref_pkg::apt_t;

  localparam int PA_LAT = 14 * 514 + 19 * 3 + 1;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   start = 1'b0;
  point_t p1 = '0, p2 = '0, p3;
  logic   busy, done;
  int     checks = 0, failures = 0;

  always #5 clk = ~clk;

  pa_unit dut (.clk, .rst_n, .start, .p1, .p2, .b3(B3), .p3, .busy, .done);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fe_t rnd_z();
    fe_t r;
    for (int i = 0; i < 8; i++) r[i*32 +: 32] = $urandom;
    r[255] = 1'b0;
    if (r == '0) r = 256'd1;
    return r;
  endfunction

  function automatic point_t to_proj(apt_t a, fe_t z);
    point_t q;
    if (a.inf) return '{x: '0, y: 256'd1, z: '0};
    q.x = secp_ref_pkg::fmul(a.x, z);
    q.y = secp_ref_pkg::fmul(a.y, z);
    q.z = z;
    return q;
  endfunction

  task automatic add_check(apt_t a, apt_t b, fe_t za, fe_t zb, string what);
    apt_t   e;
    fe_t    zi;
    int     cyc;
    e = secp_ref_pkg::padd(a, b);
    @(negedge clk);
    p1 = to_proj(a, za);
    p2 = to_proj(b, zb);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != PA_LAT) begin
      failures++;
      $display("FAIL %s: latency %0d exp %0d", what, cyc, PA_LAT);
    end
    checks++;
    if (e.inf) begin
      if (p3.z != '0) begin
        failures++;
        $display("FAIL %s: expected infinity, Z = %h", what, p3.z);
      end
    end else if (p3.z == '0) begin
      failures++;
      $display("FAIL %s: unexpected Z = 0", what);
    end else begin
      zi = secp_ref_pkg::finv(p3.z);
      if (secp_ref_pkg::fmul(p3.x, zi) != e.x || secp_ref_pkg::fmul(p3.y, zi) != e.y) begin
        failures++;
        $display("FAIL %s: got (%h, %h) exp (%h, %h)", what,
                 secp_ref_pkg::fmul(p3.x, zi), secp_ref_pkg::fmul(p3.y, zi), e.x, e.y);
      end
    end
  endtask

  initial begin
    apt_t g, g2, g3, q, r, o, ng;
    g  = secp_ref_pkg::gen();
    g2 = secp_ref_pkg::padd(g, g);
    g3 = secp_ref_pkg::padd(g2, g);
    // the reference itself against the published multiples of G
    checks++;
    if (g2.x != secp_ref_pkg::G2X || g3.x != secp_ref_pkg::G3X) begin
      failures++;
      $display("FAIL reference model disagrees with published 2G/3G");
    end
    o.x = '0; o.y = '0; o.inf = 1'b1;
    ng = g; ng.y = secp_ref_pkg::P - g.y;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    add_check(g, g, 256'd1, 256'd1, "G+G");
    add_check(g, g, rnd_z(), rnd_z(), "G+G random z");
    add_check(g2, g, rnd_z(), rnd_z(), "2G+G");
    add_check(g, g3, rnd_z(), rnd_z(), "G+3G");
    add_check(g, o, rnd_z(), rnd_z(), "G+O");
    add_check(o, g2, rnd_z(), rnd_z(), "O+2G");
    add_check(g, ng, rnd_z(), rnd_z(), "G+(-G)");
    for (int n = 0; n < 4; n++) begin
      logic [255:0] k1, k2;
      k1 = 256'($urandom) * 256'($urandom);
      k2 = 256'($urandom);
      q = secp_ref_pkg::pmul(k1, g);
      r = secp_ref_pkg::pmul(k2, g);
      add_check(q, r, rnd_z(), rnd_z(), "random");
      add_check(q, q, rnd_z(), rnd_z(), "random doubling");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
