// tb_bia: self-checking testbench of the affine-conversion unit.
//
// The testbench holds the two point registers R1 and Rt that the unit
// borrows (two point_reg instances wired as in the top level) and presents
// projective points (x*z : y*z : z) of known affine points with random z.
// After done, Rt must hold (x, y, 1), checked against the reference model,
// and R1.z, which the unit must not touch, must still hold its old value. z = 1, z = p - 1 and z = 0 (which
// must raise fail) are included. The run time must stay under the bound
// given in the unit's description (1 + 3 * 256 + 2 * 514 + a few cycles).
module tb_bia;
  import secp_pkg::*;
  import secp_ref_pkg::apt_t;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       start = 1'b0;
  point_t     r_hat = '0;
  point_t     r1_q, rt_q, r1_d, rt_d;
  logic [2:0] r1_we, rt_we;
  logic       busy, done, fail;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  bia dut (.clk, .rst_n, .start, .r_hat, .r1_q, .rt_q, .r1_d, .r1_we,
           .rt_d, .rt_we, .busy, .done, .fail);
  point_reg u_r1 (.clk, .rst_n, .we(r1_we), .d(r1_d), .q(r1_q));
  point_reg u_rt (.clk, .rst_n, .we(rt_we), .d(rt_d), .q(rt_q));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic conv_check(apt_t a, fe_t z, string what);
    int  cyc;
    fe_t r1z_before;
    @(negedge clk);
    r1z_before = r1_q.z;
    r_hat.x = secp_ref_pkg::fmul(a.x, z);
    r_hat.y = secp_ref_pkg::fmul(a.y, z);
    r_hat.z = z;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (z == '0) begin
      if (!fail) begin
        failures++;
        $display("FAIL %s: z = 0 not flagged", what);
      end
      return;
    end
    if (fail || rt_q.x != a.x || rt_q.y != a.y || rt_q.z != 256'd1) begin
      failures++;
      $display("FAIL %s: fail=%0d got (%h, %h, %h) exp (%h, %h, 1)", what, fail,
               rt_q.x, rt_q.y, rt_q.z, a.x, a.y);
    end
    checks++;
    if (r1_q.z != r1z_before) begin
      failures++;
      $display("FAIL %s: R1.z changed", what);
    end
    checks++;
    if (cyc > 1 + 3 * 256 + 2 * 514 + 8) begin
      failures++;
      $display("FAIL %s: %0d cycles", what, cyc);
    end
  endtask

  initial begin
    apt_t g, q;
    fe_t  z;
    g = secp_ref_pkg::gen();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    conv_check(g, 256'd1, "z=1");
    conv_check(g, secp_ref_pkg::P - 256'd1, "z=p-1");
    conv_check(g, 256'd2, "z=2");
    conv_check(g, '0, "z=0");
    for (int n = 0; n < 10; n++) begin
      for (int i = 0; i < 8; i++) z[i*32 +: 32] = $urandom;
      if (z >= secp_ref_pkg::P) z = z - secp_ref_pkg::P;
      q = secp_ref_pkg::pmul(256'($urandom), g);
      conv_check(q, z, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
