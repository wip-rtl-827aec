// tb_secp256k1_top: end-to-end testbench of the scalar multiplier at its
// default size (256-bit keys).
//
// Each run loads a key k and a point P, waits for done and compares the
// affine result (qx, qy) with k*P from the reference model. The keys cover
// k = 1, 2, 3, a full-length random key, a random key with leading zero
// bits, the group order n (result at infinity, must raise err) and k = 0
// (must raise err); one run uses P = 3G in projective form with a random z.
//
// The testbench also watches the inside of the design and counts how often
// each mechanism of the architecture happened: ladder steps with k_i = 1 and
// with k_i = 0, loads of the temporary register Rt, leading-zero scan
// cycles, the initial R1 <- 2P step, affine conversions, and both refusals.
// A mechanism that never happened counts as a failure. It checks that every
// ladder step, whatever its key bit, takes the same number of cycles (7255),
// and that a full-length key takes within 5 % of the 1,895 k cycles
// published for the architecture (no breakdown of that figure is published,
// so no exact count can be derived from it).
module tb_secp256k1_top;
  import secp_pkg::*;
  import secp_ref_pkg::apt_t;

  // group order of SECP256K1
  localparam logic [255:0] N_ORD =
    256'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFE_BAAEDCE6_AF48A03B_BFD25E8C_D0364141;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic         start = 1'b0;
  logic [255:0] k = '0;
  fe_t          px = '0, py = '0, pz = '0, qx, qy;
  point_t       r_hat;
  logic         busy, done, err;
  int           checks = 0, failures = 0;

  always #5 clk = ~clk;

  secp256k1_top dut (.clk, .rst_n, .start, .k, .px, .py, .pz, .qx, .qy,
                     .r_hat, .busy, .done, .err);

  // --- mechanism counters, from the controller's decoded outputs
  int n_step1 = 0, n_step0 = 0, n_rt = 0, n_scan = 0, n_init = 0;
  int n_conv = 0, n_inf = 0, n_zero = 0;
  int step_len = 0, first_len = 0, len_bad = 0;
  logic in_step = 1'b0;
  always_ff @(posedge clk) begin
    if (dut.u_cntl.pa_start) begin
      if (dut.u_cntl.init) n_init <= n_init + 1;
      else if (dut.u_cntl.ki) n_step1 <= n_step1 + 1;
      else n_step0 <= n_step0 + 1;
      in_step  <= 1'b1;
      step_len <= 1;
    end else if (in_step) begin
      step_len <= step_len + 1;
      if (dut.u_cntl.pa_done) begin
        in_step <= 1'b0;
        if (first_len == 0) first_len <= step_len + 1;
        else if (first_len != step_len + 1) len_bad <= len_bad + 1;
      end
    end
    if (dut.u_cntl.rt_we) n_rt <= n_rt + 1;
    if (dut.u_cntl.state == dut.u_cntl.S_SCAN && !dut.u_cntl.k_q[dut.u_cntl.idx])
      n_scan <= n_scan + 1;
    if (dut.u_cntl.bia_start) n_conv <= n_conv + 1;
  end

  initial begin : watchdog
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int last_cyc = 0;

  task automatic run(logic [255:0] key, apt_t p, fe_t z, string what);
    apt_t e;
    int   cyc;
    e = secp_ref_pkg::pmul(key, p);
    @(negedge clk);
    k  = key;
    px = secp_ref_pkg::fmul(p.x, z);
    py = secp_ref_pkg::fmul(p.y, z);
    pz = z;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (e.inf || key == '0) begin
      if (!err) begin
        failures++;
        $display("FAIL %s: no err for a result at infinity", what);
      end
      if (key == '0) n_zero++; else n_inf++;
    end else if (err || qx != e.x || qy != e.y) begin
      failures++;
      $display("FAIL %s: err=%0d got (%h, %h) exp (%h, %h)", what, err, qx, qy, e.x, e.y);
    end
    $display("%s: %0d cycles", what, cyc);
    last_cyc = cyc;
  endtask

  initial begin
    apt_t         g, g3;
    logic [255:0] key;
    fe_t          z;
    g  = secp_ref_pkg::gen();
    g3 = secp_ref_pkg::pmul(256'd3, g);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(256'd1, g, 256'd1, "k=1");
    run(256'd2, g, 256'd1, "k=2");
    run(256'd3, g, 256'd1, "k=3");
    for (int i = 0; i < 8; i++) z[i*32 +: 32] = $urandom;
    z[255] = 1'b0;
    run(256'h1234_5678_9ABC_DEF0, g3, z, "k=0x123456789abcdef0, P=3G projective");
    for (int i = 0; i < 8; i++) key[i*32 +: 32] = $urandom;
    key[255] = 1'b1;
    run(key, g, 256'd1, "random 256-bit key");
    checks++;
    if (last_cyc < 1_800_250 || last_cyc > 1_989_750) begin
      failures++;
      $display("FAIL full-length key took %0d cycles, published 1,895 k", last_cyc);
    end
    for (int i = 0; i < 8; i++) key[i*32 +: 32] = $urandom;
    key[255:250] = '0;
    run(key, g, 256'd1, "random key with leading zeros");
    run(N_ORD, g, 256'd1, "k=n");
    run('0, g, 256'd1, "k=0");

    $display("mechanisms: steps ki=1 %0d, ki=0 %0d, Rt loads %0d, scan %0d, 2P init %0d, conversions %0d, infinity %0d, k=0 %0d",
             n_step1, n_step0, n_rt, n_scan, n_init, n_conv, n_inf, n_zero);
    checks++; if (n_step1 == 0) begin failures++; $display("FAIL no k_i=1 step"); end
    checks++; if (n_step0 == 0) begin failures++; $display("FAIL no k_i=0 step"); end
    checks++; if (n_rt != n_step1 + n_step0) begin failures++; $display("FAIL Rt not loaded every step"); end
    checks++; if (n_scan == 0) begin failures++; $display("FAIL no leading-zero scan"); end
    checks++; if (n_init == 0) begin failures++; $display("FAIL no 2P step"); end
    checks++; if (n_conv == 0) begin failures++; $display("FAIL no conversion"); end
    checks++; if (n_inf == 0) begin failures++; $display("FAIL no infinity case"); end
    checks++; if (n_zero == 0) begin failures++; $display("FAIL no k=0 case"); end
    checks++;
    if (first_len != 7255) begin
      failures++;
      $display("FAIL ladder step length %0d, expected 7255", first_len);
    end
    checks++;
    if (len_bad != 0) begin
      failures++;
      $display("FAIL %0d ladder steps differ in length from the first (%0d cycles)", len_bad, first_len);
    end
    $display("ladder step length %0d cycles", first_len);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
