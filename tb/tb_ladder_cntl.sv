// tb_ladder_cntl: self-checking testbench of the ladder controller.
//
// The point adders and the inversion unit are replaced by counters that
// answer pa_start with pa_done after PA_CYC cycles and bia_start with
// bia_done after BIA_CYC cycles. For random 16-bit keys the testbench
// records what the controller does and checks it against the key:
// one load of P, one initial step with init set, then one step per bit
// below the leading one with ki equal to that bit (held for the whole step),
// R0, R1 and Rt all enabled together at the end of every step, one
// conversion, one done; k = 0 must end with err and no step. Every step
// must take the same number of cycles whatever its key bit.
module tb_ladder_cntl;

  localparam int KB      = 16;
  localparam int PA_CYC  = 7;
  localparam int BIA_CYC = 5;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          start = 1'b0;
  logic [KB-1:0] k = '0;
  logic          pa_done = 1'b0, bia_done = 1'b0, bia_fail = 1'b0;
  logic          load_p, pa_start, ki, init, r0_we, r1_we, rt_we;
  logic          bia_start, bia_active, busy, done, err;
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  ladder_cntl #(.KEY_BITS(KB)) dut (.clk, .rst_n, .start, .k, .pa_done, .bia_done,
    .bia_fail, .load_p, .pa_start, .ki, .init, .r0_we, .r1_we, .rt_we,
    .bia_start, .bia_active, .busy, .done, .err);

  // stand-ins for the adders and the inversion unit
  int pa_cnt = -1, bia_cnt = -1;
  always_ff @(posedge clk) begin
    pa_done  <= 1'b0;
    bia_done <= 1'b0;
    if (pa_start) pa_cnt <= PA_CYC;
    else if (pa_cnt > 0) pa_cnt <= pa_cnt - 1;
    if (pa_cnt == 1) pa_done <= 1'b1;
    if (bia_start) bia_cnt <= BIA_CYC;
    else if (bia_cnt > 0) bia_cnt <= bia_cnt - 1;
    if (bia_cnt == 1) bia_done <= 1'b1;
  end

  // observation
  int   n_load, n_init, n_steps, n_conv, n_done, step_len, first_len;
  logic seq [$];
  logic cur_ki, in_step, len_bad, ki_bad, we_bad;
  always_ff @(posedge clk) begin
    if (load_p) n_load <= n_load + 1;
    if (bia_start) n_conv <= n_conv + 1;
    if (done) n_done <= n_done + 1;
    if (r0_we != rt_we || (r0_we && !r1_we)) we_bad <= 1'b1;
    if (pa_start) begin
      if (init) n_init <= n_init + 1;
      else begin
        n_steps <= n_steps + 1;
        seq.push_back(ki);
      end
      cur_ki   <= ki;
      in_step  <= !init;
      step_len <= 1;
    end else if (in_step) begin
      step_len <= step_len + 1;
      if (ki != cur_ki) ki_bad <= 1'b1;
      if (r0_we) begin
        in_step <= 1'b0;
        if (first_len == 0) first_len <= step_len + 1;
        else if (first_len != step_len + 1) len_bad <= 1'b1;
      end
    end
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(logic [KB-1:0] key);
    int msb;
    @(negedge clk);
    n_load = 0; n_init = 0; n_steps = 0; n_conv = 0; n_done = 0;
    seq.delete();
    in_step = 1'b0; ki_bad = 1'b0; len_bad = 1'b0; we_bad = 1'b0; first_len = 0;
    k = key;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    k = ~key;                     // the key must have been captured
    while (!done) @(negedge clk);
    @(negedge clk);
    msb = -1;
    for (int i = 0; i < KB; i++) if (key[i]) msb = i;
    checks++;
    if (key == '0) begin
      if (!err || n_steps != 0 || n_init != 0) begin
        failures++;
        $display("FAIL k=0: err=%0d steps=%0d", err, n_steps);
      end
      return;
    end
    if (err || n_load != 1 || n_init != 1 || n_conv != 1 || n_done != 1 || n_steps != msb) begin
      failures++;
      $display("FAIL k=%h: err=%0d load=%0d init=%0d conv=%0d done=%0d steps=%0d exp %0d",
               key, err, n_load, n_init, n_conv, n_done, n_steps, msb);
    end
    checks++;
    for (int i = 0; i < msb && i < seq.size(); i++) begin
      if (seq[i] != key[msb-1-i]) begin
        failures++;
        $display("FAIL k=%h: step %0d ki=%0d exp %0d", key, i, seq[i], key[msb-1-i]);
        break;
      end
    end
    checks++;
    if (ki_bad || len_bad || we_bad) begin
      failures++;
      $display("FAIL k=%h: ki_bad=%0d len_bad=%0d we_bad=%0d", key, ki_bad, len_bad, we_bad);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(16'h0001);
    run(16'h8000);
    run(16'hFFFF);
    run(16'hA5C3);
    run(16'h0000);
    run(16'h0100);
    for (int n = 0; n < 30; n++) run(KB'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
