// tb_malu: self-checking testbench of the modular ALU.
//
// Drives edge values (0, 1, p-1, values near 2^256) and random reduced
// operands through ADD, SUB and MUL and compares every result with the
// reference arithmetic of secp_ref_pkg (512-bit product and %). It also
// checks the latency of each operation: 2 cycles for ADD/SUB and 513 for
// MUL, counted from the start cycle to the done pulse.
module tb_malu;
  import secp_pkg::*;

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  logic     start = 1'b0;
  malu_op_t op = OP_ADD;
  fe_t      a = '0, b = '0, c;
  logic     done;
  int       checks = 0, failures = 0;

  always #5 clk = ~clk;

  malu dut (.clk, .rst_n, .start, .op, .a, .b, .c, .done);

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fe_t rnd_fe();
    fe_t r;
    for (int i = 0; i < 8; i++) r[i*32 +: 32] = $urandom;
    if (r >= secp_ref_pkg::P) r = r - secp_ref_pkg::P;
    return r;
  endfunction

  task automatic run(malu_op_t o, fe_t x, fe_t y);
    fe_t exp;
    int  cyc, lat;
    unique case (o)
      OP_ADD:  exp = secp_ref_pkg::fadd(x, y);
      OP_SUB:  exp = secp_ref_pkg::fsub(x, y);
      default: exp = secp_ref_pkg::fmul(x, y);
    endcase
    lat = (o == OP_MUL) ? 2 * 256 + 1 : 2;
    @(negedge clk);
    op = o; a = x; b = y; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    a = ~x; b = ~y;            // operands must have been captured
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (c !== exp) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h got %h exp %h", o.name(), x, y, c, exp);
    end
    checks++;
    if (cyc != lat) begin
      failures++;
      $display("FAIL op=%s latency %0d exp %0d", o.name(), cyc, lat);
    end
  endtask

  fe_t edge_v [5];

  initial begin
    edge_v[0] = '0;
    edge_v[1] = 256'd1;
    edge_v[2] = secp_ref_pkg::P - 256'd1;
    edge_v[3] = secp_ref_pkg::P - 256'd2;
    edge_v[4] = 256'd21;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (edge_v[i]) foreach (edge_v[j]) begin
      run(OP_ADD, edge_v[i], edge_v[j]);
      run(OP_SUB, edge_v[i], edge_v[j]);
      run(OP_MUL, edge_v[i], edge_v[j]);
    end
    for (int n = 0; n < 200; n++) begin
      fe_t x, y;
      x = rnd_fe();
      y = rnd_fe();
      run(OP_ADD, x, y);
      run(OP_SUB, x, y);
      if (n < 60) run(OP_MUL, x, y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
