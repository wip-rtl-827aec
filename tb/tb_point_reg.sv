// tb_point_reg: self-checking testbench of the 3 x 256 point register.
//
// Writes random points with every combination of the three word enables and
// checks after each clock that exactly the enabled words changed, against a
// model kept by the testbench. Also checks the reset value.
module tb_point_reg;
  import secp_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic [2:0] we = '0;
  point_t     d = '0, q, model;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  point_reg dut (.clk, .rst_n, .we, .d, .q);

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fe_t rnd();
    fe_t r;
    for (int i = 0; i < 8; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (q != '0) begin
      failures++;
      $display("FAIL reset value");
    end
    rst_n = 1'b1;
    model = '0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      d  = '{x: rnd(), y: rnd(), z: rnd()};
      we = 3'(n % 8);
      if (we[0]) model.x = d.x;
      if (we[1]) model.y = d.y;
      if (we[2]) model.z = d.z;
      @(negedge clk);
      we = '0;
      checks++;
      if (q != model) begin
        failures++;
        $display("FAIL write %0d we=%b", n, 3'(n % 8));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
