// tb_oeb_cordic_atan -- checks the vectoring CORDIC against $atan2.
//
// Drives points on circles of several radii at angles covering all four
// quadrants (including the axes and the +/-pi seam), plus random points,
// and requires the angle to match $atan2(y, x) within 0.004 rad (wrapping
// the difference into (-pi, pi]).  Combinational block: one check per
// clock period of a local clock, which also drives the watchdog.
module tb_oeb_cordic_atan;
  import oeb_pkg::*;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0;
  fx_t  x, y, angle;
  int   checks = 0, failures = 0;

  oeb_cordic_atan dut (.x, .y, .angle);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t to_fx(input real v);
    return fx_t'(int'($floor(v * 4096.0 + 0.5)));
  endfunction

  task automatic try(input real xv, input real yv);
    real expv, got, d;
    x = to_fx(xv);
    y = to_fx(yv);
    @(posedge clk);
    expv = $atan2(real'(y), real'(x));
    got  = real'(angle) / 4096.0;
    d = got - expv;
    if (d > PI)  d -= 2.0 * PI;
    if (d < -PI) d += 2.0 * PI;
    checks++;
    if (d > 0.004 || d < -0.004) begin
      failures++;
      $display("FAIL x=%f y=%f angle=%f expected=%f", xv, yv, got, expv);
    end
  endtask

  initial begin
    for (int r = 0; r < 4; r++) begin
      real rad;
      rad = (r == 0) ? 0.05 : (r == 1) ? 0.3 : (r == 2) ? 1.0 : 3.0;
      for (int a = -180; a <= 180; a += 5)
        try(rad * $cos(a * PI / 180.0), rad * $sin(a * PI / 180.0));
    end
    for (int i = 0; i < 500; i++)
      try((real'($urandom_range(0, 8000)) - 4000.0) / 1000.0,
          (real'($urandom_range(0, 8000)) - 4000.0) / 1000.0 + 0.001);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
