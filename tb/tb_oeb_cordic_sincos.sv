// tb_oeb_cordic_sincos -- checks the rotation CORDIC against $cos/$sin.
//
// Sweeps the angle over [-pi, pi] in steps of 1 degree plus random angles,
// and requires cos and sin to match within 0.003 (about 12 LSB of the
// 12-bit fraction).  One check pair per period of a local clock, which also
// drives the watchdog.
module tb_oeb_cordic_sincos;
  import oeb_pkg::*;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0;
  fx_t  angle, cos_o, sin_o;
  int   checks = 0, failures = 0;

  oeb_cordic_sincos dut (.angle, .cos_o, .sin_o);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input real a);
    real c, s, ar;
    angle = fx_t'(int'($floor(a * 4096.0 + 0.5)));
    @(posedge clk);
    ar = real'(angle) / 4096.0;
    c = real'(cos_o) / 4096.0;
    s = real'(sin_o) / 4096.0;
    checks += 2;
    if (c - $cos(ar) > 0.003 || c - $cos(ar) < -0.003) begin
      failures++;
      $display("FAIL cos(%f) = %f, expected %f", ar, c, $cos(ar));
    end
    if (s - $sin(ar) > 0.003 || s - $sin(ar) < -0.003) begin
      failures++;
      $display("FAIL sin(%f) = %f, expected %f", ar, s, $sin(ar));
    end
  endtask

  initial begin
    for (int d = -180; d <= 180; d++) try(d * PI / 180.0 * 0.99999);
    for (int i = 0; i < 300; i++)
      try((real'($urandom_range(0, 20000)) / 10000.0 - 1.0) * PI * 0.9999);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
