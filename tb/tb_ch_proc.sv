// tb_ch_proc: checks one demodulation channel end to end.
// The testbench makes its own sine/cosine reference and an input
// A*sin(wt + p) at f_clk/8 for several phases p, with a fast filter
// (alpha = 1/256). After settling it checks X = A*32767/2*cos(p),
// Y = A*32767/2*sin(p), R and phi against the same numbers, and R and phi
// against sqrt/atan2 of the X and Y it outputs. It also checks the
// CORDIC_STAGES+4 cycle latency from en to valid_o and that en low clears
// the channel.
module tb_ch_proc;
  import lia_pkg::*;
  localparam int unsigned STAGES = 24;
  localparam real TWO_PI = 6.283185307179586;
  localparam real A = 4000.0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic en;
  logic [31:0] alpha;
  logic signed [13:0] adc_i;
  logic signed [15:0] sin_i, cos_i;
  lia_out_t res_o;
  logic valid_o;

  ch_proc #(.CORDIC_STAGES(STAGES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real p = 0.0;
  int  n = 0;
  always @(negedge clk) begin
    real th;
    th = TWO_PI * real'(n % 8) / 8.0;
    sin_i <= 16'($rtoi($floor(32767.0 * $sin(th) + 0.5)));
    cos_i <= 16'($rtoi($floor(32767.0 * $cos(th) + 0.5)));
    adc_i <= 14'($rtoi($floor(A * $sin(th + p) + 0.5)));
    n++;
  end

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real wrap_turns(input real t);
    real r = t;
    while (r > 0.5)  r -= 1.0;
    while (r < -0.5) r += 1.0;
    return r;
  endfunction

  initial begin
    static real phases [5] = '{0.0, 0.3, 2.0, -2.5, -1.2};
    int lat;
    en = 0; alpha = 32'd1 << 24; sin_i = 0; cos_i = 0; adc_i = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    en = 1;
    lat = 0;
    while (!valid_o && lat < 100) begin @(negedge clk); lat++; end
    check(lat == STAGES + 4, $sformatf("latency en->valid %0d expected %0d", lat, STAGES + 4));
    foreach (phases[k]) begin
      real ex, ey, er, ephi, tol;
      p = phases[k];
      repeat (6000) @(negedge clk);
      ex = A * 32767.0 / 2.0 * $cos(p);
      ey = A * 32767.0 / 2.0 * $sin(p);
      er = A * 32767.0 / 2.0;
      ephi = p / TWO_PI;
      tol = 0.01 * er;
      check(valid_o, "valid while enabled");
      check(fabs(real'(res_o.x) - ex) < tol, $sformatf("p=%f X=%0d expected %f", p, res_o.x, ex));
      check(fabs(real'(res_o.y) - ey) < tol, $sformatf("p=%f Y=%0d expected %f", p, res_o.y, ey));
      check(fabs(real'(res_o.r) - er) < tol, $sformatf("p=%f R=%0d expected %f", p, res_o.r, er));
      check(fabs(wrap_turns(real'(res_o.phi) / 4294967296.0 - ephi)) < 0.003,
            $sformatf("p=%f phi=%0d expected %f turns", p, res_o.phi, ephi));
      // R and phi of the very X and Y given out with them.
      for (int s = 0; s < 50; s++) begin
        real mr, mphi;
        @(negedge clk);
        mr   = $sqrt(real'(res_o.x) * real'(res_o.x) + real'(res_o.y) * real'(res_o.y));
        mphi = $atan2(real'(res_o.y), real'(res_o.x)) / TWO_PI;
        check(fabs(real'(res_o.r) - mr) < 8.0 + mr * 1e-6,
              $sformatf("R=%0d against sqrt(X^2+Y^2)=%f", res_o.r, mr));
        check(fabs(wrap_turns(real'(res_o.phi) / 4294967296.0 - mphi)) < 1e-6,
              $sformatf("phi=%0d against atan2(Y,X)=%f", res_o.phi, mphi));
      end
    end
    // Disable.
    en = 0;
    repeat (STAGES + 6) @(negedge clk);
    check(!valid_o, "valid falls after en low");
    check(res_o.x == 0 && res_o.y == 0 && res_o.r == 0, "disabled channel reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
