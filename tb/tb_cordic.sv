// tb_cordic: checks both CORDIC modes against real-number arithmetic.
// Vectoring: random vectors in all four quadrants; |v|*K and atan2 must match
// within a few LSBs. Rotation: random angles applied to (K*A, 0) must give
// A*cos and A*sin. Also checks the STAGES+1 latency of valid.
module tb_cordic;
  import lia_pkg::*;
  localparam int unsigned W = 32, STAGES = 24;
  localparam real TWO_PI = 6.283185307179586;
  localparam real K = 0.6072529350088814;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic vi;
  logic signed [W-1:0] xi, yi;
  logic [31:0] zi;
  logic vo_v, vo_r;
  logic signed [W+1:0] xv, yv, xr, yr;
  logic [31:0] zv, zr;

  cordic #(.W(W), .STAGES(STAGES), .VECTOR(1'b1)) u_vec (
    .clk, .rst_n, .valid_i(vi), .x_i(xi), .y_i(yi), .z_i(32'd0),
    .valid_o(vo_v), .x_o(xv), .y_o(yv), .z_o(zv));
  cordic #(.W(W), .STAGES(STAGES), .VECTOR(1'b0)) u_rot (
    .clk, .rst_n, .valid_i(vi), .x_i(xi), .y_i(32'sd0), .z_i(zi),
    .valid_o(vo_r), .x_o(xr), .y_o(yr), .z_o(zr));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int N = 200;
  real ex_mag[N], ex_ang[N];
  bit  streaming = 1'b0;

  function automatic real wrap_turns(input real t);
    real r = t;
    while (r > 0.5)  r -= 1.0;
    while (r < -0.5) r += 1.0;
    return r;
  endfunction

  initial begin
    int lat;
    vi = 0; xi = 0; yi = 0; zi = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Latency: one valid pulse.
    @(negedge clk); vi = 1; xi = 1000; yi = 0; zi = 0;
    @(negedge clk); vi = 0;
    lat = 1;
    while (!vo_v && lat < 100) begin @(negedge clk); lat++; end
    check(lat == STAGES + 1, $sformatf("vectoring latency %0d, expected %0d", lat, STAGES + 1));
    repeat (40) @(negedge clk);
    streaming = 1'b1;
    // Streams: one vector per cycle, both modes share x_i.
    for (int i = 0; i < N; i++) begin
      real m, ang;
      logic signed [W-1:0] xx, yy;
      m   = 1.0e8 * (0.05 + 0.95 * ($urandom % 10000) / 10000.0);
      ang = TWO_PI * ($urandom % 100000) / 100000.0;
      xx  = $rtoi(m * $cos(ang));
      yy  = $rtoi(m * $sin(ang));
      ex_mag[i] = $sqrt(real'(xx) * real'(xx) + real'(yy) * real'(yy));
      ex_ang[i] = $atan2(real'(yy), real'(xx)) / TWO_PI;
      @(negedge clk);
      vi = 1; xi = xx; yi = yy; zi = 32'($rtoi(ang / TWO_PI * 4294967296.0 - ((ang >= TWO_PI/2) ? 4294967296.0 : 0.0)));
    end
    @(negedge clk); vi = 0;
    repeat (STAGES + 5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Vectoring results.
  int nv = 0;
  always @(posedge clk) if (rst_n && vo_v && streaming && nv < N) begin
    real mag, ang_err;
    mag = real'(xv) * K;
    ang_err = wrap_turns(real'(zv) / 4294967296.0 - ex_ang[nv]);
    check(mag - ex_mag[nv] < 8.0 && ex_mag[nv] - mag < 8.0 + ex_mag[nv] * 1e-7,
          $sformatf("vector %0d magnitude %f expected %f", nv, mag, ex_mag[nv]));
    check(ang_err < 1e-6 && ang_err > -1e-6,
          $sformatf("vector %0d angle error %e turns", nv, ang_err));
    nv++;
  end

  // Rotation results: x_i was the magnitude m (not pre-scaled), so the
  // output is m/K*cos and m/K*sin.
  int nr = 0;
  always @(posedge clk) if (rst_n && vo_r && streaming && nr < N) begin
    real ec, es, tol;
    ec = ex_mag_x(nr) * $cos(ex_ang_rot(nr)) / K;
    es = ex_mag_x(nr) * $sin(ex_ang_rot(nr)) / K;
    tol = 16.0 + ex_mag[nr] * 2e-6;
    check(real'(xr) - ec < tol && ec - real'(xr) < tol, $sformatf("rotation %0d cos %0d expected %f", nr, xr, ec));
    check(real'(yr) - es < tol && es - real'(yr) < tol, $sformatf("rotation %0d sin %0d expected %f", nr, yr, es));
    nr++;
  end

  // Rotation inputs kept separately.
  real rot_x[N], rot_a[N];
  int ni = 0;
  always @(posedge clk) if (rst_n && vi && streaming && ni < N) begin
    rot_x[ni] = real'(xi);
    rot_a[ni] = real'(zi) / 4294967296.0 * TWO_PI;
    ni++;
  end
  function automatic real ex_mag_x(input int i); return rot_x[i]; endfunction
  function automatic real ex_ang_rot(input int i); return rot_a[i]; endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
