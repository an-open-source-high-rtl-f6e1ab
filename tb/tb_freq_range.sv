// tb_freq_range: demodulation across the working band, 10 kHz to 50 MHz,
// with the shortest usable time constant for each frequency.
//
// The whole design runs at its default parameters. Single-output mode puts
// the reference sine on DAC B, and the testbench loops DAC B back into
// ADC A through one register, the way a cable from OUT2 to IN1 would
// (without the analog band limit of the real converters). For each
// frequency the filter is set to the minimum time constant of the
// time-constant table (1 ms at 10 kHz down to 10 us at 1 MHz); above
// 1 MHz the table's values lie below the 9 us floor, so the written alpha
// must read back clamped to ALPHA_MAX. After eight time constants:
//   * R (DAC A, R >> 14) must equal the looped-back amplitude, within 2 %,
//     at every frequency: the digital chain is flat up to 50 MHz;
//   * phi (DAC A, phi >> 18, +-8192 = +-pi) must follow a pure delay of
//     a whole number of cycles: phi(f) = phi(f0) + D*2*pi*(f - f0)/f_clk.
//     D is fitted from the 10 kHz and 1 MHz points and then checked at
//     every other frequency to within 0.01 rad.
// Means are taken over whole periods of the ripple at twice the reference
// frequency, which the single-pole filter leaves at about 1 %.
module tb_freq_range;
  import lia_pkg::*;
  localparam real PI = 3.141592653589793;
  localparam real F_CLK = 125.0e6;
  localparam int NF = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic signed [13:0] adc_a, adc_b, dac_a, dac_b;
  logic dac_a_sat, dac_b_sat, bus_we, mem_valid, mem_ready;
  logic [7:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata, mem_addr, mem_data;

  lia_top dut (.*);
  assign mem_ready = 1'b1;
  assign adc_b = '0;
  always_ff @(posedge clk) adc_a <= dac_b;   // DAC B -> ADC A loopback

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a;
    #1 d = bus_rdata;
  endtask

  // Wrap an angle into (-pi, pi].
  function automatic real wrap(input real a);
    real w;
    w = a;
    while (w > PI) w = w - 2.0 * PI;
    while (w <= -PI) w = w + 2.0 * PI;
    return w;
  endfunction

  // Mean of DAC A over n cycles, and its spread.
  task automatic sample_dac_a(input int n, output real mean, output real spread);
    real sum, mn, mx;
    sum = 0.0; mn = 1.0e9; mx = -1.0e9;
    repeat (n) begin
      @(negedge clk);
      sum = sum + real'(dac_a);
      if (real'(dac_a) < mn) mn = real'(dac_a);
      if (real'(dac_a) > mx) mx = real'(dac_a);
    end
    mean = sum / real'(n);
    spread = mx - mn;
  endtask

  initial begin
    // Demodulation frequency and the table's minimum time constant.
    static real freq [NF] = '{10.0e3, 100.0e3, 500.0e3, 1.0e6, 10.0e6, 50.0e6};
    static real tau  [NF] = '{1.0e-3, 1.0e-4,  2.0e-5,  1.0e-5, 1.0e-6, 1.0e-6};
    real f_act [NF];
    real phi_m [NF];
    real r_exp, w0, d_fit, pred;
    int  d_int;
    bus_we = 0; bus_addr = 0; bus_wdata = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wr(REG_CTRL, 32'd0);                           // single input, single output
    wr(REG_REF_AMP, 32'h4000);                     // half-scale reference
    r_exp = 16383.0 / 4.0 * 32767.0 / 32768.0;     // DAC B amplitude, then R

    for (int k = 0; k < NF; k++) begin
      logic [31:0] ftw, alpha_w, alpha_rd;
      real r_mean, r_spread, p_mean, p_spread, t_eff;
      int  settle, n_avg;
      ftw      = 32'($rtoi(freq[k] * 4294967296.0 / F_CLK + 0.5));
      f_act[k] = real'(ftw) * F_CLK / 4294967296.0;
      alpha_w  = 32'($rtoi(4294967296.0 / (tau[k] * F_CLK) + 0.5));
      wr(REG_FTW_START, ftw);
      wr(REG_FTW_STOP, ftw);
      wr(REG_ALPHA, alpha_w);
      rd(REG_ALPHA, alpha_rd);
      check(alpha_rd == ((alpha_w > ALPHA_MAX) ? ALPHA_MAX : alpha_w),
            $sformatf("alpha %0d read back as %0d", alpha_w, alpha_rd));
      t_eff  = 4294967296.0 / real'(alpha_rd);     // time constant in cycles
      settle = $rtoi(8.0 * t_eff) + 200;
      wr(REG_DAC_A, {5'd0, 11'd1, 13'd0, 3'(SRC_R)});
      // Average over whole periods of the 2f mixing ripple, at least 2000 cycles.
      n_avg  = $rtoi(F_CLK / (2.0 * f_act[k]) * $ceil(2000.0 * 2.0 * f_act[k] / F_CLK) + 0.5);
      repeat (settle) @(negedge clk);
      sample_dac_a(n_avg, r_mean, r_spread);
      wr(REG_DAC_A, {5'd0, 11'd1, 13'd0, 3'(SRC_PHI)});
      repeat (4) @(negedge clk);
      sample_dac_a(n_avg, p_mean, p_spread);
      phi_m[k] = p_mean * PI / 8192.0;
      $display("f = %10.1f Hz  tau = %7.1f us  R = %7.1f (spread %4.0f)  phi = %8.4f rad (spread %4.0f LSB)",
               f_act[k], t_eff / 125.0, r_mean, r_spread, phi_m[k], p_spread);
      check(r_mean > 0.98 * r_exp && r_mean < 1.02 * r_exp,
            $sformatf("f=%f: R %f, expected %f", f_act[k], r_mean, r_exp));
      check(r_spread < 0.04 * r_exp,
            $sformatf("f=%f: R ripple %f", f_act[k], r_spread));
      check(p_spread < 200.0,
            $sformatf("f=%f: phi spread %f LSB", f_act[k], p_spread));
    end

    // Phase: a pure delay of d_int whole cycles through DDS, DAC, ADC and mixer.
    w0 = 2.0 * PI * f_act[0] / F_CLK;
    d_fit = wrap(phi_m[3] - phi_m[0]) / (2.0 * PI * f_act[3] / F_CLK - w0);
    d_int = $rtoi(d_fit + ((d_fit < 0.0) ? -0.5 : 0.5));
    $display("fitted loop delay %f cycles", d_fit);
    check(d_fit - real'(d_int) < 0.1 && real'(d_int) - d_fit < 0.1,
          $sformatf("loop delay %f is not a whole number of cycles", d_fit));
    for (int k = 1; k < NF; k++) begin
      pred = phi_m[0] + real'(d_int) * (2.0 * PI * f_act[k] / F_CLK - w0);
      check(wrap(phi_m[k] - pred) < 0.01 && wrap(phi_m[k] - pred) > -0.01,
            $sformatf("f=%f: phi %f, expected %f", f_act[k], phi_m[k], wrap(pred)));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
