// tb_passband: passband of the lock-in at 10 MHz with a 1 ms time constant,
// the setting of the 10 MHz passband measurement the design was built for.
//
// The whole design runs at its default parameters. The input is a sine at
// 10 MHz + df for several offsets df. After the filter has settled, the
// demodulated vector turns at df and its magnitude is constant:
//   R(df) = R(0) * |H(df)|,  H the single-pole filter
//   |H| = alpha / |1 - (1 - alpha) * exp(-j*2*pi*df/f_clk)|
// R is read from DAC A (R >> 14, gain 1) at the end of each point, and
// its spread over the last 2000 cycles must be small (no ripple).
module tb_passband;
  import lia_pkg::*;
  localparam real TWO_PI = 6.283185307179586;
  localparam real F_CLK = 125.0e6;
  localparam logic [31:0] FTW_10M = 32'd343_597_384;
  localparam logic [31:0] ALPHA_1MS = 32'd34_360;
  localparam real AMP = 6000.0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic signed [13:0] adc_a, adc_b, dac_a, dac_b;
  logic dac_a_sat, dac_b_sat, bus_we, mem_valid, mem_ready;
  logic [7:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata, mem_addr, mem_data;

  lia_top dut (.*);
  assign mem_ready = 1'b1;
  assign adc_b = '0;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] ftw_in = 0, acc = 0;
  always @(negedge clk) begin
    acc   <= acc + ftw_in;
    adc_a <= 14'($rtoi($floor(AMP * $sin(TWO_PI * real'(acc) / 4294967296.0) + 0.5)));
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  function automatic real h_mag(input real df);
    real a, w, re, im;
    a  = real'(ALPHA_1MS) / 4294967296.0;
    w  = TWO_PI * df / F_CLK;
    re = 1.0 - (1.0 - a) * $cos(w);
    im = (1.0 - a) * $sin(w);
    return a / $sqrt(re * re + im * im);
  endfunction

  initial begin
    static int offsets [6] = '{0, 50, 159, 300, 1000, 2600};
    real r0;
    bus_we = 0; bus_addr = 0; bus_wdata = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    wr(REG_FTW_START, FTW_10M);
    wr(REG_FTW_STOP, FTW_10M);
    wr(REG_ALPHA, ALPHA_1MS);
    wr(REG_DAC_A, {5'd0, 11'd1, 13'd0, 3'(SRC_R)});
    r0 = AMP * 32767.0 / 2.0 / 16384.0;
    foreach (offsets[k]) begin
      logic [31:0] dftw;
      real df, expect_r, mn, mx;
      dftw   = 32'($rtoi(real'(offsets[k]) * 4294967296.0 / F_CLK + 0.5));
      df     = real'(dftw) * F_CLK / 4294967296.0;
      ftw_in = FTW_10M + dftw;
      repeat (750_000) @(negedge clk);        // 6 time constants
      mn = 1.0e9; mx = -1.0e9;
      repeat (2000) begin
        @(negedge clk);
        if (real'(dac_a) < mn) mn = real'(dac_a);
        if (real'(dac_a) > mx) mx = real'(dac_a);
      end
      expect_r = r0 * h_mag(df);
      $display("df = %7.1f Hz  R = %6.1f .. %6.1f LSB  expected %6.1f (|H| = %5.3f)",
               df, mn, mx, expect_r, h_mag(df));
      check(mx - expect_r < 0.02 * r0 + 2.0 && expect_r - mn < 0.02 * r0 + 2.0,
            $sformatf("df=%f: R %f..%f expected %f", df, mn, mx, expect_r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
