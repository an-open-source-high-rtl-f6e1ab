// tb_lia_top: end-to-end test of the lock-in amplifier at its default
// parameters (65 MB buffer, 18/24 CORDIC stages).
//
// The testbench plays the ADCs (sines computed here from their own phase
// accumulators), the processor software (register writes over the bus) and
// the RAM (a random-ready write port). Phases:
//  1. Power-on settings (500 kHz, 1 ms time constant, 20 kS/s set rate):
//     record 16 words and check R of both channels from the RAM.
//  2. 5 MHz reference, 10 us time constant: R of both channels, the phase
//     difference between the channels, X/Y/R/phi consistency, DAC A code.
//  3. A 6 MHz input against the 5 MHz reference is rejected.
//  4. Single-input mode: 4-word frames, channel B idle.
//  5. Single-output mode: DAC B carries the reference.
//  6. DAC multiplier 2000: DAC A saturates.
//  7. A fast set rate: frames dropped and counted as overruns.
//  8. Frequency sweep: the tuning word steps and wraps.
// Every mechanism must be seen at least once.
module tb_lia_top;
  import lia_pkg::*;
  localparam real TWO_PI = 6.283185307179586;
  localparam real HALF = 32767.0 / 2.0;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam logic [31:0] FTW_500K = 32'd17_179_869;
  localparam logic [31:0] FTW_5M   = 32'd171_798_692;
  localparam logic [31:0] FTW_6M   = 32'd206_158_430;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic signed [13:0] adc_a, adc_b;
  logic signed [13:0] dac_a, dac_b;
  logic dac_a_sat, dac_b_sat;
  logic bus_we;
  logic [7:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic mem_valid, mem_ready;
  logic [31:0] mem_addr, mem_data;

  lia_top dut (.*);
  ram_model #(.READY_PCT(80)) u_ram (.clk, .valid(mem_valid), .addr(mem_addr), .data(mem_data), .ready(mem_ready));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic real wrap_turns(input real t);
    real r = t;
    while (r > 0.5)  r -= 1.0;
    while (r < -0.5) r += 1.0;
    return r;
  endfunction

  // ADC sources.
  real amp_a = 0.0, amp_b = 0.0, ph_a = 0.0, ph_b = 0.0;
  logic [31:0] ftw_a = 0, ftw_b = 0, acc_a = 0, acc_b = 0;
  always @(negedge clk) begin
    acc_a <= acc_a + ftw_a;
    acc_b <= acc_b + ftw_b;
    adc_a <= 14'($rtoi($floor(amp_a * $sin(TWO_PI * real'(acc_a) / 4294967296.0 + ph_a) + 0.5)));
    adc_b <= 14'($rtoi($floor(amp_b * $sin(TWO_PI * real'(acc_b) / 4294967296.0 + ph_b) + 0.5)));
  end

  // Register bus.
  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a;
    #1 d = bus_rdata;
  endtask

  // Mechanism counters.
  int n_overrun = 0, n_sweep_wrap = 0, n_single_in = 0, n_single_out = 0;
  int n_sat = 0, n_stall = 0, n_reject = 0, n_done = 0;

  always @(posedge clk) if (dac_a_sat) n_sat++;

  // Record len words and wait for the end.
  task automatic record(input int len);
    logic [31:0] st;
    u_ram.clear();
    wr(REG_REC_LEN, len);
    rd(REG_CTRL, st);
    wr(REG_CTRL, st | 32'h8);
    do rd(REG_STATUS, st); while (st[0]);
    if (st[1]) n_done++;
    check(st[1], "recording done");
    n_stall += u_ram.stalls;
  endtask

  function automatic real word(input int i);
    return real'($signed(u_ram.read(BASE + 4 * i)));
  endfunction
  function automatic real uword(input int i);
    return real'(u_ram.read(BASE + 4 * i));
  endfunction

  initial begin
    logic [31:0] v;
    bus_we = 0; bus_addr = 0; bus_wdata = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;

    // 1. Power-on settings.
    amp_a = 2000.0; amp_b = 1000.0; ftw_a = FTW_500K; ftw_b = FTW_500K;
    repeat (700_000) @(negedge clk);          // 5.6 time constants
    record(16);
    for (int f = 0; f < 2; f++) begin
      check(fabs(uword(8 * f + 2) - 2000.0 * HALF) < 0.02 * 2000.0 * HALF,
            $sformatf("defaults: frame %0d R_A %f expected %f", f, uword(8 * f + 2), 2000.0 * HALF));
      check(fabs(uword(8 * f + 6) - 1000.0 * HALF) < 0.02 * 1000.0 * HALF,
            $sformatf("defaults: frame %0d R_B %f expected %f", f, uword(8 * f + 6), 1000.0 * HALF));
    end
    check(u_ram.writes == 16, "defaults: 16 words written");

    // The cycle counter runs at the clock rate.
    begin
      logic [31:0] t0, t1;
      rd(REG_TIME, t0);
      repeat (99) @(negedge clk);
      rd(REG_TIME, t1);
      check(t1 - t0 == 100, $sformatf("time count advances once per clock (%0d)", t1 - t0));
    end

    // 2. 5 MHz, 10 us.
    wr(REG_FTW_START, FTW_5M);
    wr(REG_FTW_STOP, FTW_5M);
    wr(REG_ALPHA, 32'd3_436_000);             // tau ~ 10 us
    wr(REG_REC_DIV, 32'd200);
    amp_a = 3000.0; amp_b = 1500.0; ph_a = 0.0; ph_b = 1.0;
    ftw_a = FTW_5M; ftw_b = FTW_5M;
    wr(REG_DAC_A, {5'd0, 11'd1, 13'd0, 3'(SRC_R)});
    wr(REG_DAC_B, {5'd0, 11'd1, 13'd0, 3'(SRC_R)});
    repeat (20_000) @(negedge clk);
    record(64);
    for (int f = 0; f < 8; f++) begin
      real xa, ya, ra, pa, xb, yb, rb, pb;
      xa = word(8*f); ya = word(8*f+1); ra = uword(8*f+2); pa = word(8*f+3) / 4294967296.0;
      xb = word(8*f+4); yb = word(8*f+5); rb = uword(8*f+6); pb = word(8*f+7) / 4294967296.0;
      check(fabs(ra - 3000.0 * HALF) < 0.02 * 3000.0 * HALF, $sformatf("5 MHz: R_A %f", ra));
      check(fabs(rb - 1500.0 * HALF) < 0.02 * 1500.0 * HALF, $sformatf("5 MHz: R_B %f", rb));
      check(fabs(wrap_turns(pb - pa) - 1.0 / TWO_PI) < 0.005,
            $sformatf("5 MHz: phase B-A %f turns expected %f", wrap_turns(pb - pa), 1.0 / TWO_PI));
      check(fabs(ra - $sqrt(xa * xa + ya * ya)) < 16.0, "R_A = sqrt(X^2+Y^2)");
      check(fabs(wrap_turns(pa - $atan2(ya, xa) / TWO_PI)) < 1e-5, "phi_A = atan2(Y,X)");
    end
    check(dac_a > 2950 && dac_a < 3050, $sformatf("DAC A shows R_A >> 14 (%0d)", dac_a));
    check(dac_b > 1470 && dac_b < 1530, $sformatf("DAC B shows R_B >> 14 (%0d)", dac_b));

    // 3. Off-frequency input is rejected.
    ftw_b = FTW_6M;
    repeat (20_000) @(negedge clk);
    check(dac_b < 30, $sformatf("6 MHz input on a 5 MHz reference rejected (DAC B %0d)", dac_b));
    if (dac_b < 30) n_reject++;
    check(dac_a > 2950 && dac_a < 3050, "channel A unaffected");
    ftw_b = FTW_5M;

    // 4. Single-input mode.
    wr(REG_CTRL, 32'b010);
    repeat (2_000) @(negedge clk);
    record(8);
    check(fabs(uword(2) - 3000.0 * HALF) < 0.02 * 3000.0 * HALF &&
          fabs(uword(6) - 3000.0 * HALF) < 0.02 * 3000.0 * HALF,
          "single input: two 4-word frames of channel A");
    check(dac_b == 0, $sformatf("single input: channel B idle (DAC B %0d)", dac_b));
    if (dac_b == 0 && u_ram.writes == 8) n_single_in++;

    // 5. Single-output mode: DAC B gives the reference.
    wr(REG_CTRL, 32'b001);
    begin
      int mx, mn;
      mx = -9000; mn = 9000;
      repeat (5) @(negedge clk);
      repeat (200) begin
        @(negedge clk);
        if (int'(dac_b) > mx) mx = int'(dac_b);
        if (int'(dac_b) < mn) mn = int'(dac_b);
      end
      check(mx > 8000 && mn < -8000, $sformatf("single output: reference on DAC B (%0d..%0d)", mn, mx));
      if (mx > 8000 && mn < -8000) n_single_out++;
    end
    wr(REG_REF_AMP, 32'h2000);
    begin
      int mx;
      mx = -9000;
      repeat (5) @(negedge clk);
      repeat (200) begin
        @(negedge clk);
        if (int'(dac_b) > mx) mx = int'(dac_b);
      end
      check(mx > 1950 && mx < 2100, $sformatf("reference amplitude 1/4 (%0d)", mx));
    end
    wr(REG_CTRL, 32'b011);

    // 6. DAC saturation.
    wr(REG_DAC_A, {5'd0, 11'd2000, 13'd0, 3'(SRC_R)});
    repeat (10) @(negedge clk);
    check(dac_a == 8191 && dac_a_sat, $sformatf("gain 2000 saturates DAC A (%0d)", dac_a));

    // 7. Overruns.
    wr(REG_REC_DIV, 32'd4);
    record(64);
    rd(REG_OVERRUNS, v);
    check(v > 0, $sformatf("overruns counted at 4 cycles per 8-word frame (%0d)", v));
    n_overrun += v;
    rd(REG_WORDS, v);
    check(v == 64, "64 words recorded despite overruns");

    // 8. Sweep from 4 to 6 MHz.
    wr(REG_FTW_START, 32'd137_438_953);
    wr(REG_FTW_STOP,  32'd206_158_430);
    wr(REG_FTW_STEP,  32'd6_871_948);          // 200 kHz steps
    wr(REG_SWEEP_DIV, 32'd50);
    wr(REG_CTRL, 32'b111);
    begin
      logic [31:0] prev;
      int ups;
      prev = 0; ups = 0;
      for (int i = 0; i < 1200; i++) begin
        rd(REG_FTW_NOW, v);
        if (i > 0 && v > prev) ups++;
        if (i > 0 && v < prev) begin
          n_sweep_wrap++;
          check(v == 32'd137_438_953, "sweep returns to the start word");
        end
        check(v >= 32'd137_438_953 && v <= 32'd206_158_430, "tuning word within the sweep");
        prev = v;
      end
      check(ups >= 20, $sformatf("sweep steps up (%0d)", ups));
    end

    check(n_overrun > 0,    "mechanism: overrun");
    check(n_sweep_wrap > 0, "mechanism: sweep wrap");
    check(n_single_in > 0,  "mechanism: single-input mode");
    check(n_single_out > 0, "mechanism: single-output mode");
    check(n_sat > 0,        "mechanism: DAC saturation");
    check(n_stall > 0,      "mechanism: RAM back-pressure");
    check(n_reject > 0,     "mechanism: off-frequency rejection");
    check(n_done >= 4,      "mechanism: completed recordings");
    $display("mechanisms: overrun=%0d sweep_wrap=%0d single_in=%0d single_out=%0d sat=%0d stall=%0d reject=%0d done=%0d",
             n_overrun, n_sweep_wrap, n_single_in, n_single_out, n_sat, n_stall, n_reject, n_done);
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
