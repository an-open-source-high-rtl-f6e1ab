// tb_dds: checks the reference generator.
// - sine and cosine against 32767*sin/cos of the accumulator phase, taking
//   the STAGES+2 cycle pipeline into account, at two frequencies;
// - the reference output scaled by ref_amp;
// - the phase accumulator step equal to the tuning word;
// - the sawtooth sweep: steps on each strobe, return to the start word
//   after the stop word, sweep_wrap pulse.
module tb_dds;
  import lia_pkg::*;
  localparam int unsigned STAGES = 18;
  localparam int unsigned LAT = STAGES + 2;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic [31:0] ftw_start, ftw_stop, ftw_step;
  logic sweep_en, sweep_stb;
  logic [15:0] ref_amp;
  logic signed [15:0] sin_o, cos_o, ref_o;
  logic [31:0] ftw_o, phase_o;
  logic sweep_wrap;

  dds #(.STAGES(STAGES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] ph_hist [$];
  bit   checking = 1'b0;
  int   worst = 0;
  always @(posedge clk) if (rst_n) begin
    ph_hist.push_back(phase_o);
    if (ph_hist.size() > LAT) begin
      logic [31:0] ph;
      real a, es, ec, er;
      int ds, dc, dr;
      ph = ph_hist.pop_front();
      a  = real'(ph) / 4294967296.0 * TWO_PI;
      es = 32767.0 * $sin(a);
      ec = 32767.0 * $cos(a);
      er = es * real'(ref_amp) / 32768.0;
      ds = $rtoi(real'(sin_o) - es);
      dc = $rtoi(real'(cos_o) - ec);
      dr = $rtoi(real'(ref_o) - er);
      if (checking) begin
        check(ds <= 3 && ds >= -3, $sformatf("sin %0d expected %f (phase %h)", sin_o, es, ph));
        check(dc <= 3 && dc >= -3, $sformatf("cos %0d expected %f (phase %h)", cos_o, ec, ph));
        check(dr <= 3 && dr >= -3, $sformatf("ref %0d expected %f", ref_o, er));
      end
    end
  end

  initial begin
    ftw_start = 32'd17_179_869; // 500 kHz
    ftw_stop = ftw_start; ftw_step = 0;
    sweep_en = 0; sweep_stb = 0; ref_amp = 16'h8000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (LAT + 5) @(negedge clk);
    checking = 1;
    repeat (600) @(negedge clk);
    // Accumulator step.
    begin
      logic [31:0] p0;
      p0 = phase_o;
      @(negedge clk);
      check(phase_o - p0 == ftw_o, "phase advances by the tuning word");
    end
    // Fast reference (about 38 MHz), half amplitude.
    checking = 0;
    ftw_start = 32'd1_300_000_000; ftw_stop = ftw_start; ref_amp = 16'h4000;
    repeat (LAT + 5) @(negedge clk);
    checking = 1;
    repeat (600) @(negedge clk);
    checking = 0;
    // Sweep.
    ftw_start = 32'd1000; ftw_step = 32'd100; ftw_stop = 32'd1500;
    @(negedge clk);
    check(ftw_o == 32'd1000, "tuning word follows start while not sweeping");
    sweep_en = 1;
    begin
      logic [31:0] expect_ftw;
      int wraps;
      expect_ftw = 1000; wraps = 0;
      for (int s = 0; s < 14; s++) begin
        repeat (9) @(negedge clk);
        sweep_stb = 1;
        @(negedge clk);
        sweep_stb = 0;
        expect_ftw = (expect_ftw + 100 > 1500) ? 1000 : expect_ftw + 100;
        if (expect_ftw == 1000) begin
          check(sweep_wrap == 1'b1, "sweep_wrap pulses on the return to start");
          wraps++;
        end else begin
          check(sweep_wrap == 1'b0, "no sweep_wrap while stepping");
        end
        check(ftw_o == expect_ftw, $sformatf("sweep step %0d: ftw %0d expected %0d", s, ftw_o, expect_ftw));
      end
      check(wraps == 2, "two sweep periods seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
