// tb_iir_lpf: checks the single-pole filter.
// - step response against the analytic 1-(1-alpha)^n curve;
// - settling exactly on a constant input (no truncation offset);
// - bit-exact agreement with a 128-bit reference of the recursion for
//   random inputs and random coefficients;
// - en low holds the output, clear zeroes it.
module tb_iir_lpf;
  localparam int unsigned IN_W = 32, ALPHA_W = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic en, clear;
  logic [ALPHA_W-1:0] alpha;
  logic signed [IN_W-1:0] x_i, y_o;

  iir_lpf #(.IN_W(IN_W), .ALPHA_W(ALPHA_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reference state, ALPHA_W fraction bits.
  logic signed [127:0] ref_acc;
  function automatic logic signed [IN_W-1:0] ref_y();
    return IN_W'(ref_acc >>> ALPHA_W);
  endfunction
  task automatic ref_step(input logic signed [IN_W-1:0] x, input logic [ALPHA_W-1:0] a);
    logic signed [127:0] d;
    d = 128'(x) - 128'(ref_y());
    ref_acc = ref_acc + d * $signed({96'd0, a});
  endtask

  initial begin
    en = 0; clear = 0; alpha = 0; x_i = 0; ref_acc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Step of 1e8 with alpha = 1/256.
    @(negedge clk);
    alpha = 32'd1 << 24; x_i = 100_000_000; en = 1;
    for (int n = 1; n <= 8000; n++) begin
      @(negedge clk);
      if (n % 100 == 0 && n <= 2000) begin
        real e;
        e = 1.0e8 * (1.0 - (1.0 - 1.0/256.0) ** n);
        check($rtoi(real'(y_o) - e) <= 2 && $rtoi(e - real'(y_o)) <= 2,
              $sformatf("step n=%0d y=%0d expected %f", n, y_o, e));
      end
    end
    check(y_o == 100_000_000, $sformatf("settles on the input (%0d)", y_o));
    // Hold.
    en = 0; x_i = -5;
    repeat (10) @(negedge clk);
    check(y_o == 100_000_000, "en low holds the state");
    // Clear.
    clear = 1; @(negedge clk); clear = 0;
    check(y_o == 0, "clear zeroes the state");
    // Random, bit-exact.
    ref_acc = 0; en = 1;
    for (int n = 0; n < 3000; n++) begin
      if (n % 500 == 0) alpha = $urandom_range(1, 32'd4_000_000);
      x_i = $signed($urandom) >>> ($urandom % 8);
      ref_step(x_i, alpha);
      @(negedge clk);
      check(y_o == ref_y(), $sformatf("random n=%0d y=%0d expected %0d", n, y_o, ref_y()));
    end
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
