// iir_lpf: single-pole infinite impulse response low-pass filter.
//
// y[n+1] = y[n] + alpha * (x[n] - y[n]), with alpha an unsigned fraction of
// 2^ALPHA_W. For a sample rate f_s the time constant is tau = 1/(alpha*f_s),
// so at 125 MS/s alpha = 2^32/(tau*125e6): 34360 for tau = 1 ms. The state
// keeps ALPHA_W fraction bits so that long time constants (small alpha) still
// settle on the exact input. One input is taken each cycle that en is high;
// y_o is the registered state, so it changes one cycle after an accepted
// sample. clear sets the state to zero.
//
// The paper specifies a single-pole IIR filter whose time constant can be set
// above 9 us; the first-order recursion with a multiplier is this design's
// reading of that.
module iir_lpf #(
  parameter int unsigned IN_W    = 32,  // input/output width
  parameter int unsigned ALPHA_W = 32   // coefficient fraction bits
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   clear,
  input  logic [ALPHA_W-1:0]     alpha,
  input  logic signed [IN_W-1:0] x_i,
  output logic signed [IN_W-1:0] y_o
);

  localparam int unsigned ACC_W = IN_W + ALPHA_W + 1;

  logic signed [ACC_W-1:0]         acc;
  logic signed [IN_W:0]            diff;
  logic signed [IN_W+ALPHA_W+1:0]  prod;

  assign y_o  = acc[IN_W+ALPHA_W-1:ALPHA_W];
  assign diff = (IN_W+1)'(x_i) - (IN_W+1)'(y_o);
  assign prod = diff * $signed({1'b0, alpha});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (clear)  acc <= '0;
    else if (en)     acc <= acc + ACC_W'(prod);
  end

endmodule
