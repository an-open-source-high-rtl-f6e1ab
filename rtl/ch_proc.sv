// ch_proc: one lock-in demodulation channel (X, Y, R, phi).
//
// The 14-bit ADC sample is multiplied by the sine and by the cosine
// reference. The two products (30 bits, held as 32-bit words) each pass
// through a single-pole IIR low-pass filter, which leaves X (the part of the
// input in phase with the sine) and Y (the part in phase with the cosine).
// A vectoring CORDIC then gives the magnitude R = sqrt(X^2+Y^2), corrected
// for the CORDIC gain, and the phase phi = atan2(Y, X) as a fraction of a
// turn (2^32 = 2*pi). For an input A*sin(wt+p) locked to a reference of
// amplitude 32767, X = A*32767/2*cos(p) and Y = A*32767/2*sin(p).
//
// Timing: one sample per clock. res_o belongs to the filter state of
// CORDIC_STAGES+2 cycles earlier; the ADC sample entering the
// filter is itself one cycle old (the mixer register). X and Y are delayed
// to stay aligned with R and phi. With en low the filters are held at zero
// and valid_o falls after the pipeline drains.
//
// Multiplying by the internal sine/cosine, the single-pole IIR filter and the
// four outputs X, Y, R, phi are the paper's; widths, the CORDIC and its
// precision are this design's choices.
module ch_proc
  import lia_pkg::*;
#(
  parameter int unsigned CORDIC_STAGES = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic [ALPHA_W-1:0]      alpha,
  input  logic signed [ADC_W-1:0] adc_i,
  input  logic signed [REF_W-1:0] sin_i,
  input  logic signed [REF_W-1:0] cos_i,
  output lia_out_t                res_o,
  output logic                    valid_o
);


  // Mixer.
  logic signed [DATA_W-1:0] mix_x, mix_y;
  logic                     mix_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mix_x <= '0;
      mix_y <= '0;
      mix_v <= 1'b0;
    end else begin
      mix_x <= DATA_W'(adc_i * sin_i);
      mix_y <= DATA_W'(adc_i * cos_i);
      mix_v <= en;
    end
  end

  // Low-pass filters.
  logic signed [DATA_W-1:0] fx, fy;
  logic                     fv;
  iir_lpf #(.IN_W(DATA_W), .ALPHA_W(ALPHA_W)) u_lpf_x (
    .clk, .rst_n, .en(mix_v), .clear(~en), .alpha, .x_i(mix_x), .y_o(fx)
  );
  iir_lpf #(.IN_W(DATA_W), .ALPHA_W(ALPHA_W)) u_lpf_y (
    .clk, .rst_n, .en(mix_v), .clear(~en), .alpha, .x_i(mix_y), .y_o(fy)
  );
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fv <= 1'b0;
    else        fv <= mix_v & en;
  end

  // Magnitude and phase.
  logic signed [DATA_W+1:0] cx, cy;
  logic        [31:0]       cz;
  logic                     cv;
  cordic #(.W(DATA_W), .STAGES(CORDIC_STAGES), .VECTOR(1'b1)) u_cordic (
    .clk, .rst_n,
    .valid_i (fv),
    .x_i     (fx),
    .y_i     (fy),
    .z_i     ('0),
    .valid_o (cv),
    .x_o     (cx),
    .y_o     (cy),
    .z_o     (cz)
  );

  // Gain correction of R: x_o is non-negative after vectoring.
  logic [DATA_W+33:0] r_full;
  assign r_full = $unsigned(cx) * 64'(CORDIC_K);

  // X, Y delay line to match the CORDIC and the R register.
  logic signed [DATA_W-1:0] dx [CORDIC_STAGES+1];
  logic signed [DATA_W-1:0] dy [CORDIC_STAGES+1];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < CORDIC_STAGES + 1; i++) begin
        dx[i] <= '0;
        dy[i] <= '0;
      end
    end else begin
      dx[0] <= fx;
      dy[0] <= fy;
      for (int i = 1; i < CORDIC_STAGES + 1; i++) begin
        dx[i] <= dx[i-1];
        dy[i] <= dy[i-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_o   <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o   <= cv;
      res_o.x   <= dx[CORDIC_STAGES];
      res_o.y   <= dy[CORDIC_STAGES];
      res_o.r   <= (r_full[DATA_W+33:32] > {2'b00, {DATA_W{1'b1}}}) ? {DATA_W{1'b1}}
                                                                      : r_full[DATA_W+31:32];
      res_o.phi <= cz;
    end
  end

endmodule
