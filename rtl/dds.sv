// dds: direct digital synthesis of the lock-in reference, with frequency sweep.
//
// A 32-bit phase accumulator advances by the frequency tuning word (FTW) each
// clock, so f_ref = FTW * f_clk / 2^32 (0.029 Hz steps at 125 MHz, up to the
// 62.5 MHz Nyquist limit). A rotation-mode CORDIC turns the phase into a
// sine and cosine pair of 16-bit signed samples with amplitude 32767 (it
// carries 3 guard bits and rounds at the end; error within 3 LSB).
// The sine is the in-phase reference for X, the cosine for Y. The sine scaled by
// ref_amp (2^15 = full scale) is also given out for the DAC as the
// reference output.
//
// Sweep: with sweep_en low the FTW follows ftw_start. With sweep_en high the
// FTW starts at ftw_start and grows by ftw_step on every sweep_stb from the
// timer; the step that would pass ftw_stop instead returns it to ftw_start
// (a repeating sawtooth sweep) and pulses sweep_wrap.
//
// Timing: sin_o/cos_o/ref_o of a phase appear CORDIC STAGES+2 cycles after the
// phase, which only delays the reference as a whole; both channels and the
// DAC see the same samples. The internal generator and a sweepable frequency
// are the paper's; accumulator width, CORDIC and sweep shape are this
// design's choices.
module dds
  import lia_pkg::*;
#(
  parameter int unsigned STAGES = 18   // CORDIC iterations
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [PHASE_W-1:0]      ftw_start,
  input  logic [PHASE_W-1:0]      ftw_stop,
  input  logic [PHASE_W-1:0]      ftw_step,
  input  logic                    sweep_en,
  input  logic                    sweep_stb,
  input  logic [REF_W-1:0]        ref_amp,
  output logic signed [REF_W-1:0] sin_o,
  output logic signed [REF_W-1:0] cos_o,
  output logic signed [REF_W-1:0] ref_o,
  output logic [PHASE_W-1:0]      ftw_o,
  output logic [PHASE_W-1:0]      phase_o,
  output logic                    sweep_wrap
);

  // The CORDIC runs GUARD bits wider than the output; the result is rounded.
  localparam int unsigned GUARD = 3;
  localparam int unsigned CW    = REF_W + GUARD;

  // 32767 * 2^GUARD * K: the start vector that leaves amplitude 32767 after
  // the CORDIC gain and the final rounding.
  localparam logic signed [CW-1:0] X0 = CW'((64'd32767 * (64'd1 << GUARD) * 64'(CORDIC_K)) >> 32);

  logic [PHASE_W-1:0] ftw, phase;
  logic [PHASE_W:0]   ftw_next;

  assign ftw_next = {1'b0, ftw} + {1'b0, ftw_step};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ftw        <= '0;
      phase      <= '0;
      sweep_wrap <= 1'b0;
    end else begin
      phase      <= phase + ftw;
      sweep_wrap <= 1'b0;
      if (!sweep_en) begin
        ftw <= ftw_start;
      end else if (sweep_stb) begin
        if (ftw_next > {1'b0, ftw_stop}) begin
          ftw        <= ftw_start;
          sweep_wrap <= 1'b1;
        end else begin
          ftw <= ftw_next[PHASE_W-1:0];
        end
      end
    end
  end

  logic signed [CW+1:0]    cx, cy;
  logic [31:0]             cz;
  logic                    cv;

  cordic #(.W(CW), .STAGES(STAGES), .VECTOR(1'b0)) u_cordic (
    .clk, .rst_n,
    .valid_i (1'b1),
    .x_i     (X0),
    .y_i     ('0),
    .z_i     (phase),
    .valid_o (cv),
    .x_o     (cx),
    .y_o     (cy),
    .z_o     (cz)
  );

  // Round away the guard bits and hold to +-32767.
  function automatic logic signed [REF_W-1:0] rnd_sat(input logic signed [CW+1:0] v);
    logic signed [CW+1:0] r;
    r = (v + (CW+2)'(1 << (GUARD - 1))) >>> GUARD;
    if (r > 32767)       return 16'sd32767;
    else if (r < -32767) return -16'sd32767;
    else                 return r[REF_W-1:0];
  endfunction

  function automatic logic signed [REF_W-1:0] sat16(input logic signed [REF_W+1:0] v);
    if (v > 32767)       return 16'sd32767;
    else if (v < -32767) return -16'sd32767;
    else                 return v[REF_W-1:0];
  endfunction

  logic signed [REF_W-1:0] s_new, c_new;
  logic signed [2*REF_W:0] ref_prod;
  assign s_new    = rnd_sat(cy);
  assign c_new    = rnd_sat(cx);
  assign ref_prod = s_new * $signed({1'b0, ref_amp});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sin_o <= '0;
      cos_o <= '0;
      ref_o <= '0;
    end else begin
      sin_o <= s_new;
      cos_o <= c_new;
      ref_o <= sat16(ref_prod[REF_W+1+15:15]);
    end
  end

  assign ftw_o   = ftw;
  assign phase_o = phase;

endmodule
