// lia_pkg: shared types and constants of the lock-in amplifier.
//
// The sample widths follow the board: 14-bit ADCs and 14-bit DACs, both at
// 125 MS/s. The reference (16-bit sine/cosine), the 32-bit phase accumulator,
// the 32-bit X/Y/R/phi words and the register map are this design's own
// choices. A phase or angle is an unsigned fraction of a full turn: 2^32 = 2*pi.
package lia_pkg;

  localparam int unsigned ADC_W   = 14;  // board ADC resolution
  localparam int unsigned DAC_W   = 14;  // board DAC resolution
  localparam int unsigned REF_W   = 16;  // sine/cosine reference width
  localparam int unsigned PHASE_W = 32;  // DDS phase accumulator width
  localparam int unsigned DATA_W  = 32;  // width of X, Y, R and phi
  localparam int unsigned ALPHA_W = 32;  // IIR coefficient, fraction bits
  localparam int unsigned GAIN_W  = 11;  // DAC multiplier, 1..2000

  localparam longint unsigned F_CLK_HZ = 125_000_000;  // ADC/DAC sample rate

  // Largest DAC multiplier: "up to two thousand times the raw output".
  localparam int unsigned GAIN_MAX = 2000;

  // Largest IIR coefficient: the time constant may be set to any value above
  // 9 us, alpha = 1/(tau*f_clk) = 1/1125, as a fraction of 2^32.
  localparam logic [ALPHA_W-1:0] ALPHA_MAX = ALPHA_W'(64'(2**32) / 1125);

  // Demodulated results of one channel.
  typedef struct packed {
    logic signed [DATA_W-1:0] x;    // in-phase (sine) component
    logic signed [DATA_W-1:0] y;    // quadrature (cosine) component
    logic        [DATA_W-1:0] r;    // magnitude sqrt(X^2+Y^2)
    logic signed [DATA_W-1:0] phi;  // atan2(Y,X), 2^32 = full turn
  } lia_out_t;

  // What a DAC shows.
  typedef enum logic [2:0] {
    SRC_X   = 3'd0,
    SRC_Y   = 3'd1,
    SRC_R   = 3'd2,
    SRC_PHI = 3'd3,
    SRC_REF = 3'd4
  } dac_src_e;

  // Operating parameters set by the software through the register file.
  typedef struct packed {
    logic                input_dual;  // 1: channel B demodulates ADC B; 0: channel B idle, frames hold channel A only
    logic                output_dual; // 1: DAC B shows channel B; 0: DAC B gives the reference
    logic                sweep_en;    // step the reference frequency
    logic [PHASE_W-1:0]  ftw_start;   // frequency tuning word, f = ftw*f_clk/2^32
    logic [PHASE_W-1:0]  ftw_stop;
    logic [PHASE_W-1:0]  ftw_step;
    logic [31:0]         sweep_div;   // clock cycles per sweep step
    logic [ALPHA_W-1:0]  alpha;       // IIR coefficient
    logic [31:0]         rec_div;     // clock cycles per recorded frame
    logic [31:0]         rec_len;     // words to record
    dac_src_e            dac_a_src;
    logic [GAIN_W-1:0]   dac_a_gain;
    dac_src_e            dac_b_src;
    logic [GAIN_W-1:0]   dac_b_gain;
    logic [REF_W-1:0]    ref_amp;     // reference output amplitude, 2^15 = full scale
  } lia_cfg_t;

  // Register map (byte addresses on the 8-bit register bus).
  localparam logic [7:0] REG_CTRL      = 8'h00; // [0] input_dual [1] output_dual [2] sweep_en [3] rec_start (write 1, self-clearing)
  localparam logic [7:0] REG_FTW_START = 8'h04;
  localparam logic [7:0] REG_FTW_STOP  = 8'h08;
  localparam logic [7:0] REG_FTW_STEP  = 8'h0C;
  localparam logic [7:0] REG_SWEEP_DIV = 8'h10;
  localparam logic [7:0] REG_ALPHA     = 8'h14;
  localparam logic [7:0] REG_REC_DIV   = 8'h18;
  localparam logic [7:0] REG_REC_LEN   = 8'h1C;
  localparam logic [7:0] REG_DAC_A     = 8'h20; // [2:0] source, [26:16] gain
  localparam logic [7:0] REG_DAC_B     = 8'h24;
  localparam logic [7:0] REG_REF_AMP   = 8'h28;
  localparam logic [7:0] REG_STATUS    = 8'h30; // [0] rec_busy [1] rec_done  (read only)
  localparam logic [7:0] REG_WORDS     = 8'h34; // words recorded            (read only)
  localparam logic [7:0] REG_OVERRUNS  = 8'h38; // frames dropped            (read only)
  localparam logic [7:0] REG_FTW_NOW   = 8'h3C; // current tuning word        (read only)
  localparam logic [7:0] REG_TIME      = 8'h40; // cycle count, low 32 bits  (read only)

  // CORDIC arctangent table: round(atan(2^-i) / (2*pi) * 2^32).
  localparam int unsigned CORDIC_MAX_STAGES = 30;
  localparam logic [31:0] ATAN_TAB [CORDIC_MAX_STAGES] = '{
    32'd536870912, 32'd316933406, 32'd167458907, 32'd85004756, 32'd42667331,
    32'd21354465,  32'd10679838,  32'd5340245,   32'd2670163,  32'd1335087,
    32'd667544,    32'd333772,    32'd166886,    32'd83443,    32'd41722,
    32'd20861,     32'd10430,     32'd5215,      32'd2608,     32'd1304,
    32'd652,       32'd326,       32'd163,       32'd81,       32'd41,
    32'd20,        32'd10,        32'd5,         32'd3,        32'd1
  };

  // CORDIC gain correction K = prod 1/sqrt(1+2^-2i) = 0.60725..., times 2^32.
  localparam logic [31:0] CORDIC_K = 32'd2608131496;

endpackage
