// lia_top: two-channel FPGA lock-in amplifier, 125 MS/s, reference up to 50 MHz.
//
// Dataflow: the two 14-bit ADC streams enter channel processing A and B,
// where each is multiplied by the sine and cosine of an internal DDS
// reference and low-pass filtered by a single-pole IIR into X and Y, from
// which R and phi follow. The memory interface passes each channel's four
// results to its DAC output and records frames of them into a RAM buffer
// on the processor side. The timer paces the recording and the frequency
// sweep. Mode control holds the parameters that the processor's software
// writes over the register bus.
//
// Modes: in dual-input mode channel B demodulates ADC B; in single-input mode
// channel B is idle and frames hold channel A only. In dual-output mode DAC B
// shows a result of channel B; in single-output mode DAC B carries the
// reference, for driving the experiment's modulation.
//
// Interface: clk is the 125 MHz ADC/DAC clock, rst_n an asynchronous
// active-low reset. ADC and DAC samples are signed two's complement, one per
// clock. The RAM port is a valid/ready stream of 32-bit word writes with byte
// addresses. The register bus is described in mode_ctrl.
//
// The block structure and its connections follow the paper's block diagram;
// the converters, the RAM and the software are outside this module.
module lia_top
  import lia_pkg::*;
#(
  parameter logic [31:0] BASE_ADDR     = 32'h1000_0000,  // RAM buffer start
  parameter int unsigned BUF_BYTES     = 65_000_000,     // RAM buffer size, ~65 MB
  parameter int unsigned DDS_STAGES    = 18,             // CORDIC iterations, reference
  parameter int unsigned CORDIC_STAGES = 24              // CORDIC iterations, R and phi
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // converters
  input  logic signed [ADC_W-1:0] adc_a,
  input  logic signed [ADC_W-1:0] adc_b,
  output logic signed [DAC_W-1:0] dac_a,
  output logic signed [DAC_W-1:0] dac_b,
  output logic                    dac_a_sat,
  output logic                    dac_b_sat,
  // register bus from the processor
  input  logic                    bus_we,
  input  logic [7:0]              bus_addr,
  input  logic [31:0]             bus_wdata,
  output logic [31:0]             bus_rdata,
  // RAM write port
  output logic                    mem_valid,
  output logic [31:0]             mem_addr,
  output logic [31:0]             mem_data,
  input  logic                    mem_ready
);

  lia_cfg_t cfg;
  logic     rec_start, div_load;
  logic     rec_busy, rec_done;
  logic [31:0] rec_words, overruns;
  logic [PHASE_W-1:0] ftw_now;
  logic [47:0] time_cnt;
  logic     sample_stb, sweep_stb;

  mode_ctrl #(.REC_LEN_RESET(32'(BUF_BYTES / 4))) u_mode_ctrl (
    .clk, .rst_n,
    .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .rec_busy, .rec_done, .rec_words, .overruns,
    .ftw_now,
    .time_now  (time_cnt[31:0]),
    .cfg, .rec_start, .div_load
  );

  timer #(.CNT_W(48)) u_timer (
    .clk, .rst_n,
    .rec_div   (cfg.rec_div),
    .sweep_div (cfg.sweep_div),
    .div_load,
    .time_cnt,
    .sample_stb,
    .sweep_stb
  );

  logic signed [REF_W-1:0] ref_sin, ref_cos, ref_out;
  dds #(.STAGES(DDS_STAGES)) u_dds (
    .clk, .rst_n,
    .ftw_start (cfg.ftw_start),
    .ftw_stop  (cfg.ftw_stop),
    .ftw_step  (cfg.ftw_step),
    .sweep_en  (cfg.sweep_en),
    .sweep_stb,
    .ref_amp   (cfg.ref_amp),
    .sin_o     (ref_sin),
    .cos_o     (ref_cos),
    .ref_o     (ref_out),
    .ftw_o     (ftw_now),
    .phase_o   (),
    .sweep_wrap()
  );

  lia_out_t res_a, res_b;
  ch_proc #(.CORDIC_STAGES(CORDIC_STAGES)) u_ch_a (
    .clk, .rst_n, .en(1'b1), .alpha(cfg.alpha),
    .adc_i(adc_a), .sin_i(ref_sin), .cos_i(ref_cos),
    .res_o(res_a), .valid_o()
  );
  ch_proc #(.CORDIC_STAGES(CORDIC_STAGES)) u_ch_b (
    .clk, .rst_n, .en(cfg.input_dual), .alpha(cfg.alpha),
    .adc_i(adc_b), .sin_i(ref_sin), .cos_i(ref_cos),
    .res_o(res_b), .valid_o()
  );

  lia_out_t dac_a_data, dac_b_data;
  mem_if #(.BASE_ADDR(BASE_ADDR), .BUF_BYTES(BUF_BYTES)) u_mem_if (
    .clk, .rst_n,
    .ch_a (res_a), .ch_b (res_b),
    .dac_a_data, .dac_b_data,
    .input_dual (cfg.input_dual),
    .sample_stb,
    .rec_start,
    .rec_len (cfg.rec_len),
    .mem_valid, .mem_addr, .mem_data, .mem_ready,
    .rec_busy, .rec_done, .rec_words, .overruns
  );

  dac_out u_dac_a (
    .clk, .rst_n,
    .data_i (dac_a_data),
    .ref_i  (ref_out),
    .src    (cfg.dac_a_src),
    .gain   (cfg.dac_a_gain),
    .dac_o  (dac_a),
    .sat_o  (dac_a_sat)
  );

  dac_out u_dac_b (
    .clk, .rst_n,
    .data_i (dac_b_data),
    .ref_i  (ref_out),
    .src    (cfg.output_dual ? cfg.dac_b_src : SRC_REF),
    .gain   (cfg.dac_b_gain),
    .dac_o  (dac_b),
    .sat_o  (dac_b_sat)
  );

endmodule
