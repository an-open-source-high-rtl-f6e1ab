// mode_ctrl: mode control, the register file between the software and the FPGA.
//
// The processor's command line and GUI software set every operating
// parameter through this block: the reference frequency and its sweep, the
// filter time constant, the input and output modes, the DAC sources and
// multipliers, the recording rate and length. It also reads back the
// recording status, the current reference frequency and the
// timer's cycle count.
//
// Bus: a simple synchronous register port. A write takes effect on the clock
// edge where bus_we is high; bus_rdata is the combinational read of
// bus_addr. Addresses are in lia_pkg (REG_*). Writes are checked against the
// paper's limits: a DAC gain is held to 1..2000 and the filter coefficient to
// 1..ALPHA_MAX, the time constant of 9 us. Writing 1 to CTRL[3] gives a
// one-cycle rec_start; a write to REC_DIV or SWEEP_DIV gives a one-cycle
// div_load that restarts the timer's dividers.
//
// Reset values are the operating point of the paper's noise measurements:
// dual-input mode, 500 kHz reference, 1 ms time constant, a set rate of
// 20 kS/s (one frame of 8 words every 50000 cycles), the whole ~65 MB buffer.
// The register layout is this design's choice.
module mode_ctrl
  import lia_pkg::*;
#(
  parameter logic [31:0] REC_LEN_RESET = 32'd16_250_000  // 65 MB in words
) (
  input  logic        clk,
  input  logic        rst_n,
  // register bus from the processor
  input  logic        bus_we,
  input  logic [7:0]  bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  // status
  input  logic        rec_busy,
  input  logic        rec_done,
  input  logic [31:0] rec_words,
  input  logic [31:0] overruns,
  input  logic [31:0] ftw_now,
  input  logic [31:0] time_now,
  // configuration
  output lia_cfg_t    cfg,
  output logic        rec_start,
  output logic        div_load
);

  function automatic logic [GAIN_W-1:0] clamp_gain(input logic [31:0] v);
    if (v == 0)             return GAIN_W'(1);
    else if (v > GAIN_MAX)  return GAIN_W'(GAIN_MAX);
    else                    return v[GAIN_W-1:0];
  endfunction

  function automatic logic [ALPHA_W-1:0] clamp_alpha(input logic [31:0] v);
    if (v == 0)              return ALPHA_W'(1);
    else if (v > ALPHA_MAX)  return ALPHA_MAX;
    else                     return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.input_dual  <= 1'b1;
      cfg.output_dual <= 1'b1;
      cfg.sweep_en    <= 1'b0;
      cfg.ftw_start   <= 32'd17_179_869;   // 500 kHz
      cfg.ftw_stop    <= 32'd17_179_869;
      cfg.ftw_step    <= 32'd0;
      cfg.sweep_div   <= 32'd125_000;      // one sweep step per ms
      cfg.alpha       <= 32'd34_360;       // tau = 1 ms
      cfg.rec_div     <= 32'd50_000;       // 2.5 kframes/s = 20 kS/s set rate
      cfg.rec_len     <= REC_LEN_RESET;
      cfg.dac_a_src   <= SRC_R;
      cfg.dac_a_gain  <= GAIN_W'(1);
      cfg.dac_b_src   <= SRC_R;
      cfg.dac_b_gain  <= GAIN_W'(1);
      cfg.ref_amp     <= 16'h8000;
      rec_start       <= 1'b0;
      div_load        <= 1'b0;
    end else begin
      rec_start <= 1'b0;
      div_load  <= 1'b0;
      if (bus_we) begin
        unique case (bus_addr)
          REG_CTRL: begin
            cfg.input_dual  <= bus_wdata[0];
            cfg.output_dual <= bus_wdata[1];
            cfg.sweep_en    <= bus_wdata[2];
            rec_start       <= bus_wdata[3];
          end
          REG_FTW_START: cfg.ftw_start <= bus_wdata;
          REG_FTW_STOP:  cfg.ftw_stop  <= bus_wdata;
          REG_FTW_STEP:  cfg.ftw_step  <= bus_wdata;
          REG_SWEEP_DIV: begin cfg.sweep_div <= bus_wdata; div_load <= 1'b1; end
          REG_ALPHA:     cfg.alpha <= clamp_alpha(bus_wdata);
          REG_REC_DIV:   begin cfg.rec_div <= bus_wdata; div_load <= 1'b1; end
          REG_REC_LEN:   cfg.rec_len <= bus_wdata;
          REG_DAC_A: begin
            cfg.dac_a_src  <= dac_src_e'(bus_wdata[2:0]);
            cfg.dac_a_gain <= clamp_gain({21'd0, bus_wdata[26:16]});
          end
          REG_DAC_B: begin
            cfg.dac_b_src  <= dac_src_e'(bus_wdata[2:0]);
            cfg.dac_b_gain <= clamp_gain({21'd0, bus_wdata[26:16]});
          end
          REG_REF_AMP:   cfg.ref_amp <= bus_wdata[REF_W-1:0];
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (bus_addr)
      REG_CTRL:      bus_rdata = {29'd0, cfg.sweep_en, cfg.output_dual, cfg.input_dual};
      REG_FTW_START: bus_rdata = cfg.ftw_start;
      REG_FTW_STOP:  bus_rdata = cfg.ftw_stop;
      REG_FTW_STEP:  bus_rdata = cfg.ftw_step;
      REG_SWEEP_DIV: bus_rdata = cfg.sweep_div;
      REG_ALPHA:     bus_rdata = cfg.alpha;
      REG_REC_DIV:   bus_rdata = cfg.rec_div;
      REG_REC_LEN:   bus_rdata = cfg.rec_len;
      REG_DAC_A:     bus_rdata = {5'd0, cfg.dac_a_gain, 13'd0, cfg.dac_a_src};
      REG_DAC_B:     bus_rdata = {5'd0, cfg.dac_b_gain, 13'd0, cfg.dac_b_src};
      REG_REF_AMP:   bus_rdata = {16'd0, cfg.ref_amp};
      REG_STATUS:    bus_rdata = {30'd0, rec_done, rec_busy};
      REG_WORDS:     bus_rdata = rec_words;
      REG_OVERRUNS:  bus_rdata = overruns;
      REG_FTW_NOW:   bus_rdata = ftw_now;
      REG_TIME:      bus_rdata = time_now;
      default:       bus_rdata = 32'd0;
    endcase
  end

endmodule
