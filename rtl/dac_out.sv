// dac_out: digital side of one DAC output.
//
// Chooses what the DAC shows - X, Y, R or phi of its channel, or the DDS
// reference - scales it to the 14-bit DAC range, multiplies it by the digital
// gain (1 to 2000) and saturates. Scaling before the gain: X, Y and R are
// shifted right by 14 bits, so that a full-scale input locked in phase gives
// about half the DAC range at gain 1; phi by 18 bits, so that +-pi spans the
// DAC range; the 16-bit reference by 2 bits. A gain of 0 is taken as 1.
// sat_o flags a saturated sample. Output is registered: one cycle latency.
//
// From the paper: 14-bit DACs, "digital amplification of up to two thousand
// times the raw output" that can saturate the output, X/Y/R/phi routed to the
// DACs and the reference brought out on a DAC. The shifts, the signed code and
// the saturation rule are this design's choices.
module dac_out
  import lia_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  lia_out_t                data_i,
  input  logic signed [REF_W-1:0] ref_i,
  input  dac_src_e                src,
  input  logic [GAIN_W-1:0]       gain,
  output logic signed [DAC_W-1:0] dac_o,
  output logic                    sat_o
);

  localparam int unsigned PW = DATA_W + GAIN_W + 1;
  localparam logic signed [PW-1:0] DAC_MAX = PW'(2**(DAC_W-1) - 1);
  localparam logic signed [PW-1:0] DAC_MIN = -PW'(2**(DAC_W-1));

  logic signed [DATA_W-1:0]        raw;
  logic signed [PW-1:0]            prod;
  logic [GAIN_W-1:0]               g;

  always_comb begin
    unique case (src)
      SRC_X:   raw = data_i.x >>> 14;
      SRC_Y:   raw = data_i.y >>> 14;
      SRC_R:   raw = DATA_W'(data_i.r >> 14);
      SRC_PHI: raw = data_i.phi >>> 18;
      SRC_REF: raw = DATA_W'(ref_i >>> 2);
      default: raw = '0;
    endcase
    g    = (gain == '0) ? GAIN_W'(1) : gain;
    prod = raw * $signed({1'b0, g});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_o <= '0;
      sat_o <= 1'b0;
    end else if (prod > DAC_MAX) begin
      dac_o <= DAC_W'(DAC_MAX);
      sat_o <= 1'b1;
    end else if (prod < DAC_MIN) begin
      dac_o <= DAC_W'(DAC_MIN);
      sat_o <= 1'b1;
    end else begin
      dac_o <= prod[DAC_W-1:0];
      sat_o <= 1'b0;
    end
  end

endmodule
