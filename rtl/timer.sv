// timer: time base of the lock-in amplifier.
//
// A free-running cycle counter gives the time in clock periods (8 ns at
// 125 MHz). Two programmable dividers derive from it the one-cycle strobes that
// pace the rest of the design: sample_stb starts a recorded frame every
// rec_div cycles, sweep_stb steps the reference frequency every sweep_div
// cycles. A divider value of 0 or 1 gives a strobe every cycle. Each divider
// restarts when its value is written (div_load), so a new rate takes effect at
// once. Strobes are registered: the first one comes div cycles after reset or
// a load.
//
// The paper's block diagram has a Timer that hands time data to the DDS, the
// channel processing and the memory interface; what that data is, is not
// stated. The two strobes and the counter are this design's choice.
module timer #(
  parameter int unsigned CNT_W = 48   // width of the cycle counter
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [31:0]      rec_div,      // cycles per recorded frame
  input  logic [31:0]      sweep_div,    // cycles per sweep step
  input  logic             div_load,     // restart both dividers
  output logic [CNT_W-1:0] time_cnt,     // cycles since reset
  output logic             sample_stb,
  output logic             sweep_stb
);

  logic [31:0] rec_cnt, sweep_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      time_cnt   <= '0;
      rec_cnt    <= 32'd1;
      sweep_cnt  <= 32'd1;
      sample_stb <= 1'b0;
      sweep_stb  <= 1'b0;
    end else begin
      time_cnt <= time_cnt + 1'b1;
      if (div_load) begin
        rec_cnt    <= 32'd1;
        sweep_cnt  <= 32'd1;
        sample_stb <= 1'b0;
        sweep_stb  <= 1'b0;
      end else begin
        if (rec_cnt >= rec_div) begin
          rec_cnt    <= 32'd1;
          sample_stb <= 1'b1;
        end else begin
          rec_cnt    <= rec_cnt + 32'd1;
          sample_stb <= 1'b0;
        end
        if (sweep_cnt >= sweep_div) begin
          sweep_cnt <= 32'd1;
          sweep_stb <= 1'b1;
        end else begin
          sweep_cnt <= sweep_cnt + 32'd1;
          sweep_stb <= 1'b0;
        end
      end
    end
  end

endmodule
