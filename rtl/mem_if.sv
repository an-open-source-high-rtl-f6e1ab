// mem_if: memory interface, from the demodulated channels to the DACs and RAM.
//
// Two jobs. It hands the X, Y, R and phi of channel A to DAC A and those of
// channel B to DAC B, registered once. And it records the results into a
// buffer in the processor's RAM, from where the software stores them in a
// ramdisk file for transfer over Ethernet.
//
// Recording: rec_start (ignored while a recording runs) clears the counters
// and starts at BASE_ADDR. Each sample_stb from the timer latches one frame:
// X, Y, R, phi of channel A, then of channel B when both inputs are in use
// (8 words), or channel A alone in single-input mode (4 words). The frame's
// words leave one per accepted beat on a valid/ready write port, with
// consecutive 32-bit word addresses. A strobe that arrives while words of the
// previous frame are still waiting drops the new frame and counts an overrun.
// Recording stops after rec_len words (at most the buffer, BUF_BYTES/4), and
// rec_done stays set until the next start. The write port keeps valid, address
// and data steady until ready is seen.
//
// From the paper: the memory interface block between the channels, the DACs
// and the RAM; a buffer of about 65 MB; a set rate that counts one word per
// output quantity per channel, so each quantity gets 1/8 of it. The frame
// order, the write port and the overrun rule are this design's choices.
//
// Lint note: rst_n is used asynchronously by the flops and, through the
// assertion's disable iff, in a clocked property; a linter may report it as
// both synchronous and asynchronous. The flops themselves are all async-reset.
module mem_if
  import lia_pkg::*;
#(
  parameter logic [31:0] BASE_ADDR = 32'h1000_0000,  // buffer start (byte address)
  parameter int unsigned BUF_BYTES = 65_000_000      // buffer size
) (
  input  logic        clk,
  input  logic        rst_n,
  // demodulated channels
  input  lia_out_t    ch_a,
  input  lia_out_t    ch_b,
  // to the DACs
  output lia_out_t    dac_a_data,
  output lia_out_t    dac_b_data,
  // control
  input  logic        input_dual,
  input  logic        sample_stb,
  input  logic        rec_start,
  input  logic [31:0] rec_len,
  // RAM write port
  output logic        mem_valid,
  output logic [31:0] mem_addr,
  output logic [31:0] mem_data,
  input  logic        mem_ready,
  // status
  output logic        rec_busy,
  output logic        rec_done,
  output logic [31:0] rec_words,
  output logic [31:0] overruns
);

  localparam logic [31:0] BUF_WORDS = 32'(BUF_BYTES / 4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_a_data <= '0;
      dac_b_data <= '0;
    end else begin
      dac_a_data <= ch_a;
      dac_b_data <= ch_b;
    end
  end

  logic [31:0] frame [8];
  logic [3:0]  idx;        // next word of the frame
  logic [3:0]  nwords;     // words in the frame
  logic        pending;    // frame words waiting
  logic [31:0] len;

  assign mem_valid = pending;
  assign mem_data  = frame[idx[2:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 8; i++) frame[i] <= '0;
      idx       <= '0;
      nwords    <= '0;
      pending   <= 1'b0;
      len       <= '0;
      mem_addr  <= BASE_ADDR;
      rec_busy  <= 1'b0;
      rec_done  <= 1'b0;
      rec_words <= '0;
      overruns  <= '0;
    end else begin
      if (rec_start && !rec_busy) begin
        rec_busy  <= (rec_len != 0);
        rec_done  <= (rec_len == 0);
        rec_words <= '0;
        overruns  <= '0;
        mem_addr  <= BASE_ADDR;
        len       <= (rec_len > BUF_WORDS) ? BUF_WORDS : rec_len;
        pending   <= 1'b0;
      end else if (rec_busy) begin
        // Write beat.
        if (pending && mem_ready) begin
          mem_addr  <= mem_addr + 32'd4;
          rec_words <= rec_words + 32'd1;
          idx       <= idx + 4'd1;
          if (rec_words + 32'd1 == len) begin
            rec_busy <= 1'b0;
            rec_done <= 1'b1;
            pending  <= 1'b0;
          end else if (idx + 4'd1 == nwords) begin
            pending <= 1'b0;
          end
        end
        // New frame.
        if (sample_stb && !(pending && mem_ready && rec_words + 32'd1 == len)) begin
          if (pending && !(mem_ready && idx + 4'd1 == nwords)) begin
            overruns <= overruns + 32'd1;
          end else begin
            frame[0] <= ch_a.x;
            frame[1] <= ch_a.y;
            frame[2] <= ch_a.r;
            frame[3] <= ch_a.phi;
            frame[4] <= ch_b.x;
            frame[5] <= ch_b.y;
            frame[6] <= ch_b.r;
            frame[7] <= ch_b.phi;
            nwords   <= input_dual ? 4'd8 : 4'd4;
            idx      <= '0;
            pending  <= 1'b1;
          end
        end
      end
    end
  end

  // Write port rule: a beat offered is held until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (mem_valid && !mem_ready) |=> (mem_valid && $stable(mem_addr) && $stable(mem_data));
  endproperty
  a_hold: assert property (p_hold) else $error("mem_if: write beat dropped before ready");

endmodule
