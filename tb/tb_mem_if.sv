// tb_mem_if: checks recording and DAC forwarding of the memory interface.
// Channel data change every cycle and carry a per-word tag and a cycle
// stamp, so each written word tells which frame position and which strobe it
// came from. Checks: consecutive word addresses from BASE_ADDR; frames of 8
// (dual input) or 4 (single input) words in X, Y, R, phi order, A then B,
// all from the same strobe; the recorded length and the clamp to the buffer
// size; the overrun count equals the strobes that found the previous frame
// still waiting; rec_done; the one-cycle forwarding to the DACs.
module tb_mem_if;
  import lia_pkg::*;
  localparam logic [31:0] BASE = 32'h1000_0000;
  localparam int unsigned BUF_BYTES = 400;  // 100 words, to test the clamp

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  lia_out_t ch_a, ch_b, dac_a_data, dac_b_data;
  logic input_dual, sample_stb, rec_start;
  logic [31:0] rec_len;
  logic mem_valid, mem_ready;
  logic [31:0] mem_addr, mem_data;
  logic rec_busy, rec_done;
  logic [31:0] rec_words, overruns;

  mem_if #(.BASE_ADDR(BASE), .BUF_BYTES(BUF_BYTES)) dut (.*);
  ram_model #(.READY_PCT(70)) u_ram (.clk, .valid(mem_valid), .addr(mem_addr), .data(mem_data), .ready(mem_ready));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Stamped channel data.
  logic [23:0] stamp = '0;
  always @(posedge clk) stamp <= stamp + 1'b1;
  always_comb begin
    ch_a.x   = {8'h11, stamp};
    ch_a.y   = {8'h12, stamp};
    ch_a.r   = {8'h13, stamp};
    ch_a.phi = {8'h14, stamp};
    ch_b.x   = {8'h21, stamp};
    ch_b.y   = {8'h22, stamp};
    ch_b.r   = {8'h23, stamp};
    ch_b.phi = {8'h24, stamp};
  end

  // Strobe generator and overrun bookkeeping.
  int div = 20, sc = 0;
  int strobes_busy = 0;
  logic [31:0] cur_len = 0;
  always @(posedge clk) begin
    if (rst_n && sample_stb && rec_busy &&
        !(mem_valid && mem_ready && rec_words + 1 == cur_len))
      strobes_busy++;
    sc <= (sc + 1 >= div) ? 0 : sc + 1;
  end
  assign sample_stb = (sc == div - 1);

  // DAC forwarding check.
  lia_out_t prev_a, prev_b;
  int fwd_bad = 0, fwd_n = 0;
  always @(posedge clk) begin
    if (rst_n && fwd_n > 0 && (dac_a_data != prev_a || dac_b_data != prev_b)) fwd_bad++;
    prev_a <= ch_a; prev_b <= ch_b;
    if (rst_n) fwd_n++;
  end

  task automatic run(input bit dual, input int d, input int len, input int exp_words);
    int nw, frames;
    logic [31:0] w, first_stamp, last_stamp;
    input_dual = dual; div = d;
    u_ram.clear();
    strobes_busy = 0;
    cur_len = exp_words;
    @(negedge clk); rec_len = len; rec_start = 1;
    @(negedge clk); rec_start = 0;
    check(rec_busy, "busy after start");
    while (rec_busy) @(negedge clk);
    check(rec_done, "done after recording");
    check(rec_words == exp_words, $sformatf("words %0d expected %0d", rec_words, exp_words));
    check(u_ram.writes == exp_words, $sformatf("RAM saw %0d writes", u_ram.writes));
    nw = dual ? 8 : 4;
    frames = 0;
    last_stamp = '1;
    for (int i = 0; i < exp_words; i++) begin
      logic [7:0] tag;
      int k;
      k = i % nw;
      w = u_ram.read(BASE + 4 * i);
      tag = 8'(((k / 4) + 1) * 16 + (k % 4) + 1);
      check(w[31:24] == tag, $sformatf("word %0d tag %h expected %h", i, w[31:24], tag));
      if (k == 0) begin
        first_stamp = {8'd0, w[23:0]};
        if (i > 0) check(first_stamp > last_stamp, "frames in time order");
        last_stamp = first_stamp;
        frames++;
      end else begin
        check({8'd0, w[23:0]} == first_stamp, $sformatf("word %0d from the same strobe", i));
      end
    end
    check(u_ram.read(BASE + 4 * exp_words) == 32'hDEAD_BEEF, "nothing written past the end");
    check(overruns == 32'(strobes_busy - frames),
          $sformatf("overruns %0d expected %0d", overruns, strobes_busy - frames));
  endtask

  initial begin
    input_dual = 1; rec_start = 0; rec_len = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    run(1'b1, 20, 40, 40);                 // dual, slow strobes: no overrun
    check(overruns == 0, "no overrun at a slow rate");
    run(1'b1, 6, 1000, 100);               // dual, fast strobes, clamped
    check(overruns > 0, $sformatf("overruns at a fast rate (%0d)", overruns));
    run(1'b0, 12, 22, 22);                 // single input: 4-word frames
    check(fwd_bad == 0 && fwd_n > 100, "DAC data is the channel data one cycle later");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
