// tb_mode_ctrl: checks the register file: reset values, write and read back
// of every register, the clamps of the DAC gain (1..2000) and of the filter
// coefficient (time constant of at least 9 us), the one-cycle rec_start and
// div_load pulses and the read-only status registers.
module tb_mode_ctrl;
  import lia_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  logic bus_we;
  logic [7:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic rec_busy, rec_done;
  logic [31:0] rec_words, overruns, ftw_now, time_now;
  lia_cfg_t cfg;
  logic rec_start, div_load;

  mode_ctrl #(.REC_LEN_RESET(32'd16_250_000)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_rec_start = 0, n_div_load = 0;
  always @(posedge clk) begin
    if (rst_n && rec_start) n_rec_start++;
    if (rst_n && div_load)  n_div_load++;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rdchk(input logic [7:0] a, input logic [31:0] e, input string what);
    logic [31:0] v;
    bus_addr = a; #1;
    v = bus_rdata;
    check(v == e, $sformatf("%s: read %h expected %h", what, v, e));
  endtask

  initial begin
    bus_we = 0; bus_addr = 0; bus_wdata = 0;
    rec_busy = 0; rec_done = 0; rec_words = 0; overruns = 0; ftw_now = 0; time_now = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Reset values.
    rdchk(REG_CTRL, 32'h3, "reset CTRL: dual input, dual output");
    rdchk(REG_FTW_START, 32'd17_179_869, "reset 500 kHz reference");
    rdchk(REG_ALPHA, 32'd34_360, "reset 1 ms time constant");
    rdchk(REG_REC_DIV, 32'd50_000, "reset 20 kS/s set rate");
    rdchk(REG_REC_LEN, 32'd16_250_000, "reset record length");
    check(cfg.dac_a_src == SRC_R && cfg.dac_a_gain == 1, "reset DAC A shows R at gain 1");
    // Plain registers.
    wr(REG_FTW_START, 32'h1234_5678); rdchk(REG_FTW_START, 32'h1234_5678, "FTW_START");
    check(cfg.ftw_start == 32'h1234_5678, "cfg.ftw_start");
    wr(REG_FTW_STOP, 32'h2000_0000);  rdchk(REG_FTW_STOP, 32'h2000_0000, "FTW_STOP");
    wr(REG_FTW_STEP, 32'd777);        rdchk(REG_FTW_STEP, 32'd777, "FTW_STEP");
    check(cfg.ftw_step == 32'd777, "cfg.ftw_step");
    wr(REG_REC_LEN, 32'd4096);        rdchk(REG_REC_LEN, 32'd4096, "REC_LEN");
    wr(REG_REF_AMP, 32'h0000_4000);   rdchk(REG_REF_AMP, 32'h4000, "REF_AMP");
    check(cfg.ref_amp == 16'h4000, "cfg.ref_amp");
    // Control bits and the start pulse.
    wr(REG_CTRL, 32'b1100);
    check(rec_start, "rec_start after the CTRL write");
    @(negedge clk);
    check(n_rec_start == 1, "one rec_start pulse");
    check(!rec_start, "rec_start lasts one cycle");
    check(cfg.sweep_en && !cfg.input_dual && !cfg.output_dual, "CTRL bits");
    rdchk(REG_CTRL, 32'b100, "CTRL read back (start bit not stored)");
    // Dividers give div_load.
    wr(REG_REC_DIV, 32'd1000);
    wr(REG_SWEEP_DIV, 32'd99);
    @(negedge clk);
    check(n_div_load == 2, $sformatf("div_load pulses %0d", n_div_load));
    check(cfg.rec_div == 1000 && cfg.sweep_div == 99, "divider values");
    // Gain clamps.
    wr(REG_DAC_A, {5'd0, 11'd1500, 13'd0, 3'd1});
    check(cfg.dac_a_src == SRC_Y && cfg.dac_a_gain == 1500, "DAC A Y x1500");
    wr(REG_DAC_A, {5'd0, 11'd2047, 13'd0, 3'd3});
    check(cfg.dac_a_gain == 2000 && cfg.dac_a_src == SRC_PHI, "gain held to 2000");
    wr(REG_DAC_B, {5'd0, 11'd0, 13'd0, 3'd4});
    check(cfg.dac_b_gain == 1 && cfg.dac_b_src == SRC_REF, "gain 0 becomes 1");
    rdchk(REG_DAC_B, {5'd0, 11'd1, 13'd0, 3'd4}, "DAC_B read back");
    // Coefficient clamps.
    wr(REG_ALPHA, 32'd100_000_000);
    check(cfg.alpha == ALPHA_MAX && ALPHA_MAX == 32'd3_817_748, "alpha held to 9 us time constant");
    wr(REG_ALPHA, 32'd0);
    check(cfg.alpha == 1, "alpha 0 becomes 1");
    wr(REG_ALPHA, 32'd3436);
    check(cfg.alpha == 3436, "alpha 10 ms");
    // Status.
    rec_busy = 1; rec_done = 0; rec_words = 32'd55; overruns = 32'd3; ftw_now = 32'hCAFE;
    rdchk(REG_STATUS, 32'b01, "STATUS busy");
    rdchk(REG_WORDS, 32'd55, "WORDS");
    rdchk(REG_OVERRUNS, 32'd3, "OVERRUNS");
    rdchk(REG_FTW_NOW, 32'hCAFE, "FTW_NOW");
    time_now = 32'd123456;
    rdchk(REG_TIME, 32'd123456, "TIME");
    rec_busy = 0; rec_done = 1;
    rdchk(REG_STATUS, 32'b10, "STATUS done");
    rdchk(8'hFC, 32'd0, "unmapped address reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
