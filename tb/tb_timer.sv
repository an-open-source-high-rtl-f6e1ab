// tb_timer: checks the timer's cycle counter, the periods of both strobes
// and the restart on div_load.
module tb_timer;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] rec_div, sweep_div;
  logic div_load;
  logic [47:0] time_cnt;
  logic sample_stb, sweep_stb;
  int checks = 0, failures = 0;

  timer #(.CNT_W(48)) dut (.*);

  always #4 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Record strobe times.
  int cyc = 0;
  int last_s = -1, last_w = -1, n_s = 0, n_w = 0, bad_s = 0, bad_w = 0;
  int exp_s, exp_w;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (sample_stb) begin
      if (last_s >= 0 && cyc - last_s != exp_s) bad_s++;
      last_s = cyc; n_s++;
    end
    if (sweep_stb) begin
      if (last_w >= 0 && cyc - last_w != exp_w) bad_w++;
      last_w = cyc; n_w++;
    end
  end

  initial begin
    rec_div = 7; sweep_div = 13; div_load = 0;
    exp_s = 7; exp_w = 13;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    begin
      logic [47:0] t0;
      t0 = time_cnt;
      repeat (10) @(posedge clk);
      check(time_cnt - t0 == 10, "time counter advances once per cycle");
    end
    repeat (300) @(posedge clk);
    check(bad_s == 0 && n_s >= 40, $sformatf("sample strobe period 7 (n=%0d bad=%0d)", n_s, bad_s));
    check(bad_w == 0 && n_w >= 20, $sformatf("sweep strobe period 13 (n=%0d bad=%0d)", n_w, bad_w));
    // Change the rate and restart.
    @(negedge clk); rec_div = 100; sweep_div = 1; div_load = 1;
    @(negedge clk); div_load = 0;
    last_s = -1; last_w = -1; n_s = 0; n_w = 0; bad_s = 0; bad_w = 0;
    exp_s = 100; exp_w = 1;
    begin
      int t_load;
      t_load = cyc;
      wait (sample_stb);
      @(posedge clk);
      check(cyc - t_load == 100, $sformatf("first strobe 100 cycles after load (%0d)", cyc - t_load));
    end
    repeat (1000) @(posedge clk);
    check(bad_s == 0 && n_s == 10, $sformatf("sample strobe period 100 (n=%0d bad=%0d)", n_s, bad_s));
    check(bad_w == 0 && n_w > 1000, $sformatf("divider 1 strobes every cycle (n=%0d)", n_w));
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
