// tb_dac_out: checks source selection, scaling, gain and saturation of one
// DAC output against values computed here, for every source, random data
// and gains from 0 (taken as 1) to 2000; checks the one-cycle latency.
module tb_dac_out;
  import lia_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #4 clk = ~clk;

  lia_out_t data_i;
  logic signed [15:0] ref_i;
  dac_src_e src;
  logic [10:0] gain;
  logic signed [13:0] dac_o;
  logic sat_o;

  dac_out dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint expected(input lia_out_t d, input logic signed [15:0] r,
                                      input dac_src_e s, input int g);
    longint raw, v;
    case (s)
      SRC_X:   raw = longint'(d.x) / 16384 - ((d.x < 0 && d.x % 16384 != 0) ? 1 : 0);
      SRC_Y:   raw = longint'(d.y) / 16384 - ((d.y < 0 && d.y % 16384 != 0) ? 1 : 0);
      SRC_R:   raw = longint'({32'd0, d.r}) / 16384;
      SRC_PHI: raw = longint'(d.phi) / 262144 - ((d.phi < 0 && d.phi % 262144 != 0) ? 1 : 0);
      default: raw = longint'(r) / 4 - ((r < 0 && r % 4 != 0) ? 1 : 0);
    endcase
    v = (g == 0) ? raw : raw * longint'(g);
    if (v > 8191) v = 8191;
    if (v < -8192) v = -8192;
    return v;
  endfunction

  int n_sat = 0, n_lin = 0;
  initial begin
    data_i = '0; ref_i = 0; src = SRC_X; gain = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      longint e;
      bit     es;
      @(negedge clk);
      data_i.x   = $signed($urandom) >>> ($urandom % 24);
      data_i.y   = $signed($urandom) >>> ($urandom % 24);
      data_i.r   = $urandom >> ($urandom % 24);
      data_i.phi = $signed($urandom);
      ref_i      = 16'($urandom);
      src        = dac_src_e'($urandom % 5);
      gain       = (i % 7 == 0) ? 11'd0 : 11'($urandom_range(1, 2000));
      if (i % 3 == 0) gain = 11'($urandom_range(1, 4));
      e  = expected(data_i, ref_i, src, int'(gain));
      @(posedge clk); #1;
      es = (e == 8191 || e == -8192);
      check(longint'(dac_o) == e, $sformatf("src %s gain %0d: dac %0d expected %0d", src.name(), gain, dac_o, e));
      // Saturation flag: set exactly when the unclamped value is out of range
      // (a value sitting on the rail is allowed either way).
      if (!es) check(!sat_o, "no saturation flag in range");
      if (sat_o) n_sat++; else n_lin++;
    end
    check(n_sat > 100 && n_lin > 100, $sformatf("both saturated (%0d) and linear (%0d) samples seen", n_sat, n_lin));
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
