// ram_model: behavioural model of the processor RAM seen through a
// valid/ready word-write port (not synthesizable; for testbenches only).
// It accepts a beat when ready is high; ready is random with READY_PCT
// percent probability each cycle, to exercise back-pressure. Written words
// are kept in an associative array indexed by byte address.
module ram_model #(
  parameter int unsigned READY_PCT = 100
) (
  input  logic        clk,
  input  logic        valid,
  input  logic [31:0] addr,
  input  logic [31:0] data,
  output logic        ready
);
  logic [31:0] mem [logic [31:0]];
  int unsigned writes = 0;
  int unsigned stalls = 0;
  int unsigned pct = READY_PCT;

  initial ready = 1'b0;

  always @(posedge clk) begin
    if (valid && ready) begin
      mem[addr] = data;
      writes++;
    end
    if (valid && !ready) stalls++;
    ready <= ($urandom_range(0, 99) < pct);
  end

  function automatic logic [31:0] read(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : 32'hDEAD_BEEF;
  endfunction

  function automatic void clear();
    mem.delete();
    writes = 0;
    stalls = 0;
  endfunction
endmodule
