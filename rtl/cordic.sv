// cordic: pipelined CORDIC, rotation or vectoring mode.
//
// Rotation mode (VECTOR = 0) turns the vector (x_i, y_i) by the angle z_i;
// starting from (K*A, 0) it yields (A*cos z, A*sin z), which is how the DDS
// makes its sine and cosine. Vectoring mode (VECTOR = 1) turns (x_i, y_i)
// onto the positive x axis; x_o is then |v|/K and z_o = z_i + atan2(y_i, x_i),
// which gives the magnitude R and phase phi of the lock-in outputs.
// K = 0.60725... is the CORDIC gain correction; the caller applies it.
//
// Angles are unsigned fractions of a turn, 2^32 = 2*pi. A first stage folds
// the vector into the right half plane by a rotation of pi, then STAGES
// shift-and-add stages follow, one per clock, using the arctangent table of
// lia_pkg. Latency is STAGES+1 cycles; a new input is taken every cycle and
// valid_i travels alongside the data. Outputs are two bits wider than the
// inputs to hold the CORDIC growth of 1.647.
//
// The paper asks for R = sqrt(X^2+Y^2), phi = arctan(Y/X) and a sine/cosine
// reference from direct digital synthesis; using CORDIC for them is this
// design's choice.
module cordic
  import lia_pkg::*;
#(
  parameter int unsigned W      = 32,   // input width of x and y
  parameter int unsigned STAGES = 24,   // iterations, at most 30
  parameter bit          VECTOR = 1'b0  // 0: rotation, 1: vectoring
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_i,
  input  logic signed [W-1:0] x_i,
  input  logic signed [W-1:0] y_i,
  input  logic        [31:0]  z_i,
  output logic                valid_o,
  output logic signed [W+1:0] x_o,
  output logic signed [W+1:0] y_o,
  output logic        [31:0]  z_o
);

  localparam int unsigned IW = W + 2;

  logic signed [IW-1:0] xs [STAGES+1];
  logic signed [IW-1:0] ys [STAGES+1];
  logic        [31:0]   zs [STAGES+1];
  logic                 vs [STAGES+1];

  // Stage 0: fold into the right half plane.
  logic fold;
  always_comb begin
    if (VECTOR) fold = x_i[W-1];                 // x < 0
    else        fold = z_i[31] ^ z_i[30];        // pi/2 <= z < 3*pi/2
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
      vs[0] <= 1'b0;
    end else begin
      vs[0] <= valid_i;
      if (fold) begin
        xs[0] <= -IW'(x_i);
        ys[0] <= -IW'(y_i);
        zs[0] <= VECTOR ? 32'h8000_0000 : z_i - 32'h8000_0000;
      end else begin
        xs[0] <= IW'(x_i);
        ys[0] <= IW'(y_i);
        zs[0] <= VECTOR ? 32'h0 : z_i;
      end
    end
  end

  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    logic up;  // rotate counter-clockwise
    always_comb begin
      if (VECTOR) up = ys[i][IW-1];              // y < 0: turn up
      else        up = ~zs[i][31];               // angle left >= 0
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[i+1] <= '0;
        ys[i+1] <= '0;
        zs[i+1] <= '0;
        vs[i+1] <= 1'b0;
      end else begin
        vs[i+1] <= vs[i];
        if (up) begin
          xs[i+1] <= xs[i] - (ys[i] >>> i);
          ys[i+1] <= ys[i] + (xs[i] >>> i);
          zs[i+1] <= zs[i] - ATAN_TAB[i];
        end else begin
          xs[i+1] <= xs[i] + (ys[i] >>> i);
          ys[i+1] <= ys[i] - (xs[i] >>> i);
          zs[i+1] <= zs[i] + ATAN_TAB[i];
        end
      end
    end
  end

  assign x_o     = xs[STAGES];
  assign y_o     = ys[STAGES];
  assign z_o     = zs[STAGES];
  assign valid_o = vs[STAGES];

  initial assert (STAGES >= 1 && STAGES <= CORDIC_MAX_STAGES)
    else $error("cordic: STAGES out of range");

endmodule
