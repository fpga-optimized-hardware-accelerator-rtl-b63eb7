// cordic: iterative shift-and-add CORDIC, rotation and vectoring modes.
//
// Three registers x, y, z are updated once per clock for ITER clocks. In
// each step i the pair (x, y) is rotated by +-atan(2^-i) using only shifts
// and adds, and z collects or spends that angle, taken from the arctangent
// table accel_pkg::atan_w. Rotation mode (CORDIC_ROTATE) turns (x, y) by the
// angle z and drives z to zero; vectoring mode (CORDIC_VECTOR) turns (x, y)
// onto the positive x axis, so x ends as K*|(x, y)| and z as z_in plus the
// angle of (x, y). K ~ 1.6468 is the CORDIC gain; it is not removed here.
// A pre-rotation by pi (negating x and y) before the first step extends the
// range to the full circle: in vectoring mode when x < 0, in rotation mode
// when |z| > pi/2.
//
// Angles are ANGLE_W-bit binary angles (2^ANGLE_W = full circle). x and y
// are WIDTH-bit signed; the caller leaves room for the gain. Timing: start
// is taken when busy is low; done is high for one clock, ITER+1 clocks after
// the clock in which start is high, together with the results, which then
// hold until the next start.
//
// From the paper: internal x, y, z registers, an angle lookup table of
// precomputed arctangents, and iterative shift/add updates. Widths, the
// iteration count, the pre-rotation and the handshake are this design's.
module cordic #(
  parameter int WIDTH   = 22,
  parameter int ANGLE_W = 20,
  parameter int ITER    = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  accel_pkg::cordic_mode_e   mode,
  input  logic signed [WIDTH-1:0]   x_in,
  input  logic signed [WIDTH-1:0]   y_in,
  input  logic signed [ANGLE_W-1:0] z_in,
  output logic                      busy,
  output logic                      done,
  output logic signed [WIDTH-1:0]   x_out,
  output logic signed [ANGLE_W-1:0] z_out,
  output logic signed [WIDTH-1:0]   y_out
);

  import accel_pkg::*;

  localparam int CW = $clog2(ITER + 1);
  localparam logic signed [ANGLE_W-1:0] HALF_TURN    = {1'b1, {(ANGLE_W-1){1'b0}}};
  localparam logic signed [ANGLE_W-1:0] QUARTER_TURN = {2'b01, {(ANGLE_W-2){1'b0}}};

  cordic_mode_e             mode_q;
  logic signed [WIDTH-1:0]  x, y;
  logic signed [ANGLE_W-1:0] z;
  logic [CW-1:0]            step;

  // Angle lookup table: atan(2^-i) for the current step.
  logic signed [ANGLE_W-1:0] atan_i;
  always_comb begin
    atan_i = '0;
    for (int unsigned i = 0; i < ITER; i++)
      if (step == CW'(i)) atan_i = ANGLE_W'(atan_w(i, ANGLE_W));
  end

  // Direction of the current step: 1 = rotate counter-clockwise.
  logic ccw;
  assign ccw = (mode_q == CORDIC_VECTOR) ? y[WIDTH-1] : !z[ANGLE_W-1];

  logic signed [WIDTH-1:0] xs, ys;
  assign xs = x >>> step;
  assign ys = y >>> step;

  // Pre-rotation decision for a new start.
  logic flip;
  always_comb begin
    if (mode == CORDIC_VECTOR) flip = x_in[WIDTH-1];
    else                       flip = (z_in > QUARTER_TURN) || (z_in < -QUARTER_TURN);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= CORDIC_ROTATE;
      x      <= '0;
      y      <= '0;
      z      <= '0;
      step   <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          mode_q <= mode;
          x      <= flip ? -x_in : x_in;
          y      <= flip ? -y_in : y_in;
          // Vectoring: the flipped vector's angle is off by pi, so start z
          // at pi. Rotation: pi of the angle is done by the flip.
          z      <= flip ? z_in + HALF_TURN : z_in;
          step   <= '0;
          busy   <= 1'b1;
        end
      end else begin
        if (ccw) begin
          x <= x - ys;
          y <= y + xs;
          z <= z - atan_i;
        end else begin
          x <= x + ys;
          y <= y - xs;
          z <= z + atan_i;
        end
        step <= step + 1'b1;
        if (step == CW'(ITER - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign x_out = x;
  assign y_out = y;
  assign z_out = z;

  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start)
    else $error("cordic: start while busy");

endmodule
