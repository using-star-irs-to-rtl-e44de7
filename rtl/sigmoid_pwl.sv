// sigmoid_pwl: sigmoid activation by a four-segment piecewise-linear approximation.
//
// For |x| the segments are
//   |x| <  1      : 0.25    |x| + 0.5
//   |x| <  2.375  : 0.125   |x| + 0.625
//   |x| <  5      : 0.03125 |x| + 0.84375
//   |x| >= 5      : 1
// and sigmoid(-x) = 1 - sigmoid(x). All slopes are powers of two, so the unit is shifts,
// adds and comparisons only; the largest error against the exact sigmoid is below 0.02.
// Purely combinational.
//
// Interface: x is a signed accumulator-precision value with IN_FRAC fractional bits,
// y the result in Q1.14 (0 .. 16384). The paper asks for a sigmoid before the
// coefficient outputs and for piecewise-linear or table-based activations; the choice of
// these particular segments is this design's.
module sigmoid_pwl
  import gnn_pkg::*;
#(
  parameter int unsigned IN_FRAC = 2 * FRAC_BITS
) (
  input  acc_t  x,
  output coef_t y
);

  localparam int unsigned SH = COEF_FRAC - IN_FRAC;   // IN_FRAC must not exceed COEF_FRAC
  localparam logic [ACC_W:0] ONE    = (ACC_W+1)'(1) << IN_FRAC;
  localparam logic [ACC_W:0] BP_238 = (ACC_W+1)'(19) << (IN_FRAC - 3);   // 2.375
  localparam logic [ACC_W:0] BP_5   = (ACC_W+1)'(5) << IN_FRAC;

  logic [ACC_W:0] ax;
  logic [31:0]    ax14;
  logic [15:0]    yp;

  always_comb begin
    ax   = x[ACC_W-1] ? (ACC_W+1)'(-{x[ACC_W-1], x}) : (ACC_W+1)'(x);
    ax14 = 32'(ax) << SH;
    if (ax >= BP_5)        yp = 16'd16384;
    else if (ax >= BP_238) yp = 16'(ax14 >> 5) + 16'd13824;
    else if (ax >= ONE)    yp = 16'(ax14 >> 3) + 16'd10240;
    else                   yp = 16'(ax14 >> 2) + 16'd8192;
    y = x[ACC_W-1] ? coef_t'(16'd16384 - yp) : coef_t'(yp);
  end

endmodule
