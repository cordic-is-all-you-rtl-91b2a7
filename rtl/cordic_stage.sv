// cordic_stage: one CORDIC micro-rotation, the basic element every CORDIC unit of
// the processing element is built from.
//
// It evaluates, for a shift amount i and angle constant E_i,
//   y' = y + d * (x >>> i)
//   x' = x + d * (y >>> i)   in hyperbolic mode, x' = x otherwise
//   z' = z - d * E_i
// The direction d is +1/-1. In the two rotation modes d follows the sign of z
// (d = +1 for z >= 0), which drives z to zero; in linear vectoring mode d is the
// opposite of sign(x*y), which drives y to zero and leaves z = y0/x0.
// The shifters, the three add/sub units, the X bypass multiplexer, the choice of
// the angle constant between the hyperbolic table and 2^-i, and the two selects
// (div_sel, hyp_sel) follow the stage drawing of the paper. The x update of the
// linear mode follows that drawing (x passes through unchanged) rather than the
// equation table, which lists x' = x - d*y*2^-i for the linear mode.
//
// Interface: purely combinational. The shift amount is an input so that the
// same stage serves a fixed pipeline position (constant shift, optimised away)
// and an iterative engine (shift from a counter).
module cordic_stage
  import sycore_pkg::*;
#(
  parameter int W = ACC_W
) (
  input  logic                 div_sel,   // 1: linear vectoring (division)
  input  logic                 hyp_sel,   // 1: hyperbolic rotation
  input  logic [4:0]           shift,     // i
  input  logic signed [W-1:0]  angle,     // E_i
  input  logic signed [W-1:0]  x_i,
  input  logic signed [W-1:0]  y_i,
  input  logic signed [W-1:0]  z_i,
  output logic signed [W-1:0]  x_o,
  output logic signed [W-1:0]  y_o,
  output logic signed [W-1:0]  z_o
);

  logic                d_pos;   // d = +1
  logic signed [W-1:0] x_sh, y_sh;

  always_comb begin
    if (div_sel) d_pos = (x_i[W-1] != y_i[W-1]);   // opposite signs -> add
    else         d_pos = !z_i[W-1];
    x_sh = x_i >>> shift;
    y_sh = y_i >>> shift;
    y_o  = d_pos ? (y_i + x_sh) : (y_i - x_sh);
    z_o  = d_pos ? (z_i - angle) : (z_i + angle);
    if (hyp_sel) x_o = d_pos ? (x_i + y_sh) : (x_i - y_sh);
    else         x_o = x_i;
  end

endmodule
