// sycore_pkg: shared types and constants of the SYCore accelerator.
//
// All arithmetic is two's-complement fixed point. Operands that enter and leave
// the array (inputs, weights, bias, activations) are DATA_W = 8 bits with
// DATA_FRAC = 6 fractional bits (range [-2, 2)), the 8-bit fixed-point format the
// design is evaluated with. Inside a processing element every CORDIC register is
// ACC_W = 20 bits wide (2N+K with N = 8, K = 4, the accumulator width of a
// conventional PE) with ACC_FRAC = 12 fractional bits. The split of integer and
// fractional bits is this design's choice.
//
// The stage counts follow the 5+2 CORDIC processing element: five pipelined
// linear stages for the MAC, five iterations of the hyperbolic stage and four of
// the division stage. The hyperbolic angle table holds atanh(2^-i)*2^12 for
// i = 1..5 and HYP_X0 = 2^12 / prod(sqrt(1 - 2^-2i)), the start value that
// cancels the hyperbolic CORDIC gain.
package sycore_pkg;

  localparam int DATA_W     = 8;
  localparam int DATA_FRAC  = 6;
  localparam int ACC_W      = 20;
  localparam int ACC_FRAC   = 12;

  localparam int MAC_STAGES = 5;   // pipelined linear stages (shift i = 0..4)
  localparam int HYP_ITERS  = 5;   // hyperbolic iterations (shift i = 1..5)
  localparam int DIV_ITERS  = 4;   // division iterations (shift i = 0..3)

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Operating mode of one CORDIC stage (Div_Sel / Hyp_Sel of the stage).
  typedef enum logic [1:0] {
    CM_LIN_ROT = 2'd0,   // linear rotation: y += x*z        (MAC)
    CM_HYP_ROT = 2'd1,   // hyperbolic rotation: cosh, sinh   (exponential)
    CM_LIN_VEC = 2'd2    // linear vectoring: z += y/x        (division)
  } cordic_mode_e;

  // Activation function selected for a job.
  typedef enum logic [1:0] {
    AF_RELU    = 2'd0,
    AF_TANH    = 2'd1,
    AF_SIGMOID = 2'd2,
    AF_SOFTMAX = 2'd3
  } af_sel_e;

  // Custom instruction handed to the CAESAR controller: one layer tile, the
  // result of an M x K by K x N product per softmax pass (passes = 1 for the
  // other functions), written to L2 as M*N*passes 8-bit words. The field
  // layout is this design's own; the paper does not give the encoding.
  localparam int L2_AW = 20;
  typedef struct packed {
    logic             last_layer;   // raise DNN_done when this layer ends
    af_sel_e          af_sel;
    logic [5:0]       m;            // active array rows, 1..32
    logic [5:0]       n;            // active array columns, 1..32
    logic [12:0]      k;            // dot-product length of one pass
    logic [4:0]       passes;       // softmax vector length, 1..16
    logic [L2_AW-1:0] a_base;       // A: M rows of k*passes words
    logic [L2_AW-1:0] b_base;       // B: N columns of k*passes words
    logic [L2_AW-1:0] bias_base;    // N bias words
    logic [L2_AW-1:0] out_base;     // results, (row*N + col)*passes + j
  } caesar_instr_t;

  // Hyperbolic start value 1/K_h in ACC format.
  localparam acc_t HYP_X0 = acc_t'(4935);

  // atanh(2^-i) * 2^ACC_FRAC for i = 1..5.
  function automatic acc_t hyp_angle(input int unsigned i);
    case (i)
      1:       return acc_t'(2250);
      2:       return acc_t'(1046);
      3:       return acc_t'(515);
      4:       return acc_t'(256);
      5:       return acc_t'(128);
      default: return acc_t'(0);
    endcase
  endfunction

  // 2^-i in ACC format.
  function automatic acc_t lin_angle(input int unsigned i);
    return acc_t'(1 << ACC_FRAC) >>> i;
  endfunction

  // DATA format -> ACC format (sign extension and alignment of the binary point).
  function automatic acc_t data_to_acc(input data_t d);
    return acc_t'(d) <<< (ACC_FRAC - DATA_FRAC);
  endfunction

  // ACC format -> DATA format: truncation towards minus infinity, then saturation.
  function automatic data_t acc_to_data(input acc_t a);
    acc_t s;
    s = a >>> (ACC_FRAC - DATA_FRAC);
    if (s > acc_t'(127))       return data_t'(127);
    else if (s < acc_t'(-128)) return data_t'(-128);
    else                       return data_t'(s);
  endfunction

endpackage
