// cordic_mac_pipe: the multiply-accumulate datapath of a processing element,
// STAGES linear-rotation CORDIC stages separated by pipeline registers.
//
// The input x (activation) enters the X register, the weight enters Z and the
// bias (or zero) enters Y, so that after the last stage y = y0 + x*z, with the
// CORDIC approximation error of STAGES iterations (|error| <= |x| * 2^-(STAGES-1)).
// Stage k uses the fixed shift i = k and the angle constant 2^-k; because the
// shift is a constant per stage the shifters reduce to wiring. With
// STAGES = 5 the weight range is |z| < 2 - 2^-4, which covers the DATA format.
// Five stages and one MAC per clock follow the paper; starting the shift
// sequence at i = 0 is this design's choice.
//
// Timing: a new (x, z, y) set is accepted every cycle when en is high; its
// result appears STAGES cycles later, with the valid, first and last tags that
// travel alongside it. en low freezes the whole pipeline (sub-block gating).
module cordic_mac_pipe
  import sycore_pkg::*;
#(
  parameter int STAGES = MAC_STAGES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  data_t x_in,     // activation
  input  data_t z_in,     // weight
  input  acc_t  y_in,     // bias / addend
  output logic  out_valid,
  output logic  out_first,
  output logic  out_last,
  output acc_t  y_out     // y_in + x_in * z_in
);

  acc_t x_q [STAGES+1];
  acc_t y_q [STAGES+1];
  acc_t z_q [STAGES+1];
  logic v_q [STAGES+1];
  logic f_q [STAGES+1];
  logic l_q [STAGES+1];

  always_comb begin
    x_q[0] = data_to_acc(x_in);
    z_q[0] = data_to_acc(z_in);
    y_q[0] = y_in;
    v_q[0] = in_valid;
    f_q[0] = in_first;
    l_q[0] = in_last;
  end

  for (genvar k = 0; k < STAGES; k++) begin : g_stage
    acc_t xn, yn, zn;
    cordic_stage u_stage (
      .div_sel (1'b0),
      .hyp_sel (1'b0),
      .shift   (5'(k)),
      .angle   (lin_angle(k)),
      .x_i     (x_q[k]),
      .y_i     (y_q[k]),
      .z_i     (z_q[k]),
      .x_o     (xn),
      .y_o     (yn),
      .z_o     (zn)
    );
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x_q[k+1] <= '0;
        y_q[k+1] <= '0;
        z_q[k+1] <= '0;
        v_q[k+1] <= 1'b0;
        f_q[k+1] <= 1'b0;
        l_q[k+1] <= 1'b0;
      end else if (en) begin
        x_q[k+1] <= xn;
        y_q[k+1] <= yn;
        z_q[k+1] <= zn;
        v_q[k+1] <= v_q[k];
        f_q[k+1] <= f_q[k];
        l_q[k+1] <= l_q[k];
      end
    end
  end

  assign y_out     = y_q[STAGES];
  assign out_valid = v_q[STAGES];
  assign out_first = f_q[STAGES];
  assign out_last  = l_q[STAGES];

endmodule
