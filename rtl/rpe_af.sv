// rpe_af: activation-function unit of a processing element (the "+2" part of
// the 5+2 CORDIC processing element).
//
// It holds two iterative CORDIC engines, each a single cordic_stage reused over
// several clocks under a counter:
//   * the hyperbolic engine (HYP_ITERS = 5 iterations, shifts 1..5, angles
//     atanh(2^-i) from a table) rotates (1/K_h, 0, a) into (cosh a, sinh a);
//   * the division engine (DIV_ITERS = 4 iterations, shifts 0..3, linear
//     vectoring) turns (denominator, numerator, 0) into numerator/denominator.
// Between them sit the adders and multiplexers of the activation datapath:
//   tanh     a -> sinh / cosh
//   sigmoid  a -> e^a / (1 + e^a)          with e^a = cosh a + sinh a
//   softmax  a_1..a_n -> e^a_j / sum e^a   e^a_j kept in a register FIFO while
//                                          the adder accumulates the sum
//   ReLU     a -> max(a, 0)                bypasses both engines
// The result is returned in the 8-bit DATA format with saturation. The engines,
// their cycle counts, the FIFO and the adder follow the paper; the way the unit
// is sequenced (handshake, counters, result format) is this design's own.
// The hyperbolic engine converges for |a| <= 1.02 (the sum of its angles);
// inputs must be scaled into that range beforehand.
//
// Timing: `start` opens a job (af_sel, sm_n sampled then). An input is taken
// when in_valid and in_ready are high. tanh and sigmoid give out_valid 9 clocks
// after the input (5 hyperbolic + 4 division), ReLU 1 clock after. Softmax
// accepts sm_n inputs, 5 clocks each, then gives its sm_n results one every 4
// clocks, in input order, tagged with out_idx. `done` rises with the last
// result of the job and stays high until the next start. An input offered while
// the unit cannot take it sets the sticky `overrun` error flag.
module rpe_af
  import sycore_pkg::*;
#(
  parameter int SM_DEPTH = 16,
  parameter int IDX_W    = $clog2(SM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             start,
  input  af_sel_e          af_sel,
  input  logic [IDX_W:0]   sm_n,        // softmax vector length, 1..SM_DEPTH
  input  logic             in_valid,
  input  acc_t             in_data,
  output logic             in_ready,
  output logic             out_valid,
  output data_t            out_data,
  output logic [IDX_W-1:0] out_idx,
  output logic             done,
  output logic             busy,
  output logic             overrun
);

  typedef enum logic [1:0] {S_IDLE, S_HYP, S_DIV, S_SMDIV} state_e;

  state_e         state;
  af_sel_e        af_q;
  logic [IDX_W:0] n_q;
  logic [3:0]     cnt;
  acc_t           hx, hy, hz;
  acc_t           dx, dy, dz;
  acc_t           fifo [SM_DEPTH];
  logic [IDX_W:0] wr_ptr, rd_ptr;
  acc_t           sum;

  // ---------------------------------------------------------------- engines
  logic accept;
  acc_t hx_i, hy_i, hz_i, hx_o, hy_o, hz_o;
  logic [4:0] h_shift;
  acc_t dx_i, dy_i, dz_i, dx_o, dy_o, dz_o;
  logic [4:0] d_shift;
  acc_t e_new;           // e^a from the final hyperbolic iteration
  acc_t e_reg;           // e^a from the hyperbolic registers

  assign in_ready = (state == S_IDLE) && !done;
  assign accept   = en && in_valid && in_ready && (af_q != AF_RELU);
  assign busy     = (state != S_IDLE);

  always_comb begin
    if (state == S_IDLE) begin
      hx_i = HYP_X0; hy_i = '0; hz_i = in_data; h_shift = 5'd1;
    end else begin
      hx_i = hx; hy_i = hy; hz_i = hz; h_shift = 5'(cnt) + 5'd1;
    end
  end

  cordic_stage u_hyp (
    .div_sel (1'b0), .hyp_sel (1'b1),
    .shift   (h_shift), .angle (hyp_angle(int'(h_shift))),
    .x_i (hx_i), .y_i (hy_i), .z_i (hz_i),
    .x_o (hx_o), .y_o (hy_o), .z_o (hz_o)
  );

  assign e_new = hx_o + hy_o;
  assign e_reg = hx + hy;

  always_comb begin
    d_shift = 5'(cnt);
    if (cnt != 0) begin
      dx_i = dx; dy_i = dy; dz_i = dz;
    end else if (state == S_SMDIV) begin
      dx_i = sum; dy_i = fifo[rd_ptr[IDX_W-1:0]]; dz_i = '0;
    end else if (af_q == AF_TANH) begin
      dx_i = hx; dy_i = hy; dz_i = '0;                       // sinh / cosh
    end else begin
      dx_i = e_reg + acc_t'(1 << ACC_FRAC); dy_i = e_reg; dz_i = '0;  // e/(1+e)
    end
  end

  cordic_stage u_div (
    .div_sel (1'b1), .hyp_sel (1'b0),
    .shift   (d_shift), .angle (lin_angle(int'(d_shift))),
    .x_i (dx_i), .y_i (dy_i), .z_i (dz_i),
    .x_o (dx_o), .y_o (dy_o), .z_o (dz_o)
  );

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      af_q      <= AF_RELU;
      n_q       <= '0;
      cnt       <= '0;
      hx <= '0; hy <= '0; hz <= '0;
      dx <= '0; dy <= '0; dz <= '0;
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      sum       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_idx   <= '0;
      done      <= 1'b0;
      overrun   <= 1'b0;
    end else if (start) begin
      state     <= S_IDLE;
      af_q      <= af_sel;
      n_q       <= sm_n;
      cnt       <= '0;
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      sum       <= '0;
      out_valid <= 1'b0;
      done      <= 1'b0;
      overrun   <= 1'b0;
    end else if (en) begin
      out_valid <= 1'b0;
      if (in_valid && !in_ready) overrun <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (in_valid && in_ready && af_q == AF_RELU) begin
            out_data  <= acc_to_data(in_data[ACC_W-1] ? '0 : in_data);
            out_idx   <= '0;
            out_valid <= 1'b1;
            done      <= 1'b1;
          end else if (accept) begin
            hx <= hx_o; hy <= hy_o; hz <= hz_o;
            cnt   <= 4'd1;
            state <= S_HYP;
          end
        end
        S_HYP: begin
          hx <= hx_o; hy <= hy_o; hz <= hz_o;
          if (cnt == 4'(HYP_ITERS - 1)) begin
            cnt <= '0;
            if (af_q == AF_SOFTMAX) begin
              fifo[wr_ptr[IDX_W-1:0]] <= e_new;
              sum    <= sum + e_new;
              wr_ptr <= wr_ptr + 1'b1;
              state  <= (wr_ptr + 1'b1 == n_q) ? S_SMDIV : S_IDLE;
            end else begin
              state <= S_DIV;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DIV, S_SMDIV: begin
          dx <= dx_o; dy <= dy_o; dz <= dz_o;
          if (cnt == 4'(DIV_ITERS - 1)) begin
            cnt       <= '0;
            out_data  <= acc_to_data(dz_o);
            out_idx   <= rd_ptr[IDX_W-1:0];
            out_valid <= 1'b1;
            if (state == S_DIV || rd_ptr + 1'b1 == n_q) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
            rd_ptr <= rd_ptr + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
