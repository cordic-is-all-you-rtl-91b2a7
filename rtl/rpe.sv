// rpe: reconfigurable processing element, one cell of the systolic array.
//
// The element is a CORDIC(5,2) neuron: a five-stage pipelined linear CORDIC
// multiply-accumulate (cordic_mac_pipe) feeding an accumulator, followed by the
// activation-function unit (rpe_af) with its iterative hyperbolic and division
// stages. The array is output stationary: the activation x moves west to east
// and the weight w (with the column bias) moves north to south, each through
// one register per element, while the partial sum stays in this element.
//
// A dot product is a run of valid x beats from `first` to `last`. On `first`
// the bias enters the Y input of the MAC (y0 = bias), later beats enter with
// y0 = 0, and the accumulator adds the MAC results. When the product tagged
// `last` leaves the pipeline, the sum is handed to the activation unit. For
// softmax a job is sm_n dot products, whose sums form the softmax vector; the
// MAC keeps running while the hyperbolic stage works on the previous sum.
//
// A control FSM tracks the job as the paper describes it: IDLE, INIT (the first
// five clocks while the pipeline fills), MAC (products stream through), AF
// (activation stages working) and DONE (one clock, raising `done`, which then
// stays high until the next `start`). The beat tags, the bias-on-first
// convention and the handoff register are this design's choices.
//
// Timing: x/w forwarding latency 1 clock. Result of a ReLU job: 5 (MAC) +
// 1 (handoff) + 1 (ReLU) clocks after the `last` beat; tanh/sigmoid: 5 + 1 + 9.
module rpe
  import sycore_pkg::*;
#(
  parameter int SM_DEPTH = 16,
  parameter int IDX_W    = $clog2(SM_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,          // sub-block enable (clock enable)
  input  logic             start,       // opens a job, clears done
  input  af_sel_e          af_sel,
  input  logic [IDX_W:0]   sm_n,
  // west -> east activation stream
  input  data_t            x_in,
  input  logic             xv_in,
  input  logic             xf_in,
  input  logic             xl_in,
  output data_t            x_out,
  output logic             xv_out,
  output logic             xf_out,
  output logic             xl_out,
  // north -> south weight stream
  input  data_t            w_in,
  input  data_t            b_in,
  output data_t            w_out,
  output data_t            b_out,
  // results
  output logic             res_valid,
  output data_t            res_data,
  output logic [IDX_W-1:0] res_idx,
  output logic             done,
  output logic             busy,
  output logic             overrun
);

  typedef enum logic [2:0] {R_IDLE, R_INIT, R_MAC, R_AF, R_DONE} rpe_state_e;
  rpe_state_e state;

  // ------------------------------------------------------------ forwarding
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_out <= '0; xv_out <= 1'b0; xf_out <= 1'b0; xl_out <= 1'b0;
      w_out <= '0; b_out <= '0;
    end else if (en) begin
      x_out <= x_in; xv_out <= xv_in; xf_out <= xf_in; xl_out <= xl_in;
      w_out <= w_in; b_out <= b_in;
    end
  end

  // ------------------------------------------------------------ MAC + accumulate
  logic p_valid, p_first, p_last;
  acc_t p_y, acc, acc_next;

  cordic_mac_pipe u_mac (
    .clk, .rst_n, .en,
    .in_valid (xv_in), .in_first (xf_in), .in_last (xl_in),
    .x_in     (x_in),
    .z_in     (w_in),
    .y_in     (xf_in ? data_to_acc(b_in) : acc_t'(0)),
    .out_valid(p_valid), .out_first(p_first), .out_last(p_last),
    .y_out    (p_y)
  );

  assign acc_next = p_first ? p_y : (acc + p_y);

  logic af_valid;
  acc_t af_data;
  logic [IDX_W:0] dots, dots_needed;
  logic af_done, af_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      af_valid <= 1'b0;
      af_data  <= '0;
    end else if (en) begin
      af_valid <= 1'b0;
      if (p_valid) begin
        acc <= acc_next;
        if (p_last) begin
          af_valid <= 1'b1;
          af_data  <= acc_next;
        end
      end
    end
  end

  rpe_af #(.SM_DEPTH(SM_DEPTH)) u_af (
    .clk, .rst_n, .en, .start,
    .af_sel, .sm_n,
    .in_valid (af_valid), .in_data (af_data),
    .in_ready (),   // the handoff never waits: a refused sum raises overrun
    .out_valid(res_valid), .out_data(res_data), .out_idx(res_idx),
    .done     (af_done), .busy (af_busy), .overrun
  );

  // ------------------------------------------------------------ control FSM
  af_sel_e    af_q;
  logic       done_q;

  assign dots_needed = (af_q == AF_SOFTMAX) ? sm_n : (IDX_W+1)'(1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= R_IDLE;
      dots   <= '0;
      af_q   <= AF_RELU;
      done_q <= 1'b0;
    end else if (start) begin
      state  <= R_IDLE;
      dots   <= '0;
      af_q   <= af_sel;
      done_q <= 1'b0;
    end else if (en) begin
      if (af_valid) dots <= dots + 1'b1;
      unique case (state)
        R_IDLE:  if (xv_in && !done_q) state <= R_INIT;
        R_INIT:  if (p_valid) state <= R_MAC;     // pipeline filled
        R_MAC:   if (af_valid && dots + 1'b1 == dots_needed) state <= R_AF;
        R_AF:    if (af_done) state <= R_DONE;
        R_DONE:  begin state <= R_IDLE; done_q <= 1'b1; end
        default: state <= R_IDLE;
      endcase
    end
  end

  assign done = done_q;
  assign busy = (state != R_IDLE) || af_busy;

endmodule
