// sycore_subblock: a 4x4 group of processing elements with its own operand
// buffers, the unit the SYCore array is tiled from.
//
// Each sub-block holds
//   * an input buffer, one lane per RPE row, and a weight buffer, one lane per
//     RPE column plus a bias register per column, written through one shared
//     write port by the controller's data fetcher;
//   * a stream engine that, after `stream_start`, reads `stream_total` words
//     from every lane in order and tags them valid / first / last, where a pass
//     (one dot product) is `stream_len` words. Lane l starts `skew_base + l`
//     clocks late, the diagonal skew an output-stationary array needs;
//   * two banks of multiplexers choosing, per row and column, between the own
//     buffer and the stream arriving from the west / north neighbour
//     (x_from_west, w_from_north). With both selects low the sub-block computes
//     a 4x4 tile on its own; with them high it is one part of a larger array;
//   * the 4x4 RPE grid and an output (L1) buffer that keeps every result of
//     every RPE, indexed by RPE number (row*4+col) and softmax index.
// `en` is the sub-block enable: low, the RPEs and the stream engine hold their
// state (gating of unused sub-blocks). The buffer organisation, the skew
// scheme and the write/read ports are this design's choices; the paper gives
// the 4x4 grouping, the per-sub-block input and weight buffers, the
// multiplexers to the neighbours and the deactivation of unused sub-blocks.
//
// Timing: buffer writes take effect in one clock, the read port is
// combinational. The first word of lane l leaves the buffer register
// skew_base + l + 1 clocks after stream_start.
module sycore_subblock
  import sycore_pkg::*;
#(
  parameter int SB        = 4,
  parameter int BUF_DEPTH = 4608,
  parameter int SM_DEPTH  = 16,
  parameter int AW        = $clog2(BUF_DEPTH + 1),
  parameter int IDX_W     = $clog2(SM_DEPTH),
  parameter int RW        = $clog2(SB * SB)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             x_from_west,
  input  logic             w_from_north,
  input  logic [6:0]       x_skew_base,
  input  logic [6:0]       w_skew_base,
  // job control
  input  logic             start,
  input  af_sel_e          af_sel,
  input  logic [IDX_W:0]   sm_n,
  input  logic             stream_start,
  input  logic [AW-1:0]    stream_len,
  input  logic [AW-1:0]    stream_total,
  // buffer write port
  input  logic             wr_en,
  input  logic [1:0]       wr_kind,      // 0 input, 1 weight, 2 bias
  input  logic [$clog2(SB)-1:0] wr_lane,
  input  logic [AW-1:0]    wr_addr,
  input  data_t            wr_data,
  // neighbour streams
  input  data_t            west_x  [SB],
  input  logic             west_v  [SB],
  input  logic             west_f  [SB],
  input  logic             west_l  [SB],
  output data_t            east_x  [SB],
  output logic             east_v  [SB],
  output logic             east_f  [SB],
  output logic             east_l  [SB],
  input  data_t            north_w [SB],
  input  data_t            north_b [SB],
  output data_t            south_w [SB],
  output data_t            south_b [SB],
  // output buffer read port and status
  input  logic [RW-1:0]    rd_rpe,
  input  logic [IDX_W-1:0] rd_idx,
  output data_t            rd_data,
  output logic             done_all,
  output logic             busy_any,
  output logic             overrun_any
);

  // ------------------------------------------------------------ buffers
  data_t ibuf [SB][BUF_DEPTH];
  data_t wbuf [SB][BUF_DEPTH];
  data_t bias [SB];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_kind)
        2'd0:    ibuf[wr_lane][wr_addr] <= wr_data;
        2'd1:    wbuf[wr_lane][wr_addr] <= wr_data;
        default: bias[wr_lane] <= wr_data;
      endcase
    end
  end

  // ------------------------------------------------------------ stream engine
  logic        running;
  logic [15:0] t;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      t       <= '0;
    end else if (stream_start) begin
      running <= 1'b1;
      t       <= '0;
    end else if (en && running) begin
      t <= t + 1'b1;
      if (t > 16'(stream_total) + 16'd130) running <= 1'b0;
    end
  end

  data_t bx [SB];
  logic  bv [SB], bf [SB], bl [SB];
  data_t bw [SB];

  for (genvar l = 0; l < SB; l++) begin : g_lane
    logic [AW-1:0] xe, xp, we;
    logic          x_fire, w_fire;
    assign x_fire = running && (t >= 16'(x_skew_base) + 16'(l)) && (xe < stream_total);
    assign w_fire = running && (t >= 16'(w_skew_base) + 16'(l)) && (we < stream_total);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xe <= '0; xp <= '0; we <= '0;
        bx[l] <= '0; bv[l] <= 1'b0; bf[l] <= 1'b0; bl[l] <= 1'b0;
        bw[l] <= '0;
      end else if (stream_start) begin
        xe <= '0; xp <= '0; we <= '0;
        bv[l] <= 1'b0;
      end else if (en) begin
        bv[l] <= x_fire;
        if (x_fire) begin
          bx[l] <= ibuf[l][xe];
          bf[l] <= (xp == '0);
          bl[l] <= (xp == stream_len - 1'b1);
          xe    <= xe + 1'b1;
          xp    <= (xp == stream_len - 1'b1) ? '0 : xp + 1'b1;
        end
        if (w_fire) begin
          bw[l] <= wbuf[l][we];
          we    <= we + 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------ RPE grid
  data_t gx [SB][SB+1];
  logic  gv [SB][SB+1], gf [SB][SB+1], gl [SB][SB+1];
  data_t gw [SB+1][SB];
  data_t gb [SB+1][SB];

  logic             r_valid [SB*SB];
  data_t            r_data  [SB*SB];
  logic [IDX_W-1:0] r_idx   [SB*SB];
  logic [SB*SB-1:0] r_done, r_busy, r_ovr;

  for (genvar r = 0; r < SB; r++) begin : g_row_src
    assign gx[r][0] = x_from_west ? west_x[r] : bx[r];
    assign gv[r][0] = x_from_west ? west_v[r] : bv[r];
    assign gf[r][0] = x_from_west ? west_f[r] : bf[r];
    assign gl[r][0] = x_from_west ? west_l[r] : bl[r];
    assign east_x[r] = gx[r][SB];
    assign east_v[r] = gv[r][SB];
    assign east_f[r] = gf[r][SB];
    assign east_l[r] = gl[r][SB];
  end
  for (genvar c = 0; c < SB; c++) begin : g_col_src
    assign gw[0][c] = w_from_north ? north_w[c] : bw[c];
    assign gb[0][c] = w_from_north ? north_b[c] : bias[c];
    assign south_w[c] = gw[SB][c];
    assign south_b[c] = gb[SB][c];
  end

  for (genvar r = 0; r < SB; r++) begin : g_r
    for (genvar c = 0; c < SB; c++) begin : g_c
      rpe #(.SM_DEPTH(SM_DEPTH)) u_rpe (
        .clk, .rst_n, .en, .start, .af_sel, .sm_n,
        .x_in (gx[r][c]),   .xv_in (gv[r][c]),   .xf_in (gf[r][c]),   .xl_in (gl[r][c]),
        .x_out(gx[r][c+1]), .xv_out(gv[r][c+1]), .xf_out(gf[r][c+1]), .xl_out(gl[r][c+1]),
        .w_in (gw[r][c]),   .b_in (gb[r][c]),
        .w_out(gw[r+1][c]), .b_out(gb[r+1][c]),
        .res_valid(r_valid[r*SB+c]), .res_data(r_data[r*SB+c]), .res_idx(r_idx[r*SB+c]),
        .done (r_done[r*SB+c]), .busy (r_busy[r*SB+c]), .overrun (r_ovr[r*SB+c])
      );
    end
  end

  // ------------------------------------------------------------ output (L1) buffer
  data_t obuf [SB*SB][SM_DEPTH];

  always_ff @(posedge clk) begin
    for (int i = 0; i < SB*SB; i++)
      if (r_valid[i]) obuf[i][r_idx[i]] <= r_data[i];
  end

  assign rd_data     = obuf[rd_rpe][rd_idx];
  assign done_all    = &r_done;
  assign busy_any    = |r_busy;
  assign overrun_any = |r_ovr;

endmodule
