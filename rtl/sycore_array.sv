// sycore_array: the SYCore systolic array, ROWS x COLS reconfigurable
// processing elements (32 x 32 = 1024 by default) tiled from 4 x 4 sub-blocks.
//
// The array is output stationary: every RPE keeps its own dot product while the
// activations flow east along the rows and the weights (with the column bias)
// flow south along the columns. In chained mode (chain_mode = 1) all enabled
// sub-blocks form one large array: the sub-blocks of the west column stream
// activations from their input buffers, those of the north row stream weights
// from their weight buffers, and every other sub-block takes its operands from
// its neighbours through its input multiplexers; the lane skew grows with the
// global row / column number. With chain_mode = 0 every sub-block streams from
// its own buffers and computes its own 4x4 tile in parallel.
// sb_en enables sub-blocks one by one (sub-block b = br*(COLS/SB)+bc); the
// disabled ones hold still and are left out of done_all.
// The 32x32 size, the 4x4 sub-blocks, the neighbour multiplexers and the
// deactivation of unused sub-blocks follow the paper; the ports, the shared
// write and read buses and the chained/parallel switch are this design's.
//
// Timing: RPE(r, c) of a chained array receives word k of its dot product
// k + r + c + 1 clocks after stream_start.
// The streams that leave the east column and the south row of sub-blocks have
// no consumer; the tools report those edge signals as unused, which is expected.
module sycore_array
  import sycore_pkg::*;
#(
  parameter int ROWS      = 32,
  parameter int COLS      = 32,
  parameter int SB        = 4,
  parameter int BUF_DEPTH = 4608,
  parameter int SM_DEPTH  = 16,
  parameter int NBR       = ROWS / SB,
  parameter int NBC       = COLS / SB,
  parameter int NSB       = NBR * NBC,
  parameter int SBW       = (NSB > 1) ? $clog2(NSB) : 1,
  parameter int AW        = $clog2(BUF_DEPTH + 1),
  parameter int IDX_W     = $clog2(SM_DEPTH),
  parameter int RW        = $clog2(SB * SB)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NSB-1:0]   sb_en,
  input  logic             chain_mode,
  input  logic             start,
  input  af_sel_e          af_sel,
  input  logic [IDX_W:0]   sm_n,
  input  logic             stream_start,
  input  logic [AW-1:0]    stream_len,
  input  logic [AW-1:0]    stream_total,
  input  logic             wr_en,
  input  logic [SBW-1:0]   wr_sb,
  input  logic [1:0]       wr_kind,
  input  logic [$clog2(SB)-1:0] wr_lane,
  input  logic [AW-1:0]    wr_addr,
  input  data_t            wr_data,
  input  logic [SBW-1:0]   rd_sb,
  input  logic [RW-1:0]    rd_rpe,
  input  logic [IDX_W-1:0] rd_idx,
  output data_t            rd_data,
  output logic             done_all,
  output logic             busy_any,
  output logic             overrun_any
);

  data_t          sb_rd   [NSB];
  logic [NSB-1:0] sb_done, sb_busy, sb_ovr;

  for (genvar br = 0; br < NBR; br++) begin : g_br
    for (genvar bc = 0; bc < NBC; bc++) begin : g_bc
      localparam int B = br * NBC + bc;
      // streams entering from the west / north, and leaving east / south
      data_t wx [SB];
      logic  wv [SB], wf [SB], wl [SB];
      data_t nw [SB], nb [SB];
      data_t ex [SB];
      logic  ev [SB], ef [SB], el [SB];
      data_t sw [SB], sbias [SB];

      for (genvar l = 0; l < SB; l++) begin : g_l
        if (bc == 0) begin : g_edge_w
          assign wx[l] = '0;
          assign wv[l] = 1'b0;
          assign wf[l] = 1'b0;
          assign wl[l] = 1'b0;
        end else begin : g_nbr_w
          assign wx[l] = g_br[br].g_bc[bc-1].ex[l];
          assign wv[l] = g_br[br].g_bc[bc-1].ev[l];
          assign wf[l] = g_br[br].g_bc[bc-1].ef[l];
          assign wl[l] = g_br[br].g_bc[bc-1].el[l];
        end
        if (br == 0) begin : g_edge_n
          assign nw[l] = '0;
          assign nb[l] = '0;
        end else begin : g_nbr_n
          assign nw[l] = g_br[br-1].g_bc[bc].sw[l];
          assign nb[l] = g_br[br-1].g_bc[bc].sbias[l];
        end
      end

      sycore_subblock #(
        .SB(SB), .BUF_DEPTH(BUF_DEPTH), .SM_DEPTH(SM_DEPTH)
      ) u_sb (
        .clk, .rst_n,
        .en           (sb_en[B]),
        .x_from_west  (chain_mode && (bc != 0)),
        .w_from_north (chain_mode && (br != 0)),
        .x_skew_base  (chain_mode ? 7'(br * SB) : 7'd0),
        .w_skew_base  (chain_mode ? 7'(bc * SB) : 7'd0),
        .start, .af_sel, .sm_n,
        .stream_start, .stream_len, .stream_total,
        .wr_en        (wr_en && (wr_sb == SBW'(B))),
        .wr_kind, .wr_lane, .wr_addr, .wr_data,
        .west_x (wx), .west_v (wv), .west_f (wf), .west_l (wl),
        .east_x (ex), .east_v (ev), .east_f (ef), .east_l (el),
        .north_w(nw), .north_b(nb),
        .south_w(sw), .south_b(sbias),
        .rd_rpe, .rd_idx,
        .rd_data    (sb_rd[B]),
        .done_all   (sb_done[B]),
        .busy_any   (sb_busy[B]),
        .overrun_any(sb_ovr[B])
      );
    end
  end

  assign rd_data     = sb_rd[rd_sb];
  assign done_all    = &(sb_done | ~sb_en);
  assign busy_any    = |(sb_busy & sb_en);
  assign overrun_any = |(sb_ovr & sb_en);

endmodule
