// sycore_top: the SYCore accelerator, the CAESAR control engine driving the
// ROWS x COLS array of CORDIC processing elements.
//
// The host (a RISC-V core in the paper's system) hands one custom instruction
// per layer tile to CAESAR; CAESAR fetches the operands from the shared L2
// memory through the l2_* port, runs the tile on the array (MAC in the
// five-stage CORDIC pipelines, then the selected activation function: ReLU,
// tanh, sigmoid or softmax) and writes the 8-bit results back to L2. The host
// keeps pooling and any layer that does not map to a matrix product.
//
// Ports: the instruction handshake, the L2 port and the status flags of CAESAR
// (see caesar.sv for the L2 port protocol and sycore_pkg.sv for the
// instruction fields). The L2 memory and its interconnect are outside.
//
// Timing of one tile (m x n outputs, dot length kt = k * passes): about
// (m + n) * kt + n clocks to fetch the operands, one word per clock; then
// kt + m + n + 5 clocks of streaming and MAC plus 1 (ReLU), 9 (tanh, sigmoid)
// or 5 * passes + 4 * passes (softmax) clocks of activation; then m * n * passes
// clocks of write-back. The array, its sub-blocks, the CORDIC pipeline and the
// CAESAR parts follow the paper; the single 8-bit memory port, the instruction
// layout and the tile-at-a-time operation are this design's choices.
module sycore_top
  import sycore_pkg::*;
#(
  parameter int ROWS      = 32,
  parameter int COLS      = 32,
  parameter int SB        = 4,
  parameter int BUF_DEPTH = 4608,
  parameter int SM_DEPTH  = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             instr_valid,
  input  caesar_instr_t    instr,
  output logic             instr_ready,
  output logic             dnn_start,
  output logic             layer_start,
  output logic             layer_done,
  output logic             dnn_done,
  output logic             flag_idle,
  output logic             flag_busy,
  output logic             flag_error,
  output logic [31:0]      compute_cycles,
  output logic [10:0]      active_rpes,
  output logic             l2_req,
  output logic             l2_we,
  output logic [L2_AW-1:0] l2_addr,
  output data_t            l2_wdata,
  input  logic             l2_rvalid,
  input  data_t            l2_rdata
);

  localparam int NSB   = (ROWS / SB) * (COLS / SB);
  localparam int SBW   = (NSB > 1) ? $clog2(NSB) : 1;
  localparam int AW    = $clog2(BUF_DEPTH + 1);
  localparam int IDX_W = $clog2(SM_DEPTH);
  localparam int RW    = $clog2(SB * SB);

  logic [NSB-1:0]   sb_en;
  logic             chain_mode, arr_start, stream_start;
  af_sel_e          af_sel;
  logic [IDX_W:0]   sm_n;
  logic [AW-1:0]    stream_len, stream_total;
  logic             wr_en;
  logic [SBW-1:0]   wr_sb, rd_sb;
  logic [1:0]       wr_kind;
  logic [$clog2(SB)-1:0] wr_lane;
  logic [AW-1:0]    wr_addr;
  data_t            wr_data, rd_data;
  logic [RW-1:0]    rd_rpe;
  logic [IDX_W-1:0] rd_idx;
  logic             arr_done, arr_busy, arr_overrun;

  caesar #(
    .ROWS(ROWS), .COLS(COLS), .SB(SB), .BUF_DEPTH(BUF_DEPTH), .SM_DEPTH(SM_DEPTH)
  ) u_caesar (
    .clk, .rst_n,
    .instr_valid, .instr, .instr_ready,
    .dnn_start, .layer_start, .layer_done, .dnn_done,
    .flag_idle, .flag_busy, .flag_error, .compute_cycles, .active_rpes,
    .l2_req, .l2_we, .l2_addr, .l2_wdata, .l2_rvalid, .l2_rdata,
    .sb_en, .chain_mode, .arr_start, .arr_af_sel (af_sel), .arr_sm_n (sm_n),
    .stream_start, .stream_len, .stream_total,
    .wr_en, .wr_sb, .wr_kind, .wr_lane, .wr_addr, .wr_data,
    .rd_sb, .rd_rpe, .rd_idx, .rd_data,
    .arr_done, .arr_overrun
  );

  sycore_array #(
    .ROWS(ROWS), .COLS(COLS), .SB(SB), .BUF_DEPTH(BUF_DEPTH), .SM_DEPTH(SM_DEPTH)
  ) u_array (
    .clk, .rst_n,
    .sb_en, .chain_mode,
    .start (arr_start), .af_sel, .sm_n,
    .stream_start, .stream_len, .stream_total,
    .wr_en, .wr_sb, .wr_kind, .wr_lane, .wr_addr, .wr_data,
    .rd_sb, .rd_rpe, .rd_idx, .rd_data,
    .done_all (arr_done), .busy_any (arr_busy), .overrun_any (arr_overrun)
  );

  // arr_busy is not needed by the controller, which waits on done_all.
  logic unused_busy;
  assign unused_busy = arr_busy;

endmodule
