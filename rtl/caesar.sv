// caesar: control engine of the accelerator (Configurable and Adaptive Execution
// Scheduler for Advanced Resource Allocation).
//
// CAESAR takes one custom instruction per layer tile from the host and runs it
// on the SYCore array without further host help:
//   ISA register / DNN parameters  the accepted instruction is held in a
//                                  register; derived sizes (k*passes, word
//                                  counts) are computed once on decode;
//   scheduler / PE select          checks the tile against the array and buffer
//                                  sizes and enables only the 4x4 sub-blocks
//                                  that the M x N tile covers;
//   data fetcher / address mapper  streams A (row-major), B (one column after
//                                  the other) and the bias from L2 into the
//                                  buffers of the west-column and north-row
//                                  sub-blocks, reads pipelined, one word a clock;
//   data-flow FSM                  starts the array, waits for every enabled RPE
//                                  to finish, writes the results back to L2 and
//                                  signals layer_done (and dnn_done on the last
//                                  layer); dnn_start and layer_start pulse
//                                  when a network's first instruction and
//                                  any instruction are accepted;
//   flags                          idle, busy, error (bad instruction or an RPE
//                                  overrun; after an overrun the array is left
//                                  to drain and nothing is written back), plus
//                                  the cycle count of the
//                                  compute phase and the number of active RPEs
//                                  as monitors.
// The names of these parts and their duties follow the paper; the instruction
// layout, the memory port, the data layout in L2 and every timing detail are
// this design's choices. Tiling of layers larger than the array, pruning and
// sparse formats are left to the host, which issues one instruction per tile.
//
// Memory port: l2_req with l2_we = 0 is a read whose data return on l2_rvalid /
// l2_rdata after any fixed or variable latency, in order; with l2_we = 1 it is a
// write. A request is taken every clock.
module caesar
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
  // host side
  input  logic             instr_valid,
  input  caesar_instr_t    instr,
  output logic             instr_ready,
  output logic             dnn_start,    // pulse: first layer of a network accepted
  output logic             layer_start,
  output logic             layer_done,
  output logic             dnn_done,
  output logic             flag_idle,
  output logic             flag_busy,
  output logic             flag_error,
  output logic [31:0]      compute_cycles,
  output logic [10:0]      active_rpes,
  // L2 memory port
  output logic             l2_req,
  output logic             l2_we,
  output logic [L2_AW-1:0] l2_addr,
  output data_t            l2_wdata,
  input  logic             l2_rvalid,
  input  data_t            l2_rdata,
  // array control
  output logic [NSB-1:0]   sb_en,
  output logic             chain_mode,
  output logic             arr_start,
  output af_sel_e          arr_af_sel,
  output logic [IDX_W:0]   arr_sm_n,
  output logic             stream_start,
  output logic [AW-1:0]    stream_len,
  output logic [AW-1:0]    stream_total,
  output logic             wr_en,
  output logic [SBW-1:0]   wr_sb,
  output logic [1:0]       wr_kind,
  output logic [$clog2(SB)-1:0] wr_lane,
  output logic [AW-1:0]    wr_addr,
  output data_t            wr_data,
  output logic [SBW-1:0]   rd_sb,
  output logic [RW-1:0]    rd_rpe,
  output logic [IDX_W-1:0] rd_idx,
  input  data_t            rd_data,
  input  logic             arr_done,
  input  logic             arr_overrun
);

  typedef enum logic [3:0] {
    C_IDLE, C_DECODE, C_SCHED, C_FETCH, C_START, C_STREAM, C_WAIT, C_DRAIN, C_WB, C_DONE
  } cstate_e;
  typedef enum logic [1:0] {PH_A, PH_B, PH_BIAS} phase_e;

  cstate_e       state;
  caesar_instr_t ir;             // ISA register
  logic [17:0]   kt;             // k * passes
  logic [23:0]   wc_b;           // words to fetch for B
  logic          bad;

  // fetcher
  phase_e        ph;
  logic [23:0]   iss_cnt, iss_total;
  logic [L2_AW-1:0] iss_addr;
  logic [5:0]    rsp_outer;
  logic [17:0]   rsp_inner;
  logic [23:0]   rsp_cnt;
  // write-back
  logic [5:0]    wb_r, wb_c;
  logic [4:0]    wb_j;
  logic [L2_AW-1:0] wb_addr;
  logic [1:0]    wait_cnt;
  logic          new_dnn;        // the next instruction opens a new network
  logic [18:0]   drain_cnt;      // clocks left to flush the array after an overrun

  assign instr_ready = (state == C_IDLE);
  assign flag_idle   = (state == C_IDLE);
  assign flag_busy   = !flag_idle;
  assign arr_af_sel  = ir.af_sel;
  assign arr_sm_n    = (IDX_W+1)'(ir.passes);
  assign stream_len  = AW'(ir.k);
  assign stream_total = AW'(kt);
  assign chain_mode  = 1'b1;

  // ---------------------------------------------------------------- L2 port
  always_comb begin
    l2_req   = 1'b0;
    l2_we    = 1'b0;
    l2_addr  = iss_addr;
    l2_wdata = rd_data;
    if (state == C_FETCH && iss_cnt < iss_total) l2_req = 1'b1;
    if (state == C_WB) begin
      l2_req  = 1'b1;
      l2_we   = 1'b1;
      l2_addr = wb_addr;
    end
  end

  // read-back address of the array output buffer during write-back
  assign rd_sb  = SBW'((int'(wb_r) / SB) * NBC + (int'(wb_c) / SB));
  assign rd_rpe = RW'((int'(wb_r) % SB) * SB + (int'(wb_c) % SB));
  assign rd_idx = IDX_W'(wb_j);

  // ---------------------------------------------------------------- buffer writes
  always_comb begin
    wr_en   = (state == C_FETCH) && l2_rvalid;
    wr_data = l2_rdata;
    wr_addr = AW'(rsp_inner);
    wr_lane = ($clog2(SB))'(rsp_outer % SB);
    unique case (ph)
      PH_A:    begin wr_kind = 2'd0; wr_sb = SBW'((int'(rsp_outer) / SB) * NBC); end
      PH_B:    begin wr_kind = 2'd1; wr_sb = SBW'(rsp_outer / SB); end
      default: begin wr_kind = 2'd2; wr_sb = SBW'(rsp_outer / SB); end
    endcase
  end

  function automatic logic [NSB-1:0] pe_select(input logic [5:0] m, input logic [5:0] n);
    logic [NSB-1:0] mask;
    mask = '0;
    for (int br = 0; br < NBR; br++)
      for (int bc = 0; bc < NBC; bc++)
        if (int'(m) > br * SB && int'(n) > bc * SB) mask[br*NBC+bc] = 1'b1;
    return mask;
  endfunction

  // ---------------------------------------------------------------- data-flow FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      ir <= '0; kt <= '0; wc_b <= '0; bad <= 1'b0;
      ph <= PH_A; iss_cnt <= '0; iss_total <= '0; iss_addr <= '0;
      rsp_outer <= '0; rsp_inner <= '0; rsp_cnt <= '0;
      wb_r <= '0; wb_c <= '0; wb_j <= '0; wb_addr <= '0; wait_cnt <= '0; drain_cnt <= '0;
      sb_en <= '0; arr_start <= 1'b0; stream_start <= 1'b0;
      layer_start <= 1'b0; layer_done <= 1'b0; dnn_done <= 1'b0;
      dnn_start <= 1'b0; new_dnn <= 1'b1;
      flag_error <= 1'b0; compute_cycles <= '0; active_rpes <= '0;
    end else begin
      arr_start    <= 1'b0;
      stream_start <= 1'b0;
      layer_start  <= 1'b0;
      dnn_start    <= 1'b0;
      layer_done   <= 1'b0;
      unique case (state)
        C_IDLE: if (instr_valid) begin
          ir          <= instr;
          dnn_done    <= 1'b0;
          flag_error  <= 1'b0;
          layer_start <= 1'b1;
          dnn_start   <= new_dnn;
          new_dnn     <= 1'b0;
          state       <= C_DECODE;
        end
        C_DECODE: begin
          kt   <= 18'(ir.k) * 18'(ir.passes);
          bad  <= (ir.m == 0) || (int'(ir.m) > ROWS) || (ir.n == 0) || (int'(ir.n) > COLS) ||
                  (ir.k == 0) || (ir.passes == 0) || (int'(ir.passes) > SM_DEPTH) ||
                  ((ir.af_sel != AF_SOFTMAX) && (ir.passes != 5'd1));
          state <= C_SCHED;
        end
        C_SCHED: begin
          wc_b <= 24'(ir.n) * 24'(kt);
          if (bad || int'(kt) > BUF_DEPTH) begin
            flag_error <= 1'b1;
            state      <= C_DONE;
          end else begin
            sb_en       <= pe_select(ir.m, ir.n);
            active_rpes <= 11'(ir.m) * 11'(ir.n);
            ph          <= PH_A;
            iss_cnt     <= '0;
            iss_total   <= 24'(ir.m) * 24'(kt);
            iss_addr    <= ir.a_base;
            rsp_outer   <= '0;
            rsp_inner   <= '0;
            rsp_cnt     <= '0;
            state       <= C_FETCH;
          end
        end
        C_FETCH: begin
          if (l2_req) begin
            iss_cnt  <= iss_cnt + 1'b1;
            iss_addr <= iss_addr + 1'b1;
          end
          if (l2_rvalid) begin
            rsp_cnt <= rsp_cnt + 1'b1;
            if ((ph == PH_BIAS) || (rsp_inner == kt - 1'b1)) begin
              rsp_inner <= '0;
              rsp_outer <= rsp_outer + 1'b1;
            end else begin
              rsp_inner <= rsp_inner + 1'b1;
            end
          end
          if (l2_rvalid && rsp_cnt + 1'b1 == iss_total) begin
            rsp_cnt   <= '0;
            rsp_outer <= '0;
            rsp_inner <= '0;
            iss_cnt   <= '0;
            unique case (ph)
              PH_A: begin
                ph <= PH_B; iss_total <= wc_b; iss_addr <= ir.b_base;
              end
              PH_B: begin
                ph <= PH_BIAS; iss_total <= 24'(ir.n); iss_addr <= ir.bias_base;
              end
              default: state <= C_START;
            endcase
          end
        end
        C_START: begin
          arr_start      <= 1'b1;
          compute_cycles <= '0;
          state          <= C_STREAM;
        end
        C_STREAM: begin
          stream_start <= 1'b1;
          wait_cnt     <= 2'd2;
          state        <= C_WAIT;
        end
        C_WAIT: begin
          compute_cycles <= compute_cycles + 1'b1;
          if (wait_cnt != 0) wait_cnt <= wait_cnt - 1'b1;
          else if (arr_overrun) begin
            // an RPE refused a sum: the layer's results are incomplete, so
            // nothing is written back; let the streams run out first
            flag_error <= 1'b1;
            drain_cnt  <= 19'(kt) + 19'(ROWS + COLS + 64);
            state      <= C_DRAIN;
          end else if (arr_done) begin
            wb_r <= '0; wb_c <= '0; wb_j <= '0; wb_addr <= ir.out_base;
            state <= C_WB;
          end
        end
        C_DRAIN: begin
          drain_cnt <= drain_cnt - 1'b1;
          if (drain_cnt == 0) state <= C_DONE;
        end
        C_WB: begin
          wb_addr <= wb_addr + 1'b1;
          if (wb_j + 1'b1 != ir.passes) wb_j <= wb_j + 1'b1;
          else begin
            wb_j <= '0;
            if (wb_c + 1'b1 != ir.n) wb_c <= wb_c + 1'b1;
            else begin
              wb_c <= '0;
              if (wb_r + 1'b1 != ir.m) wb_r <= wb_r + 1'b1;
              else state <= C_DONE;
            end
          end
        end
        C_DONE: begin
          sb_en      <= '0;
          layer_done <= 1'b1;
          if (ir.last_layer) begin
            dnn_done <= 1'b1;
            new_dnn  <= 1'b1;
          end
          state      <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
