// tb_sycore_array: test of the SYCore array at 8x8 RPEs (2x2 sub-blocks) with
// its buffers written directly through the write port.
//   * Chain mode: only the west-column input buffers and the north-row weight
//     buffers are loaded; activations travel east and weights south across
//     sub-block borders, so RPE (r, c) must end with act(A[r] . B[c] + bias[c]).
//   * Parallel mode: every sub-block computes its own 4x4 tile from its own
//     buffers.
//   * Partial enable: only some sub-blocks are enabled; done_all must ignore
//     the others.
// Every RPE result is compared with the reference model. The time from
// stream_start to done_all is checked against the bound given by the stream
// length, the skew across the array, the five MAC stages and the activation
// latency (one clock for ReLU, nine for tanh / sigmoid).
module tb_sycore_array;
  import sycore_pkg::*;
  import cordic_ref_pkg::*;

  localparam int ROWS = 8, COLS = 8, SB = 4, DEPTH = 64, SMD = 16;
  localparam int NBR = ROWS / SB, NBC = COLS / SB, NSB = NBR * NBC;

  logic clk = 0, rst_n = 0;
  logic [NSB-1:0] sb_en = '0;
  logic chain_mode = 1, start = 0, stream_start = 0, wr_en = 0;
  af_sel_e af_sel = AF_RELU;
  logic [4:0] sm_n = 5'd1;
  logic [6:0] stream_len = '0, stream_total = '0, wr_addr = '0;
  logic [1:0] wr_sb = '0, wr_kind = '0, wr_lane = '0, rd_sb = '0;
  data_t wr_data = '0, rd_data;
  logic [3:0] rd_rpe = '0, rd_idx = '0;
  logic done_all, busy_any, overrun_any;
  int checks = 0, failures = 0;

  sycore_array #(.ROWS(ROWS), .COLS(COLS), .SB(SB), .BUF_DEPTH(DEPTH), .SM_DEPTH(SMD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  int A [NSB][SB][DEPTH], B [NSB][SB][DEPTH], BI [NSB][SB];
  int n_chain, n_par, n_partial;

  task automatic wr(input int sb, input int kind, input int lane, input int addr, input int v);
    wr_en = 1; wr_sb = 2'(sb); wr_kind = 2'(kind); wr_lane = 2'(lane); wr_addr = 7'(addr);
    wr_data = data_t'(v);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic run(input bit chain, input int en, input int af, input int k);
    int t, bound, lat;
    for (int s = 0; s < NSB; s++) for (int l = 0; l < SB; l++) begin
      for (int e = 0; e < k; e++) begin
        A[s][l][e] = $urandom_range(0, 40) - 20;
        B[s][l][e] = $urandom_range(0, 60) - 30;
        wr(s, 0, l, e, A[s][l][e]);
        wr(s, 1, l, e, B[s][l][e]);
      end
      BI[s][l] = $urandom_range(0, 30) - 15;
      wr(s, 2, l, 0, BI[s][l]);
    end
    chain_mode = chain; sb_en = NSB'(en); af_sel = af_sel_e'(af); sm_n = 5'd1;
    stream_len = 7'(k); stream_total = 7'(k);
    start = 1; @(negedge clk); start = 0;
    stream_start = 1; @(negedge clk); stream_start = 0;
    lat = (af == 0) ? 1 : 9;
    bound = k + (chain ? (ROWS + COLS) : (2 * SB)) + MAC_STAGES + lat + 6;
    t = 1;
    while (!done_all && t < 1000) begin @(negedge clk); t++; end
    check(done_all && t <= bound, $sformatf("done after %0d clocks, bound %0d", t, bound));
    check(!overrun_any, "no overrun");
    for (int s = 0; s < NSB; s++) begin
      if (((en >> s) & 1) == 0) continue;
      for (int rr = 0; rr < SB; rr++) for (int cc = 0; cc < SB; cc++) begin
        int xs[$], ws[$], gr, gc, sa, sw, want, bias;
        longint d;
        gr = (s / NBC) * SB + rr; gc = (s % NBC) * SB + cc;
        sa = chain ? (gr / SB) * NBC : s;     // sub-block whose buffer feeds the row
        sw = chain ? (gc / SB) : s;           // sub-block whose buffer feeds the column
        xs = {}; ws = {};
        for (int e = 0; e < k; e++) begin
          xs.push_back(A[sa][rr][e]);
          ws.push_back(B[sw][cc][e]);
        end
        bias = BI[sw][cc];
        d = dot_ref(xs, ws, bias);
        want = af_ref(af, d);
        rd_sb = 2'(s); rd_rpe = 4'(rr * SB + cc); rd_idx = '0;
        #1;
        check(int'(rd_data) == want, $sformatf("chain=%0d sb %0d rpe (%0d,%0d): got %0d exp %0d",
                                               chain, s, rr, cc, rd_data, want));
      end
    end
    if (chain) n_chain++; else n_par++;
    if (en != (1 << NSB) - 1) n_partial++;
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(1, 'hF, 0, 9);
    run(1, 'hF, 2, 20);
    run(1, 'hF, 1, 33);
    run(0, 'hF, 0, 7);
    run(0, 'hF, 2, 12);
    run(1, 'h3, 0, 10);     // top row of sub-blocks only
    run(1, 'h1, 1, 6);      // one sub-block
    run(0, 'h6, 0, 8);
    check(n_chain > 0 && n_par > 0 && n_partial > 0, "all modes ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
