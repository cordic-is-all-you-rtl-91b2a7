// tb_caesar: unit test of the CAESAR control engine with a behavioural L2
// memory (3-clock read latency) and a behavioural stand-in for the array that
// records every buffer write, finishes a random number of clocks after the
// stream starts and returns a known pattern on its result port. For random
// tiles the test checks that
//   * every buffer write carries the right L2 word to the right sub-block,
//     lane and address, and that the word count is exact;
//   * only the sub-blocks covered by the tile are enabled (PE select);
//   * the stream length, stream total and softmax count match the instruction;
//   * reads are pipelined: the fetch phase takes at most the number of words
//     plus a small constant per phase;
//   * the write-back puts result (r, c, j) at out_base + (r*n + c)*passes + j;
//   * a malformed instruction and an overrun raise the error flag and write
//     nothing back; layer_done and dnn_done are pulsed / held as specified;
//   * layer_start pulses for every instruction, dnn_start only for the first.
module tb_caesar;
  import sycore_pkg::*;

  localparam int ROWS = 8, COLS = 8, SB = 4, DEPTH = 64, SMD = 16;
  localparam int NBR = ROWS / SB, NBC = COLS / SB, NSB = NBR * NBC;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0;
  caesar_instr_t instr;
  logic instr_ready, dnn_start, layer_start, layer_done, dnn_done, flag_idle, flag_busy, flag_error;
  logic [31:0] compute_cycles;
  logic [10:0] active_rpes;
  logic l2_req, l2_we, l2_rvalid;
  logic [L2_AW-1:0] l2_addr;
  data_t l2_wdata, l2_rdata;
  logic [NSB-1:0] sb_en;
  logic chain_mode, arr_start, stream_start, wr_en;
  af_sel_e arr_af_sel;
  logic [4:0] arr_sm_n;
  logic [6:0] stream_len, stream_total, wr_addr;
  logic [1:0] wr_sb, wr_kind, wr_lane;
  data_t wr_data, rd_data;
  logic [1:0] rd_sb;
  logic [3:0] rd_rpe, rd_idx;
  logic arr_done = 0, arr_overrun = 0;
  int checks = 0, failures = 0;

  caesar #(.ROWS(ROWS), .COLS(COLS), .SB(SB), .BUF_DEPTH(DEPTH), .SM_DEPTH(SMD)) dut (.*);
  l2_model #(.AW(L2_AW), .LAT(3)) u_l2 (
    .clk, .req(l2_req), .we(l2_we), .addr(l2_addr), .wdata(l2_wdata),
    .rvalid(l2_rvalid), .rdata(l2_rdata)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // ---- behavioural array ----
  int sh [NSB][3][SB][DEPTH];   // [sb][kind][lane][addr], -999 = never written
  int n_wr, done_delay, n_start, make_overrun;
  bit running;
  function automatic int pattern(input int sb, input int rpe, input int idx);
    return ((sb * 37 + rpe * 11 + idx * 5) % 200) - 100;
  endfunction
  assign rd_data = data_t'(pattern(int'(rd_sb), int'(rd_rpe), int'(rd_idx)));

  always @(posedge clk) begin
    if (wr_en) begin
      sh[wr_sb][wr_kind][wr_lane][wr_addr] <= int'(wr_data);
      n_wr <= n_wr + 1;
    end
    if (arr_start) n_start <= n_start + 1;
    if (stream_start) begin running <= 1; done_delay <= $urandom_range(40, 5); end
    else if (running && done_delay > 0) done_delay <= done_delay - 1;
    if (running && done_delay == 1) begin
      if (make_overrun != 0) arr_overrun <= 1; else arr_done <= 1;
    end
    if (arr_start) begin arr_done <= 0; arr_overrun <= 0; running <= 0; end
  end

  int n_ok_layers, n_bad, n_ovr, n_partial, n_dnn, n_dnn_start, n_layer_start, n_instr;
  always @(posedge clk) begin
    if (dnn_start) n_dnn_start <= n_dnn_start + 1;
    if (layer_start) n_layer_start <= n_layer_start + 1;
  end

  task automatic run(input int m, input int n, input int k, input int p, input int af,
                     input bit last, input bit expect_bad, input bit overrun);
    caesar_instr_t ins;
    int kt, ab, bb, cb, ob, words, t, t_fetch, ld, exp_en, first_out;
    bit got_done;
    kt = k * p;
    ab = 'h100 * $urandom_range(1, 15); bb = 'h10000 + 'h100 * $urandom_range(0, 15);
    cb = 'h20000 + $urandom_range(0, 255); ob = 'h30000 + 'h100 * $urandom_range(0, 15);
    for (int i = 0; i < m * kt; i++) u_l2.mem[ab + i] = data_t'($urandom);
    for (int i = 0; i < n * kt; i++) u_l2.mem[bb + i] = data_t'($urandom);
    for (int i = 0; i < n; i++) u_l2.mem[cb + i] = data_t'($urandom);
    for (int i = 0; i < m * n * p + 4; i++) u_l2.mem[ob + i] = 8'sd77;
    for (int s = 0; s < NSB; s++) for (int q = 0; q < 3; q++) for (int l = 0; l < SB; l++)
      for (int a = 0; a < DEPTH; a++) sh[s][q][l][a] = -999;
    n_wr = 0; n_start = 0; make_overrun = overrun;
    ins = '0;
    ins.m = 6'(m); ins.n = 6'(n); ins.k = 13'(k); ins.passes = 5'(p); ins.af_sel = af_sel_e'(af);
    ins.last_layer = last; ins.a_base = L2_AW'(ab); ins.b_base = L2_AW'(bb);
    ins.bias_base = L2_AW'(cb); ins.out_base = L2_AW'(ob);
    while (!instr_ready) @(negedge clk);
    instr = ins; instr_valid = 1; n_instr++;
    @(negedge clk);
    instr_valid = 0;
    check(!instr_ready && flag_busy, "busy after accept");
    t = 0; t_fetch = -1; got_done = 0; ld = 0;
    while (!layer_done && t < 20000) begin
      if (arr_start && t_fetch < 0) begin
        t_fetch = t;
        exp_en = 0;
        for (int br = 0; br < NBR; br++) for (int bc = 0; bc < NBC; bc++)
          if (br * SB < m && bc * SB < n) exp_en |= 1 << (br * NBC + bc);
        check(int'(sb_en) == exp_en, $sformatf("sb_en %b exp %b", sb_en, exp_en));
        check(int'(arr_af_sel) == af, "af_sel");
        check(int'(arr_sm_n) == p, "sm_n");
      end
      if (stream_start) begin
        check(int'(stream_len) == k && int'(stream_total) == kt, "stream length/total");
        check(chain_mode, "chain mode");
      end
      @(negedge clk); t++;
    end
    check(layer_done, "layer_done");
    check(flag_error == (expect_bad || overrun), "error flag");
    check(dnn_done == last, "dnn_done");
    if (dnn_done) n_dnn++;
    if (expect_bad) begin
      check(n_start == 0 && n_wr == 0, "bad instruction must not start the array");
      n_bad += flag_error;
    end else begin
      words = m * kt + n * kt + n;
      check(n_wr == words, $sformatf("buffer writes %0d exp %0d", n_wr, words));
      // pipelined fetch: one word a clock plus a fixed cost per phase
      check(t_fetch >= 0 && t_fetch <= words + 3 * 8, $sformatf("fetch took %0d clocks for %0d words", t_fetch, words));
      for (int r = 0; r < m; r++) for (int e = 0; e < kt; e++)
        check(sh[(r / SB) * NBC][0][r % SB][e] == int'(u_l2.mem[ab + r * kt + e]), "A word");
      for (int c = 0; c < n; c++) begin
        for (int e = 0; e < kt; e++)
          check(sh[c / SB][1][c % SB][e] == int'(u_l2.mem[bb + c * kt + e]), "B word");
        check(sh[c / SB][2][c % SB][0] == int'(u_l2.mem[cb + c]), "bias word");
      end
      for (int r = 0; r < m; r++) for (int c = 0; c < n; c++) for (int j = 0; j < p; j++) begin
        int want;
        want = overrun ? 77 : pattern((r / SB) * NBC + c / SB, (r % SB) * SB + c % SB, j);
        check(int'(u_l2.mem[ob + (r * n + c) * p + j]) == want, "write-back word");
      end
      check(int'(u_l2.mem[ob + m * n * p]) == 77, "no write past the tile");
      if (overrun) n_ovr += flag_error;
      else begin
        n_ok_layers++;
        if (m * n < ROWS * COLS) n_partial++;
        check(int'(active_rpes) == m * n, "active RPEs");
      end
    end
    @(negedge clk);
    check(!layer_done, "layer_done is a pulse");
    check(flag_idle, "idle after layer");
  endtask

  initial begin
    instr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(flag_idle && instr_ready && !flag_busy, "idle after reset");
    run(8, 8, 8, 1, 0, 0, 0, 0);
    for (int it = 0; it < 40; it++) begin
      int m, n, k, p, af;
      m = $urandom_range(1, ROWS); n = $urandom_range(1, COLS);
      af = $urandom_range(0, 3);
      p = (af == 3) ? $urandom_range(1, 6) : 1;
      k = $urandom_range(1, DEPTH / p);
      run(m, n, k, p, af, 0, 0, ($urandom_range(0, 5) == 0));
    end
    run(0, 4, 4, 1, 0, 0, 1, 0);          // m = 0
    run(4, COLS + 1, 4, 1, 1, 0, 1, 0);   // n larger than the array
    run(4, 4, 4, 3, 2, 0, 1, 0);          // passes > 1 without softmax
    run(4, 4, DEPTH, 2, 3, 0, 1, 0);      // k*passes larger than the buffer
    run(3, 5, 6, 1, 2, 1, 0, 0);          // last layer
    check(n_ok_layers > 0 && n_partial > 0, "normal and partial tiles ran");
    check(n_bad == 4, "every malformed instruction flagged");
    check(n_ovr > 0, "overrun flagged");
    check(n_dnn == 1, "dnn_done exactly on the last layer");
    check(n_dnn_start == 1, "dnn_start once, on the first instruction");
    check(n_layer_start == n_instr, "layer_start on every instruction");
    $display("layers ok=%0d partial=%0d bad=%0d overrun=%0d dnn_done=%0d", n_ok_layers, n_partial, n_bad, n_ovr, n_dnn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
