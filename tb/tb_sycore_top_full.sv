// tb_sycore_top_full: the accelerator at its full size, no parameter
// overrides (32x32 RPEs, 64 sub-blocks, 4608-word buffers). One ReLU tile with
// the shape of the first VGG-16 layer (3x3 kernel over 3 input channels, so
// k = 27) is run on all 1024 RPEs and every result is compared with the
// reference model. Its checking code is the same as in tb_sycore_top.
module tb_sycore_top_full;
  import sycore_pkg::*;
  import cordic_ref_pkg::*;

  localparam int  ROWS = 32, COLS = 32;
  localparam bit  FULL = 1;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0;
  caesar_instr_t instr;
  logic instr_ready, dnn_start, layer_start, layer_done, dnn_done, flag_idle, flag_busy, flag_error;
  logic [31:0] compute_cycles;
  logic [10:0] active_rpes;
  logic l2_req, l2_we, l2_rvalid;
  logic [L2_AW-1:0] l2_addr;
  data_t l2_wdata, l2_rdata;
  int checks = 0, failures = 0;

  sycore_top dut (.*);
  l2_model #(.AW(L2_AW)) u_l2 (
    .clk, .req(l2_req), .we(l2_we), .addr(l2_addr), .wdata(l2_wdata),
    .rvalid(l2_rvalid), .rdata(l2_rdata)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (FULL ? 2000000 : 400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // mechanism counters
  int n_relu, n_tanh, n_sig, n_soft, n_partial, n_bad, n_overrun, n_dnn_done, n_chain_layer;

  bit seen_overrun;
  always @(posedge clk) if (dut.arr_overrun) seen_overrun <= 1'b1;

  task automatic fill(input int base, input int count, input int lo, input int hi);
    for (int i = 0; i < count; i++) u_l2.mem[base + i] = data_t'($urandom_range(0, hi - lo) + lo);
  endtask

  // issue one instruction; if `expect_ok`, compare all results with the model
  task automatic run_layer(input caesar_instr_t ins, input bit expect_ok, input bit expect_err);
    int kt, t, afi, tmp, mm, nn, kk, pp, ab, bb, cb, ob, total;
    int expq [$];
    afi = int'(ins.af_sel);
    mm = int'(ins.m); nn = int'(ins.n); kk = int'(ins.k); pp = int'(ins.passes);
    ab = int'(ins.a_base); bb = int'(ins.b_base); cb = int'(ins.bias_base); ob = int'(ins.out_base);
    kt = kk * pp;
    total = mm * nn * pp;
    expq = {};
    for (int i = 0; i < total; i++) expq.push_back(0);
    if (expect_ok)
      for (int r = 0; r < mm; r++)
        for (int c = 0; c < nn; c++) begin
          longint e[16]; longint d, sum;
          sum = 0;
          for (int j = 0; j < pp; j++) begin
            int xs[$], ws[$];
            xs = {}; ws = {};
            for (int q = 0; q < kk; q++) begin
              xs.push_back(int'(u_l2.mem[ab + r * kt + j * kk + q]));
              ws.push_back(int'(u_l2.mem[bb + c * kt + j * kk + q]));
            end
            d = dot_ref(xs, ws, int'(u_l2.mem[cb + c]));
            e[j] = exp_ref(d);
            sum = w20(sum + e[j]);
            if (afi != 3) begin tmp = af_ref(afi, d); expq[r * nn + c] = tmp; end
          end
          if (afi == 3)
            for (int j = 0; j < pp; j++)
              begin tmp = to_data(div_ref(e[j], sum)); expq[(r * nn + c) * pp + j] = tmp; end
        end
    while (!instr_ready) @(negedge clk);
    seen_overrun = 0;
    instr = ins; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    t = 0;
    while (!layer_done && t < 1900000) begin @(negedge clk); t++; end
    check(layer_done, "layer_done");
    check(flag_error == expect_err, $sformatf("error flag %0d", flag_error));
    if (expect_ok) begin
      int bad = 0;
      for (int i = 0; i < expq.size(); i++) begin
        checks++;
        if (int'(u_l2.mem[ob + i]) != expq[i]) begin
          bad++;
          if (bad < 5) $display("word %0d got %0d exp %0d", i, u_l2.mem[ob + i], expq[i]);
        end
      end
      failures += bad;
      check(int'(active_rpes) == mm * nn, $sformatf("active RPE count %0d", active_rpes));
      // compute phase: stream kt words, skew across the tile, 5 MAC stages, then
      // 1 (ReLU), 9 (tanh, sigmoid) or 9 per value (softmax) activation clocks
      check(int'(compute_cycles) >= kt && int'(compute_cycles) <= kt + mm + nn + 5 + 9 * pp + 8,
            $sformatf("compute phase %0d clocks for kt=%0d", compute_cycles, kt));
      if (mm * nn < ROWS * COLS) n_partial++;
      case (afi)
        0: n_relu++;
        1: n_tanh++;
        2: n_sig++;
        default: n_soft++;
      endcase
    end
    if (expect_err) begin
      if (seen_overrun) n_overrun++; else n_bad++;
    end
    if (ins.last_layer) begin
      check(dnn_done, "dnn_done");
      if (dnn_done) n_dnn_done++;
    end
    $display("layer af=%0d m=%0d n=%0d k=%0d passes=%0d: %0d clocks, compute %0d",
             ins.af_sel, ins.m, ins.n, ins.k, ins.passes, t, compute_cycles);
  endtask

  function automatic caesar_instr_t mk(input af_sel_e f, input int m, input int n, input int k,
                                       input int passes, input int a, input int b, input int bias,
                                       input int o, input bit last);
    caesar_instr_t i;
    i = '0;
    i.last_layer = last; i.af_sel = f; i.m = 6'(m); i.n = 6'(n); i.k = 13'(k);
    i.passes = 5'(passes); i.a_base = L2_AW'(a); i.b_base = L2_AW'(b);
    i.bias_base = L2_AW'(bias); i.out_base = L2_AW'(o);
    return i;
  endfunction

  initial begin
    instr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(flag_idle && !flag_busy, "idle after reset");
    if (FULL) begin
      // one 32x32 tile of the first VGG-16 layer shape: 3x3 kernel over 3 channels
      fill('h00000, ROWS * 27, -64, 63);
      fill('h10000, COLS * 27, -64, 63);
      fill('h20000, COLS, -64, 63);
      run_layer(mk(AF_RELU, ROWS, COLS, 27, 1, 'h00000, 'h10000, 'h20000, 'h30000, 1), 1, 0);
    end else begin
      // layer 1: ReLU over the full array
      fill('h00000, 8 * 9, -64, 63);
      fill('h01000, 8 * 9, -64, 63);
      fill('h02000, 8, -32, 31);
      run_layer(mk(AF_RELU, 8, 8, 9, 1, 'h00000, 'h01000, 'h02000, 'h03000, 0), 1, 0);
      // layer 2 reads layer 1's 8x8 result as its input rows (k = 8)
      fill('h04000, 8 * 8, -12, 12);
      fill('h05000, 8, -8, 8);
      run_layer(mk(AF_RELU, 8, 8, 8, 1, 'h03000, 'h04000, 'h05000, 'h06000, 0), 1, 0);
      n_chain_layer++;
      // tanh and sigmoid on partly used arrays
      fill('h07000, 8 * 12, -12, 12);
      fill('h08000, 8 * 12, -20, 20);
      fill('h09000, 8, -10, 10);
      run_layer(mk(AF_TANH, 5, 6, 7, 1, 'h07000, 'h08000, 'h09000, 'h0A000, 0), 1, 0);
      run_layer(mk(AF_SIGMOID, 8, 3, 12, 1, 'h07000, 'h08000, 'h09000, 'h0B000, 0), 1, 0);
      // softmax over 3 passes of 6
      fill('h0C000, 8 * 18, -12, 12);
      fill('h0D000, 8 * 18, -20, 20);
      run_layer(mk(AF_SOFTMAX, 4, 7, 6, 3, 'h0C000, 'h0D000, 'h09000, 'h0E000, 0), 1, 0);
      // malformed: passes > 1 without softmax
      run_layer(mk(AF_RELU, 4, 4, 6, 2, 'h0C000, 'h0D000, 'h09000, 'h0F000, 0), 0, 1);
      // overrun: softmax dot products shorter than the hyperbolic stage
      run_layer(mk(AF_SOFTMAX, 4, 4, 2, 4, 'h0C000, 'h0D000, 'h09000, 'h0F000, 0), 0, 1);
      // last layer of the network
      run_layer(mk(AF_SIGMOID, 8, 8, 5, 1, 'h07000, 'h08000, 'h09000, 'h10000, 1), 1, 0);
      check(n_relu > 0, "ReLU layer ran");
      check(n_tanh > 0, "tanh layer ran");
      check(n_sig > 0, "sigmoid layer ran");
      check(n_soft > 0, "softmax layer ran");
      check(n_partial > 0, "partly used array");
      check(n_bad > 0, "malformed instruction flagged");
      check(n_overrun > 0, "RPE overrun flagged");
      check(n_chain_layer > 0, "layer fed by previous layer");
      check(n_dnn_done > 0, "DNN done");
      $display("mechanisms: relu=%0d tanh=%0d sigmoid=%0d softmax=%0d partial=%0d bad=%0d overrun=%0d chained=%0d dnn_done=%0d",
               n_relu, n_tanh, n_sig, n_soft, n_partial, n_bad, n_overrun, n_chain_layer, n_dnn_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
