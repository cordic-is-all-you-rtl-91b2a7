// tb_workloads: layer shapes of the networks the design is meant for, run on
// an 8x8 array (2x2 sub-blocks) with the full 4608-word buffers:
//   * VGG-16 / CIFAR-100 C5_x: a 3x3 kernel over 512 channels, k = 4608, the
//     longest dot product of that network, with ReLU;
//   * VGG-16 FC7: 4096 inputs per output, ReLU;
//   * LeNet-5 C3: a 5x5 kernel over 6 channels, k = 150, tanh;
//   * LeNet-5 output layer: 84 inputs, 10 classes, softmax over the 10 class
//     scores computed in one RPE (passes = 10, the input repeated per class).
// A tile of each is run end to end through the controller and every result
// is compared with the reference model. Operands are kept small so that long
// dot products stay inside the accumulator range.
module tb_workloads;
  import sycore_pkg::*;
  import cordic_ref_pkg::*;

  localparam int  ROWS = 8, COLS = 8, DEPTH = 4608;
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

  sycore_top #(.ROWS(ROWS), .COLS(COLS), .BUF_DEPTH(DEPTH)) dut (.*);
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
    // VGG-16 C5_x tile: 8 output positions x 8 output channels, k = 3*3*512
    fill('h00000, 8 * 4608, -3, 3);
    fill('h10000, 8 * 4608, -3, 3);
    fill('h20000, 8, -20, 20);
    run_layer(mk(AF_RELU, 8, 8, 4608, 1, 'h00000, 'h10000, 'h20000, 'h30000, 0), 1, 0);
    // VGG-16 FC7 tile: 8 inputs vectors x 8 outputs, k = 4096
    run_layer(mk(AF_RELU, 8, 8, 4096, 1, 'h00000, 'h10000, 'h20000, 'h31000, 0), 1, 0);
    // LeNet-5 C3 tile: 8 positions x 6 of its 16 channels, k = 5*5*6, tanh
    fill('h40000, 8 * 150, -20, 20);
    fill('h50000, 8 * 150, -8, 8);
    run_layer(mk(AF_TANH, 8, 6, 150, 1, 'h40000, 'h50000, 'h20000, 'h32000, 0), 1, 0);
    // LeNet-5 output layer: 84 inputs, 10 classes, softmax; 4 images
    fill('h60000, 840, -10, 10);
    fill('h78000, 4 * 84, -12, 12);
    for (int r = 0; r < 4; r++)
      for (int j = 0; j < 10; j++)
        for (int q = 0; q < 84; q++)
          u_l2.mem['h70000 + r * 840 + j * 84 + q] = u_l2.mem['h78000 + r * 84 + q];
    run_layer(mk(AF_SOFTMAX, 4, 1, 84, 10, 'h70000, 'h60000, 'h20000, 'h33000, 1), 1, 0);
    check(n_relu == 2 && n_tanh == 1 && n_soft == 1 && n_dnn_done == 1, "all workloads ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
