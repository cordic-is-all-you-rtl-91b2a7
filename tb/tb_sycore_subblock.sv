// tb_sycore_subblock: one 4x4 sub-block working on its own (both input
// multiplexers on the own buffers). Loads its input, weight and bias buffers,
// streams jobs of random length with every activation function, with the
// enable dropped at random clocks (gating must only stretch time), and reads
// all 16 results back from the output buffer for comparison with the
// reference model. A second pass feeds the rows and columns from the
// neighbour ports instead and checks that the multiplexers take them.
module tb_sycore_subblock;
  import sycore_pkg::*;
  import cordic_ref_pkg::*;

  localparam int SB = 4, DEPTH = 64;
  logic clk = 0, rst_n = 0, en = 1;
  logic x_from_west = 0, w_from_north = 0;
  logic [6:0] x_skew_base = 0, w_skew_base = 0;
  logic start = 0, stream_start = 0;
  af_sel_e af_sel = AF_RELU;
  logic [4:0] sm_n = 1;
  logic [6:0] stream_len = 1, stream_total = 1;
  logic wr_en = 0; logic [1:0] wr_kind = 0; logic [1:0] wr_lane = 0;
  logic [6:0] wr_addr = 0; data_t wr_data = 0;
  data_t west_x [SB]; logic west_v [SB], west_f [SB], west_l [SB];
  data_t east_x [SB]; logic east_v [SB], east_f [SB], east_l [SB];
  data_t north_w [SB], north_b [SB], south_w [SB], south_b [SB];
  logic [3:0] rd_rpe = 0; logic [3:0] rd_idx = 0;
  data_t rd_data;
  logic done_all, busy_any, overrun_any;
  int checks = 0, failures = 0;

  sycore_subblock #(.BUF_DEPTH(DEPTH)) dut (.*);

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

  task automatic wr(input int kind, input int lane, input int addr, input int data);
    @(negedge clk);
    wr_en = 1; wr_kind = 2'(kind); wr_lane = 2'(lane); wr_addr = 7'(addr); wr_data = data_t'(data);
    @(negedge clk);
    wr_en = 0;
  endtask

  int A [SB][DEPTH], B [SB][DEPTH], bias [SB];

  initial begin
    for (int l = 0; l < SB; l++) begin
      west_x[l] = 0; west_v[l] = 0; west_f[l] = 0; west_l[l] = 0;
      north_w[l] = 0; north_b[l] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 24; n++) begin
      int f, k, passes, kt, t;
      f = n % 4;
      passes = (f == 3) ? $urandom_range(1, 4) : 1;
      k = (f == 3) ? $urandom_range(6, 12) : $urandom_range(1, 12);
      kt = k * passes;
      for (int l = 0; l < SB; l++) begin
        for (int e = 0; e < kt; e++) begin
          A[l][e] = $urandom_range(0, 24) - 12;
          B[l][e] = (f == 0) ? $urandom_range(0, 255) - 128 : $urandom_range(0, 40) - 20;
          wr(0, l, e, A[l][e]);
          wr(1, l, e, B[l][e]);
        end
        bias[l] = $urandom_range(0, 20) - 10;
        wr(2, l, 0, bias[l]);
      end
      @(negedge clk);
      af_sel = af_sel_e'(f); sm_n = 5'(passes); stream_len = 7'(k); stream_total = 7'(kt);
      start = 1;
      @(negedge clk);
      start = 0; stream_start = 1;
      @(negedge clk);
      stream_start = 0;
      t = 0;
      while (!done_all && t < 2000) begin
        en = ($urandom_range(0, 4) != 0);
        @(negedge clk); t++;
      end
      en = 1;
      check(done_all && !overrun_any, "job finished");
      for (int r = 0; r < SB; r++)
        for (int c = 0; c < SB; c++) begin
          longint e[16]; longint sum;
          sum = 0;
          for (int j = 0; j < passes; j++) begin
            int xs[$], ws[$]; longint d;
            xs = {}; ws = {};
            for (int q = 0; q < k; q++) begin xs.push_back(A[r][j*k+q]); ws.push_back(B[c][j*k+q]); end
            d = dot_ref(xs, ws, bias[c]);
            e[j] = exp_ref(d);
            sum = w20(sum + e[j]);
            if (f != 3) begin
              rd_rpe = 4'(r * SB + c); rd_idx = 0; #1;
              check(int'(rd_data) == af_ref(f, d), $sformatf("f%0d rpe %0d,%0d got %0d exp %0d", f, r, c, rd_data, af_ref(f, d)));
            end
          end
          if (f == 3)
            for (int j = 0; j < passes; j++) begin
              rd_rpe = 4'(r * SB + c); rd_idx = 4'(j); #1;
              check(int'(rd_data) == to_data(div_ref(e[j], sum)), "softmax result");
            end
        end
    end

    // neighbour inputs: a one-beat ReLU job fed through the west / north ports
    x_from_west = 1; w_from_north = 1;
    @(negedge clk);
    af_sel = AF_RELU; sm_n = 1; start = 1;
    @(negedge clk);
    start = 0;
    for (int l = 0; l < SB; l++) begin
      west_x[l] = data_t'(16 + l); west_v[l] = 1; west_f[l] = 1; west_l[l] = 1;
      north_w[l] = data_t'(32 + 8 * l); north_b[l] = data_t'(l);
    end
    @(negedge clk);
    for (int l = 0; l < SB; l++) begin west_v[l] = 0; west_f[l] = 0; west_l[l] = 0; end
    repeat (30) @(negedge clk);
    check(done_all, "neighbour job done");
    // RPE (0,0) sees the port values directly
    rd_rpe = 0; rd_idx = 0; #1;
    begin
      int xs[$], ws[$];
      xs = {16}; ws = {32};
      check(int'(rd_data) == af_ref(0, dot_ref(xs, ws, 0)), "west/north multiplexers");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
