// tb_rpe_af: drives the activation-function unit with random inputs in every
// mode and checks the results against the reference model and the real
// functions, the latencies (ReLU 1, tanh/sigmoid 9, softmax 4 per output), the
// softmax output order and the overrun flag.
module tb_rpe_af;
  import sycore_pkg::*;
  import cordic_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, start = 0;
  af_sel_e af_sel = AF_RELU;
  logic [4:0] sm_n = 5'd1;
  logic in_valid = 0;
  acc_t in_data = 0;
  logic in_ready, out_valid, done, busy, overrun;
  data_t out_data;
  logic [3:0] out_idx;
  int checks = 0, failures = 0;

  rpe_af dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  task automatic open_job(input af_sel_e f, input int n);
    @(negedge clk);
    af_sel = f; sm_n = 5'(n); start = 1;
    @(negedge clk);
    start = 0;
  endtask

  // one scalar activation; returns the output and the latency in clocks
  task automatic scalar(input af_sel_e f, input longint a, output int q, output int lat);
    open_job(f, 1);
    in_valid = 1; in_data = acc_t'(a);
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 50) begin @(negedge clk); lat++; end
    q = int'(out_data);
    check(done, "done after scalar");
  endtask

  real tol = 0.16;
  function automatic real rabs(input real v); return (v < 0.0) ? -v : v; endfunction

  initial begin
    int q, lat, ref_q;
    longint a;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      a = longint'($urandom_range(0, 8000)) - 4000;      // |a| < 0.98
      // ReLU
      scalar(AF_RELU, a * 3, q, lat);
      check(lat == 1, $sformatf("relu latency %0d", lat));
      check(q == af_ref(0, a * 3), "relu value");
      // tanh
      scalar(AF_TANH, a, q, lat);
      ref_q = af_ref(1, a);
      check(lat == 9, $sformatf("tanh latency %0d", lat));
      check(q == ref_q, $sformatf("tanh value %0d vs %0d", q, ref_q));
      check(rabs(q / 64.0 - $tanh(a / 4096.0)) < tol, "tanh accuracy");
      // sigmoid
      scalar(AF_SIGMOID, a, q, lat);
      ref_q = af_ref(2, a);
      check(lat == 9, $sformatf("sigmoid latency %0d", lat));
      check(q == ref_q, $sformatf("sigmoid value %0d vs %0d", q, ref_q));
      check(rabs(q / 64.0 - 1.0 / (1.0 + $exp(-a / 4096.0))) < tol, "sigmoid accuracy");
    end

    // softmax over vectors of 1..16 values
    for (int n = 0; n < 40; n++) begin
      int len; longint v[16]; longint e[16]; longint sum; int last_t, t;
      real rsum;
      len = (n < 16) ? n + 1 : $urandom_range(1, 16);
      open_job(AF_SOFTMAX, len);
      sum = 0; rsum = 0.0;
      for (int j = 0; j < len; j++) begin
        v[j] = longint'($urandom_range(0, 8000)) - 4000;
        e[j] = exp_ref(v[j]);
        sum = w20(sum + e[j]);
        rsum += $exp(v[j] / 4096.0);
        while (!in_ready) @(negedge clk);
        in_valid = 1; in_data = acc_t'(v[j]);
        @(negedge clk);
        in_valid = 0;
      end
      t = 0; last_t = -1;
      for (int j = 0; j < len; j++) begin
        while (!out_valid && t < 200) begin @(negedge clk); t++; end
        check(int'(out_idx) == j, "softmax order");
        check(int'(out_data) == to_data(div_ref(e[j], sum)), "softmax value");
        check(rabs(out_data / 64.0 - $exp(v[j] / 4096.0) / rsum) < tol, "softmax accuracy");
        if (last_t >= 0) check(t - last_t == 4, $sformatf("softmax spacing %0d", t - last_t));
        last_t = t;
        @(negedge clk); t++;
      end
      check(done, "softmax done");
    end

    // overrun: a second input while the hyperbolic stage is busy
    open_job(AF_TANH, 1);
    in_valid = 1; in_data = 0;
    @(negedge clk);
    in_valid = 0;
    check(!overrun, "no overrun on first input");
    @(negedge clk);
    check(!overrun, "no overrun while busy without input");
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    check(overrun, "overrun flagged");
    open_job(AF_RELU, 1);
    check(!overrun, "overrun cleared by start");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
