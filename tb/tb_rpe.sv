// tb_rpe: runs complete jobs (dot product plus activation) through one
// processing element: ReLU, tanh and sigmoid on single dot products and softmax
// over several, with random lengths, operands and bias. Checks the results
// against the reference model, the done flag, the ReLU job latency
// (5 MAC + 1 handoff + 1 ReLU clocks after the last beat), the tanh/sigmoid
// latency (5 + 1 + 9) and the one-clock forwarding of x and w to the neighbours.
module tb_rpe;
  import sycore_pkg::*;
  import cordic_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, start = 0;
  af_sel_e af_sel = AF_RELU;
  logic [4:0] sm_n = 5'd1;
  data_t x_in = 0, w_in = 0, b_in = 0;
  logic xv_in = 0, xf_in = 0, xl_in = 0;
  data_t x_out, w_out, b_out, res_data;
  logic xv_out, xf_out, xl_out, res_valid, done, busy, overrun;
  logic [3:0] res_idx;
  int checks = 0, failures = 0;

  rpe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  // forwarding check, every clock
  data_t px, pw; logic pv;
  always @(negedge clk) if (rst_n) begin
    checks++;
    if (x_out !== px || w_out !== pw || xv_out !== pv) failures++;
  end
  always @(posedge clk) begin px <= x_in; pw <= w_in; pv <= xv_in; end

  task automatic send_dot(input int xs[$], input int ws[$], input int bias);
    for (int k = 0; k < xs.size(); k++) begin
      x_in = data_t'(xs[k]); w_in = data_t'(ws[k]); b_in = data_t'(bias);
      xv_in = 1; xf_in = (k == 0); xl_in = (k == xs.size() - 1);
      @(negedge clk);
    end
    xv_in = 0; xf_in = 0; xl_in = 0;
  endtask

  task automatic open_job(input af_sel_e f, input int n);
    @(negedge clk);
    af_sel = f; sm_n = 5'(n); start = 1;
    @(negedge clk);
    start = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      int xs[$], ws[$], len, bias, f, t, expq, lat_exp;
      longint acc;
      f = n % 3;
      len = $urandom_range(1, 12);
      xs = {}; ws = {};
      for (int k = 0; k < len; k++) begin
        xs.push_back($urandom_range(0, 24) - 12);
        ws.push_back(f == 0 ? $urandom_range(0, 255) - 128 : $urandom_range(0, 40) - 20);
      end
      bias = (f == 0) ? $urandom_range(0, 255) - 128 : $urandom_range(0, 20) - 10;
      acc  = dot_ref(xs, ws, bias);
      expq = af_ref(f, acc);
      open_job(af_sel_e'(f), 1);
      send_dot(xs, ws, bias);
      // the last beat was sampled at the previous rising edge
      t = 0;
      while (!res_valid && t < 60) begin @(negedge clk); t++; end
      lat_exp = (f == 0) ? 7 : 15;
      check(t + 1 == lat_exp, $sformatf("af %0d latency %0d", f, t + 1));
      check(int'(res_data) == expq, $sformatf("af %0d value %0d vs %0d", f, res_data, expq));
      repeat (2) @(negedge clk);
      check(done && !busy, "done");
      check(!overrun, "no overrun");
    end
    // softmax over sm_n dot products of length >= 6
    for (int n = 0; n < 20; n++) begin
      int nd, len; longint e[16]; longint sum; int got;
      nd = $urandom_range(1, 16);
      len = $urandom_range(6, 10);
      open_job(AF_SOFTMAX, nd);
      sum = 0;
      for (int j = 0; j < nd; j++) begin
        int xs[$], ws[$]; int bias;
        xs = {}; ws = {};
        for (int k = 0; k < len; k++) begin
          xs.push_back($urandom_range(0, 24) - 12);
          ws.push_back($urandom_range(0, 40) - 20);
        end
        bias = $urandom_range(0, 20) - 10;
        e[j] = exp_ref(dot_ref(xs, ws, bias));
        sum = w20(sum + e[j]);
        send_dot(xs, ws, bias);
      end
      got = 0;
      for (int t = 0; t < 400 && got < nd; t++) begin
        @(negedge clk);
        if (res_valid) begin
          check(int'(res_idx) == got, "softmax index");
          check(int'(res_data) == to_data(div_ref(e[got], sum)), "softmax value");
          got++;
        end
      end
      check(got == nd, "softmax count");
      repeat (2) @(negedge clk);
      check(done && !overrun, "softmax done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
