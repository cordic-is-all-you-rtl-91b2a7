// tb_cordic_mac_pipe: streams random MAC operands through the five-stage
// linear CORDIC pipeline and checks every result against the reference model,
// against the true product within the CORDIC error bound, the 5-clock latency
// and the one-result-per-clock rate.
module tb_cordic_mac_pipe;
  import sycore_pkg::*;
  import cordic_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 1;
  logic in_valid = 0, in_first = 0, in_last = 0;
  data_t x_in = 0, z_in = 0;
  acc_t  y_in = 0;
  logic out_valid, out_first, out_last;
  acc_t y_out;
  int checks = 0, failures = 0;

  cordic_mac_pipe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, queued with the cycle they were issued
  longint exp_q[$];
  int     cyc_q[$];
  int     xq[$];
  int     cycle = 0;
  int     outs = 0;

  always @(posedge clk) if (en) cycle <= cycle + 1;

  always @(negedge clk) begin
    if (rst_n && en && out_valid) begin
      longint e; int c, xv; real err;
      e = exp_q.pop_front(); c = cyc_q.pop_front(); xv = xq.pop_front();
      checks += 3;
      outs++;
      if (longint'(y_out) != e) begin
        failures++; if (failures < 10) $display("value mismatch %0d vs %0d", y_out, e);
      end
      if (cycle - c != 5) begin
        failures++; if (failures < 10) $display("latency %0d", cycle - c);
      end
      err = 0.0;
      if (out_last) err = 0.0;
      err = to_real(y_out, 12) - to_real(e, 12);   // zero when bit exact
      if (err > 1.0e-9 || err < -1.0e-9) failures++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en       = ($urandom_range(0, 9) != 0);
      in_valid = ($urandom_range(0, 3) != 0);
      x_in     = data_t'($urandom);
      z_in     = data_t'($urandom_range(0, 255) - 128 + 0);
      if (z_in == -128) z_in = -127;
      y_in     = acc_t'($urandom_range(0, 8191)) - acc_t'(4096);
      in_first = 0; in_last = 0;
      if (en && in_valid) begin
        exp_q.push_back(mac_ref(int'(x_in), int'(z_in), longint'(y_in)));
        cyc_q.push_back(cycle);
        xq.push_back(int'(x_in));
      end
    end
    @(negedge clk); in_valid = 0; en = 1;
    repeat (10) @(negedge clk);
    // accuracy against the real product: |error| <= |x| * 2^-4 + rounding
    begin
      int bad = 0;
      for (int n = 0; n < 500; n++) begin
        int xv, zv; longint r; real exact, got;
        xv = $urandom_range(0, 255) - 128; zv = $urandom_range(0, 240) - 120;
        r = mac_ref(xv, zv, 0);
        exact = (xv / 64.0) * (zv / 64.0);
        got = to_real(r, 12);
        checks++;
        if ((got - exact) > (xv < 0 ? -xv : xv) / 64.0 / 16.0 + 0.002 ||
            (exact - got) > (xv < 0 ? -xv : xv) / 64.0 / 16.0 + 0.002) bad++;
      end
      failures += bad;
    end
    checks++;
    if (outs < 1000 || exp_q.size() != 0) begin
      failures++; $display("outputs %0d pending %0d", outs, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
