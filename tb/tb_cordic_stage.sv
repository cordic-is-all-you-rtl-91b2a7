// tb_cordic_stage: checks one CORDIC micro-rotation in its three modes against
// the rotation equations, for random operands, shifts and angles.
module tb_cordic_stage;
  import cordic_ref_pkg::*;

  logic        div_sel, hyp_sel;
  logic [4:0]  shift;
  logic signed [19:0] angle, x_i, y_i, z_i, x_o, y_o, z_o;
  int checks = 0, failures = 0;

  cordic_stage dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ex, ey, ez, d;
    for (int n = 0; n < 3000; n++) begin
      int mode;
      mode    = n % 3;
      div_sel = (mode == 2);
      hyp_sel = (mode == 1);
      shift   = 5'($urandom_range(0, 8));
      angle   = 20'($urandom_range(0, 4096));
      x_i     = 20'($urandom);
      y_i     = 20'($urandom);
      z_i     = 20'($urandom);
      #1;
      if (mode == 2) d = ((x_i < 0) != (y_i < 0)) ? 1 : -1;
      else           d = (z_i >= 0) ? 1 : -1;
      ey = w20(longint'(y_i) + d * (longint'(x_i) >>> shift));
      ex = (mode == 1) ? w20(longint'(x_i) + d * (longint'(y_i) >>> shift)) : longint'(x_i);
      ez = w20(longint'(z_i) - d * longint'(angle));
      checks += 3;
      if (longint'(x_o) != ex) begin failures++; if (failures < 10) $display("x mismatch mode %0d", mode); end
      if (longint'(y_o) != ey) begin failures++; if (failures < 10) $display("y mismatch mode %0d", mode); end
      if (longint'(z_o) != ez) begin failures++; if (failures < 10) $display("z mismatch mode %0d", mode); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
