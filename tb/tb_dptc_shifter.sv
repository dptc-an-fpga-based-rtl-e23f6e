// tb_dptc_shifter -- unit test of the barrel shifter at the paper's size
// (22-bit input, shifts 0..37, 60-bit output), in its default multiplexer
// form and in the multiplier form. Every shift amount is tried with random
// and corner-case inputs; the expected output is the input multiplied by
// 2^sh, computed with 64-bit integer arithmetic.
module tb_dptc_shifter;

  logic [21:0] din;
  logic [5:0]  sh;
  logic [59:0] dout, dout_m;

  int checks = 0, failures = 0;

  dptc_shifter dut (.din(din), .sh(sh), .dout(dout));
  dptc_shifter #(.SHIFT_MULT(1'b1)) dut_m (.din(din), .sh(sh), .dout(dout_m));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s <= 37; s++) begin
      for (int r = 0; r < 40; r++) begin
        longint unsigned exp_v;
        case (r)
          0: din = '1;
          1: din = 22'h1;
          2: din = 22'h200000;
          default: din = 22'($urandom);
        endcase
        sh = 6'(s);
        #1;
        exp_v = longint'(din) * (64'd1 << s);
        checks++;
        if (dout != exp_v[59:0]) begin
          failures++;
          if (failures < 10) $display("FAIL: %h << %0d = %h, expected %h", din, s, dout, exp_v[59:0]);
        end
        checks++;
        if (dout_m != exp_v[59:0]) begin
          failures++;
          if (failures < 10) $display("FAIL: multiplier form %h << %0d = %h", din, s, dout_m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
