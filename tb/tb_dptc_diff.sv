// tb_dptc_diff -- unit test of stage 1 (differencing, sign rule, optional
// predictor). Two instances run side by side, one with the predictor off
// (the default) and one with it on. Random traces of random length, with
// small noise, steep ramps and full-scale jumps, are fed with random input
// gaps; every valid output is compared with the reference model's stage-1
// values, and dv/first/flush must appear exactly one cycle after the input.
module tb_dptc_diff;
  import dptc_ref_pkg::*;

  localparam int N = 16;

  logic         clk = 1'b0;
  logic         reset;
  logic [N-1:0] sample;
  logic         dv, flush;
  logic [N-1:0] val0, val1;
  logic         dv0, dv1, first0, first1, flush0, flush1;

  int checks = 0, failures = 0;
  int n_pred_total = 0;

  dptc_diff #(.N(N)) dut0 (
    .clk(clk), .reset(reset), .sample(sample), .dv(dv), .flush(flush),
    .val_o(val0), .dv_o(dv0), .first_o(first0), .flush_o(flush0));
  dptc_diff #(.N(N), .PREDICTOR(1'b1)) dut1 (
    .clk(clk), .reset(reset), .sample(sample), .dv(dv), .flush(flush),
    .val_o(val1), .dv_o(dv1), .first_o(first1), .flush_o(flush1));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1'b1; dv = 1'b0; flush = 1'b0; sample = '0;
    repeat (3) @(negedge clk);
    reset = 1'b0;
    for (int t = 0; t < 60; t++) begin
      uq_t s;
      int e0[$], e1[$];
      stats_t st0, st1;
      int len, x;
      len = 1 + $urandom % 80;
      s = {};
      x = $urandom % 65536;
      st0 = '{default: 0};
      st1 = '{default: 0};
      for (int i = 0; i < len; i++) begin
        case (t % 4)
          0: x = x + int'($urandom % 9) - 4;
          1: x = x + 50 + int'($urandom % 5);       // steep ramp
          2: x = $urandom % 65536;                  // full scale
          default: x = x + (((i / 8) % 2 != 0) ? 300 : -300) + int'($urandom % 3) - 1;
        endcase
        s.push_back(x & 32'hffff);
      end
      stage1(N, 1'b0, s, e0, st0);
      stage1(N, 1'b1, s, e1, st1);
      n_pred_total += st1.n_pred;
      foreach (s[i]) begin
        if ($urandom % 4 == 0) begin
          dv = 1'b0;
          @(negedge clk);
          check(!dv0 && !dv1, "dv out during a gap");
        end
        sample = N'(s[i]);
        dv = 1'b1;
        @(negedge clk);
        check(dv0 && dv1, "dv_o one cycle after dv");
        check(first0 == (i == 0) && first1 == (i == 0), $sformatf("first_o at sample %0d", i));
        check(val0 == N'(e0[i]), $sformatf("trace %0d sample %0d: %0d expected %0d", t, i, val0, N'(e0[i])));
        check(val1 == N'(e1[i]), $sformatf("pred trace %0d sample %0d: %0d expected %0d", t, i, val1, N'(e1[i])));
      end
      dv = 1'b0;
      flush = 1'b1;
      @(negedge clk);
      check(flush0 && flush1 && !dv0, "flush_o one cycle after flush");
      repeat ($urandom % 3) @(negedge clk);
      flush = 1'b0;
    end
    check(n_pred_total > 0, "predictor never switched on");
    $display("predictor active on %0d values", n_pred_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
