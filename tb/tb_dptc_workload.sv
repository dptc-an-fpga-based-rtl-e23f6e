// tb_dptc_workload -- compression efficiency of dptc_top (defaults, n = 16)
// on synthetic traces of the kind the storage-cost model is built on.
//
// Traces of 500 samples are made of Gaussian noise (sigma = 2^b) or uniform
// noise (span 2^b) on a baseline, some with a Gaussian pulse added. Each is
// compressed, the words are decoded again and compared with the input, and
// the cost per sample is measured from the word count as
//   c_S = (32 * words - 16 - 15.5) / (samples - 1),
// i.e. without the first sample and the average padding of the last word.
// Checked: b + 2.95 bits/sample for Gaussian noise of a few bits or more,
// and 1.5 bits/sample (a 2-bit header per four 1-bit values) for a
// noise-free trace, within +-0.3 bits/sample, and the extra cost of Gaussian
// pulses on sigma = 2 noise against the published pulse-cost model within
// 35 %. Uniform noise is reported, not checked.
module tb_dptc_workload;
  import dptc_ref_pkg::*;

  localparam int N = 16;
  localparam int LEN = 500;
  localparam int TRACES = 30;

  logic          clk = 1'b0;
  logic          reset;
  logic [N-1:0]  input_val;
  logic          dv_in, flush;
  logic [31:0]   output_word;
  logic          dv_out, done;

  int checks = 0, failures = 0;

  dptc_top dut (
    .clk(clk), .reset(reset), .input_val(input_val), .dv_in(dv_in),
    .flush(flush), .output_word(output_word), .dv_out(dv_out), .done(done)
  );

  always #5 clk = ~clk;

  uq_t got;
  int  done_seen = 0;
  always @(negedge clk) begin
    if (dv_out) got.push_back(output_word);
    if (done) done_seen++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  // Compress one trace, check losslessness, return the number of words.
  task automatic run(input uq_t s, output int nwords);
    uq_t dec;
    int err;
    got = {};
    done_seen = 0;
    foreach (s[i]) begin
      input_val = N'(s[i]);
      dv_in = 1'b1;
      @(negedge clk);
    end
    dv_in = 1'b0;
    flush = 1'b1;
    while (done_seen == 0) @(negedge clk);
    flush = 1'b0;
    err = decode(got, s.size(), N, 1'b0, dec);
    check(err == 0 && dec == s, "trace does not decode to its input");
    nwords = got.size();
  endtask

  // kind: 0 Gaussian noise, 1 uniform noise; amp/width: Gaussian pulse
  task automatic point(input int kind, input real b, input real amp, input real width,
                       input real expect_cs, input bit check_it, output real cs);
    real sum = 0.0;
    real sigma = 2.0 ** b;
    for (int t = 0; t < TRACES; t++) begin
      uq_t s;
      int nw;
      real base = 20000.0 + real'($urandom % 1000) / 1000.0;
      real centre = 200.0 + real'($urandom % 1000) / 1000.0;
      for (int i = 0; i < LEN; i++) begin
        real v = base;
        if (b > -10.0)
          v += (kind == 0) ? sigma * gauss() : sigma * (real'($urandom % 1000000) / 1000000.0);
        if (amp > 0.0)
          v += amp * $exp(-0.5 * ((i - centre) / width) ** 2);
        s.push_back(int'($floor(v)) & 32'hffff);
      end
      run(s, nw);
      sum += (32.0 * nw - 16.0 - 15.5) / real'(LEN - 1);
    end
    cs = sum / TRACES;
    $display("%s b=%5.2f A=%7.1f w=%4.1f: cost %5.2f bits/sample%s",
             kind == 0 ? "gauss  " : "uniform", b, amp, width, cs,
             check_it ? $sformatf(" (expected %5.2f)", expect_cs) : "");
    if (check_it)
      check(cs > expect_cs - 0.3 && cs < expect_cs + 0.3,
            $sformatf("cost %f, expected %f", cs, expect_cs));
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real cs, base_cs;
    reset = 1'b1; dv_in = 1'b0; flush = 1'b0; input_val = '0;
    repeat (6) @(negedge clk);
    reset = 1'b0;
    @(negedge clk);
    // noise-free trace: minimum cost
    point(0, -20.0, 0.0, 1.0, 1.5, 1'b1, cs);
    // Gaussian noise: b + 2.95
    for (int b = 2; b <= 8; b += 2) point(0, real'(b), 0.0, 1.0, real'(b) + 2.95, 1'b1, cs);
    // uniform noise: reported only. The published curve reads b + 1.67;
    // this format gives about b + 1.2 for integers uniform over 2^b values
    // (differences need b+1 bits unless all four of a group fit in b bits,
    // which happens about a third of the time), so the published curve
    // probably defines the span differently.
    for (int b = 2; b <= 8; b += 2) point(1, real'(b), 0.0, 1.0, real'(b) + 1.67, 1'b0, cs);
    // Gaussian pulses on sigma = 2 noise. The extra bits per trace are
    // compared with the published pulse-cost model
    //   c_P  = a sqrt(w^2+d^2) (1/bb) log2(1 + (A/w)^bb)
    //   c_NB = q sqrt(w^2+d^2) (1/f) log2(1 + sigma^f)
    //   c_B  = sqrt(c_P^2 + c_NB^2) - c_NB
    // with a = 5.6, bb = 1.3, q = 33, d = 2.6, f = 7.7 (fitted constants,
    // about 10 % uncertainty); accepted within 35 %.
    point(0, 1.0, 0.0, 1.0, 0.0, 1'b0, base_cs);
    for (int p = 0; p < 3; p++) begin
      real amp, w, cp, cnb, cb, meas;
      amp = (p == 0) ? 300.0 : (p == 1) ? 1000.0 : 3000.0;
      w   = (p == 0) ? 3.0 : (p == 1) ? 5.0 : 10.0;
      point(0, 1.0, amp, w, 0.0, 1'b0, cs);
      cp   = 5.6 * $sqrt(w * w + 2.6 * 2.6) / 1.3 * $ln(1.0 + (amp / w) ** 1.3) / $ln(2.0);
      cnb  = 33.0 * $sqrt(w * w + 2.6 * 2.6) / 7.7 * $ln(1.0 + 2.0 ** 7.7) / $ln(2.0);
      cb   = $sqrt(cp * cp + cnb * cnb) - cnb;
      meas = (cs - base_cs) * real'(LEN - 1);
      $display("  pulse A=%0.0f w=%0.0f: %0.1f extra bits, model %0.1f", amp, w, meas, cb);
      check(meas > 0.65 * cb && meas < 1.35 * cb, "pulse cost far from the model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
