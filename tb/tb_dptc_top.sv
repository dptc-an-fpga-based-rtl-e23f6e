// tb_dptc_top -- end-to-end test of the trace compressor at its default
// parameters (n = 16, predictor off).
//
// Traces of many shapes are fed through dptc_top: the pulse of the paper's
// illustration (flat baseline, steep rise, exponential tail), constant
// traces of 1000 samples, Gaussian-like noise with pulses, full-scale jumps
// that wrap modulo 2^16, and very short traces (1..6 samples). Input gaps
// (dv_in low) are inserted at random in some traces, and some traces start
// in the very cycle flush is dropped. For each trace the output words are
// compared with the reference encoder, decoded back with the reference
// decoder and compared with the input, and done must come within a fixed
// number of cycles after flush. The test also counts how often each
// mechanism occurred (short headers -1/0/+1, long headers, partial last
// group, value split across words, sign inversion, partial last word,
// input gaps, back-to-back traces) and fails if one never did.
module tb_dptc_top;
  import dptc_ref_pkg::*;

  localparam int N = 16;
  localparam int DONE_MAX = 9;    // cycles from flush to done, upper bound

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

  // output monitor
  uq_t got;
  int  done_seen = 0;
  always @(negedge clk) begin
    if (dv_out) got.push_back(output_word);
    if (done) done_seen++;
  end

  // mechanism counters
  stats_t tot = '{default: 0};
  int n_gap = 0, n_b2b = 0, n_partial_word = 0, n_full_last = 0, n_traces = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Feed one trace, flush, wait for done, check. gap_pct: chance of an
  // idle cycle before each sample. b2b: the first sample is given in the
  // cycle after done, together with flush dropping.
  task automatic run_trace(input uq_t s, input int gap_pct, input string name);
    uq_t exp_w, dec;
    stats_t st;
    int err, t;
    encode(N, 1'b0, s, exp_w, st);
    got = {};
    done_seen = 0;
    foreach (s[i]) begin
      if (gap_pct > 0 && ($urandom % 100) < gap_pct) begin
        dv_in = 1'b0;
        flush = 1'b0;
        @(negedge clk);
        n_gap++;
      end
      input_val = N'(s[i]);
      dv_in = 1'b1;
      flush = 1'b0;
      @(negedge clk);
    end
    dv_in = 1'b0;
    flush = 1'b1;
    t = 0;
    while (done_seen == 0 && t < 200) begin
      @(negedge clk);
      t++;
    end
    check(done_seen == 1, $sformatf("%s: done seen once (%0d)", name, done_seen));
    check(t <= DONE_MAX, $sformatf("%s: done %0d cycles after flush", name, t));
    // flush dropped now; the next trace may start immediately
    flush = 1'b0;
    check(got.size() == exp_w.size(),
          $sformatf("%s: %0d words, expected %0d", name, got.size(), exp_w.size()));
    for (int i = 0; i < exp_w.size() && i < got.size(); i++)
      check(got[i] == exp_w[i],
            $sformatf("%s: word %0d = %08x, expected %08x", name, i, got[i], exp_w[i]));
    err = decode(got, s.size(), N, 1'b0, dec);
    check(err == 0, $sformatf("%s: decoder reports malformed data", name));
    check(dec.size() == s.size(), $sformatf("%s: decoded %0d samples", name, dec.size()));
    for (int i = 0; i < s.size() && i < dec.size(); i++)
      check(dec[i] == s[i], $sformatf("%s: sample %0d decoded %0d, was %0d", name, i, dec[i], s[i]));
    tot.n_short_dec  += st.n_short_dec;
    tot.n_short_same += st.n_short_same;
    tot.n_short_inc  += st.n_short_inc;
    tot.n_long       += st.n_long;
    tot.n_partial    += st.n_partial;
    tot.n_invert     += st.n_invert;
    tot.n_split      += st.n_split;
    if (st.nbits % 32 != 0) n_partial_word++; else if (st.nbits > 0) n_full_last++;
    n_traces++;
  endtask

  function automatic int noise(input int amp);
    // sum of uniforms, roughly Gaussian
    int a = 0;
    for (int i = 0; i < 4; i++) a += int'($urandom % (2 * amp + 1)) - amp;
    return a / 2;
  endfunction

  function automatic uq_t make_pulse(input int len, input int base, input int amp,
                                     input int t0, input real rise, input real fall,
                                     input int namp);
    uq_t s;
    for (int i = 0; i < len; i++) begin
      real v = base;
      if (i >= t0)
        v += amp * ($exp(-(i - t0) / real'(fall)) - $exp(-(i - t0) / real'(rise)));
      v += noise(namp);
      if (v < 0) v = 0;
      if (v > 65535) v = 65535;
      s.push_back(int'(v));
    end
    return s;
  endfunction

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uq_t s;
    stats_t st;
    uq_t w;
    reset = 1'b1; dv_in = 1'b0; flush = 1'b0; input_val = '0;
    repeat (6) @(negedge clk);
    reset = 1'b0;
    @(negedge clk);

    // 1. pulse like the paper's illustration: 40 samples, n = 16
    s = make_pulse(40, 0, 330, 12, 0.6, 4.0, 0);
    run_trace(s, 0, "dexp");

    // 1b. the group widths printed in the illustration: 40 samples, groups
    // of m = 1,1,8,8,7,6,5,3,3,2 bits (the last group holds 3 values),
    // headers of 2 bits except long (6-bit) ones at the 1->8 and 5->3
    // changes: 16 + 6+6+38+34+30+26+22+18+14+8 = 218 bits.
    begin
      static int ms[10] = '{1, 1, 8, 8, 7, 6, 5, 3, 3, 2};
      int x, v, d;
      bit inv;
      s = {};
      x = 1000;
      inv = 0;
      s.push_back(x);
      for (int i = 0; i < 39; i++) begin
        v = (i % 4 == 1) ? -(1 << (ms[i / 4] - 1)) : 0;
        d = inv ? -v : v;
        if (v < 0) inv = 1; else if (v > 0) inv = 0;
        x = (x + d) & 32'hffff;
        s.push_back(x);
      end
      encode(N, 1'b0, s, w, st);
      check(st.nbits == 218, $sformatf("illustration widths: %0d bits, expected 218", st.nbits));
      check(st.n_long == 2 && st.n_short_same + st.n_short_dec + st.n_short_inc == 8,
            "illustration widths: header kinds");
      run_trace(s, 0, "widths");
    end

    // 2. flat traces of 1000 samples: 16 + 249*6 + 5 = 1515 bits, 48 words
    for (int j = 0; j < 3; j++) begin
      int lvl;
      lvl = (j == 0) ? 0 : (j == 1) ? 10 : 100;
      s = {};
      repeat (1000) s.push_back(lvl);
      encode(N, 1'b0, s, w, st);
      check(st.nbits == 1515, $sformatf("flat %0d: %0d bits", lvl, st.nbits));
      run_trace(s, 0, $sformatf("flat%0d", lvl));
    end

    // 3. noisy traces with pulses, some with input gaps
    for (int r = 0; r < 12; r++) begin
      s = make_pulse(200 + 37 * r, 1000 + 500 * r, 200 * (r + 1), 50 + r,
                     1.0 + r, 10.0 + 3 * r, 1 + r);
      run_trace(s, (r % 3 == 0) ? 20 : 0, $sformatf("noise%0d", r));
    end

    // 4. full-scale jumps, wrapping modulo 2^16
    s = {};
    for (int i = 0; i < 61; i++)
      s.push_back((i % 5 == 0) ? 65535 : (i % 5 == 1) ? 0 : (i % 5 == 2) ? 32768 : $urandom % 65536);
    run_trace(s, 0, "wrap");

    // 5. short traces and random lengths, back to back
    for (int len = 1; len <= 40; len++) begin
      s = {};
      for (int i = 0; i < len; i++) s.push_back(30000 + noise(1 << (len % 12)));
      run_trace(s, (len % 4 == 0) ? 30 : 0, $sformatf("short%0d", len));
      n_b2b++;
    end

    // mechanisms
    check(tot.n_short_dec  > 0, "short header -1 never used");
    check(tot.n_short_same > 0, "short header 0 never used");
    check(tot.n_short_inc  > 0, "short header +1 never used");
    check(tot.n_long       > 0, "long header never used");
    check(tot.n_partial    > 0, "partial last group never occurred");
    check(tot.n_split      > 0, "value split across words never occurred");
    check(tot.n_invert     > 0, "sign inversion never occurred");
    check(n_partial_word   > 0, "partial last word never occurred");
    check(n_gap            > 0, "input gap never occurred");
    check(n_b2b            > 0, "back-to-back trace never occurred");
    $display("mechanisms: traces=%0d short-1=%0d short0=%0d short+1=%0d long=%0d partial_group=%0d split=%0d invert=%0d partial_word=%0d full_last_word=%0d gaps=%0d b2b=%0d",
             n_traces, tot.n_short_dec, tot.n_short_same, tot.n_short_inc, tot.n_long,
             tot.n_partial, tot.n_split, tot.n_invert, n_partial_word, n_full_last, n_gap, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
