// tb_dptc_nbits -- dptc_top at other ADC resolutions. Four instances with
// n = 5, 7, 11 and 12 (long-header field k = 1, 2, 3 and 4 bits) compress
// the same kind of random traces: noise of random size, random steps and
// full-scale jumps, with random lengths. Each instance's words must equal
// the reference encoder's for its n and decode back to the input.
module tb_dptc_nbits;
  import dptc_ref_pkg::*;

  localparam int NI = 4;
  localparam int NS [NI] = '{5, 7, 11, 12};

  logic        clk = 1'b0;
  logic        reset;
  logic [15:0] val;
  logic        dv_in, flush;
  logic [31:0] ow [NI];
  logic        dvo [NI];
  logic        dn  [NI];

  int checks = 0, failures = 0;

  for (genvar g = 0; g < NI; g++) begin : g_dut
    dptc_top #(.N(NS[g])) dut (
      .clk(clk), .reset(reset), .input_val(val[NS[g]-1:0]), .dv_in(dv_in),
      .flush(flush), .output_word(ow[g]), .dv_out(dvo[g]), .done(dn[g]));
  end

  always #5 clk = ~clk;

  uq_t got [NI];
  int  ndone [NI];
  always @(negedge clk)
    for (int g = 0; g < NI; g++) begin
      if (dvo[g]) got[g].push_back(ow[g]);
      if (dn[g]) ndone[g]++;
    end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1'b1; dv_in = 1'b0; flush = 1'b0; val = '0;
    repeat (6) @(negedge clk);
    reset = 1'b0;
    @(negedge clk);
    for (int t = 0; t < 150; t++) begin
      uq_t s;
      int len, amp, x;
      len = 1 + $urandom % 120;
      amp = 1 << ($urandom % 13);
      x = $urandom;
      s = {};
      for (int i = 0; i < len; i++) begin
        if (t % 5 == 4) x = $urandom;
        else x = x + int'($urandom % (2 * amp + 1)) - amp;
        s.push_back(x & 32'hffff);
      end
      for (int g = 0; g < NI; g++) begin
        got[g] = {};
        ndone[g] = 0;
      end
      foreach (s[i]) begin
        val = 16'(s[i]);
        dv_in = 1'b1;
        @(negedge clk);
      end
      dv_in = 1'b0;
      flush = 1'b1;
      repeat (12) @(negedge clk);
      flush = 1'b0;
      for (int g = 0; g < NI; g++) begin
        uq_t sm, w, dec;
        stats_t st;
        int err;
        sm = {};
        foreach (s[i]) sm.push_back(s[i] & ((1 << NS[g]) - 1));
        encode(NS[g], 1'b0, sm, w, st);
        check(ndone[g] == 1, $sformatf("n=%0d trace %0d: done count %0d", NS[g], t, ndone[g]));
        check(got[g] == w, $sformatf("n=%0d trace %0d: words differ (%0d vs %0d)", NS[g], t, got[g].size(), w.size()));
        err = decode(got[g], sm.size(), NS[g], 1'b0, dec);
        check(err == 0 && dec == sm, $sformatf("n=%0d trace %0d: decode mismatch", NS[g], t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
