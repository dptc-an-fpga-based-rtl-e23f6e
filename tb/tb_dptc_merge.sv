// tb_dptc_merge -- unit test of the output data merging stage.
//
// Random items (no, short or long header; 1..16 value bits; the first item
// of a trace has no header and 16 bits) are driven with random gaps. A bit
// queue model appends the header bits and then the value bits of each item
// and cuts 32-bit words; the stage's words must match, arrive one cycle
// after the item that completed them, and the last partial word (zero
// padded) must come with the one-cycle done pulse after flush.
module tb_dptc_merge;
  import dptc_pkg::*;

  localparam int N  = 16;
  localparam int H  = 6;
  localparam int MW = 5;

  logic          clk = 1'b0;
  logic          reset;
  logic          item_valid, flush_i;
  logic [N+H-1:0] item_data;
  hdr_kind_e     item_kind;
  logic [MW-1:0] item_vlen;
  logic [31:0]   out_word;
  logic          dv_out, done;

  int checks = 0, failures = 0;
  int n_split = 0, n_pad = 0, n_exact = 0;

  dptc_merge dut (
    .clk(clk), .reset(reset), .item_valid(item_valid), .item_data(item_data),
    .item_kind(item_kind), .item_vlen(item_vlen), .flush_i(flush_i),
    .out_word(out_word), .dv_out(dv_out), .done(done));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  bit q[$];
  int unsigned exp_w[$], got_w[$];
  int done_cnt = 0;

  always @(negedge clk) begin
    if (dv_out) got_w.push_back(out_word);
    if (done) done_cnt++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1'b1; item_valid = 1'b0; flush_i = 1'b0; item_data = '0;
    item_kind = HDR_NONE; item_vlen = '0;
    repeat (3) @(negedge clk);
    reset = 1'b0;
    for (int t = 0; t < 100; t++) begin
      int nitems;
      nitems = $urandom % 50;
      q = {};
      exp_w = {};
      got_w = {};
      done_cnt = 0;
      for (int i = 0; i < nitems; i++) begin
        int hl, vl, start;
        logic [H-1:0] hdr;
        logic [N-1:0] val;
        if (i == 0) begin
          item_kind = HDR_NONE; vl = N;
        end else begin
          case ($urandom % 3)
            0: item_kind = HDR_NONE;
            1: item_kind = HDR_SHORT;
            default: item_kind = HDR_LONG;
          endcase
          vl = 1 + $urandom % N;
        end
        hl = (item_kind == HDR_LONG) ? H : (item_kind == HDR_SHORT) ? 2 : 0;
        hdr = H'($urandom) & ~((H'(1) << (H - hl)) - H'(1));
        if (hl == 0) hdr = '0;
        val = N'($urandom) & ((vl == N) ? '1 : ((N'(1) << vl) - N'(1)));
        start = q.size();
        for (int b = H - hl; b < H; b++) q.push_back(hdr[b]);
        for (int b = 0; b < vl; b++) q.push_back(val[b]);
        if (start / 32 != (q.size() - 1) / 32) n_split++;
        item_valid = 1'b1;
        item_data = {val, hdr};
        item_vlen = MW'(vl);
        @(negedge clk);
        #1;
        // a word completed by this item must be out now
        check(got_w.size() == q.size() / 32,
              $sformatf("trace %0d item %0d: %0d words out, expected %0d", t, i, got_w.size(), q.size() / 32));
        item_valid = 1'b0;
        if ($urandom % 4 == 0) @(negedge clk);
      end
      if (q.size() % 32 != 0) n_pad++; else if (q.size() > 0) n_exact++;
      while (q.size() % 32 != 0) q.push_back(1'b0);
      for (int w = 0; w < q.size() / 32; w++) begin
        int unsigned x;
        x = 0;
        for (int b = 0; b < 32; b++) x |= int'(q[32*w+b]) << b;
        exp_w.push_back(x);
      end
      flush_i = 1'b1;
      @(negedge clk);
      #1;
      check(done_cnt == 1, "done not in the first cycle of flush");
      check(got_w.size() == exp_w.size(), $sformatf("trace %0d: %0d words, expected %0d", t, got_w.size(), exp_w.size()));
      repeat ($urandom % 4) @(negedge clk);
      check(done_cnt == 1, "done is not a single pulse");
      foreach (exp_w[i])
        if (i < got_w.size())
          check(got_w[i] == exp_w[i], $sformatf("trace %0d word %0d: %h expected %h", t, i, got_w[i], exp_w[i]));
      flush_i = 1'b0;
      @(negedge clk);
    end
    check(n_split > 0 && n_pad > 0, "no split item or no padded last word");
    $display("split items %0d, padded last words %0d, exact last words %0d", n_split, n_pad, n_exact);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
