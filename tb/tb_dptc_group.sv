// tb_dptc_group -- unit test of the header and group formation stage.
//
// Stage-1 values of random traces (from the reference model) are driven
// into dptc_group with random gaps. The issued items are turned back into a
// bit stream (header bits, then value bits, LSB first) and compared with the
// reference encoder's bit stream. Also checked: each item's header kind and
// length, at most one item per cycle, a full group issued within five
// cycles of its last value, and flush_o only after the last item.
module tb_dptc_group;
  import dptc_ref_pkg::*;
  import dptc_pkg::*;

  localparam int N  = 16;
  localparam int H  = 6;
  localparam int MW = 5;

  logic          clk = 1'b0;
  logic          reset;
  logic [N-1:0]  val_i;
  logic          dv_i, first_i, flush_i;
  logic          item_valid, flush_o;
  logic [N+H-1:0] item_data;
  hdr_kind_e     item_kind;
  logic [MW-1:0] item_vlen;

  int checks = 0, failures = 0;

  dptc_group dut (
    .clk(clk), .reset(reset), .val_i(val_i), .dv_i(dv_i), .first_i(first_i),
    .flush_i(flush_i), .item_valid(item_valid), .item_data(item_data),
    .item_kind(item_kind), .item_vlen(item_vlen), .flush_o(flush_o));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // collected stream
  bit stream[$];
  int n_items = 0, cyc = 0, last_item_cyc = 0, flush_cyc = -1;
  always @(negedge clk) begin
    cyc++;
    if (item_valid) begin
      int hl;
      hl = (item_kind == HDR_LONG) ? H : (item_kind == HDR_SHORT) ? 2 : 0;
      for (int i = H - hl; i < H; i++) stream.push_back(item_data[i]);
      for (int i = 0; i < item_vlen; i++) stream.push_back(item_data[H + i]);
      for (int i = int'(item_vlen); i < N; i++)
        if (item_data[H + i]) begin
          failures++;
          $display("FAIL: bits above the value width are set");
        end
      for (int i = 0; i < H - hl; i++)
        if (item_data[i]) begin
          failures++;
          $display("FAIL: bits below the header are set");
        end
      n_items++;
      last_item_cyc = cyc;
    end
    if (flush_o && flush_cyc < 0) flush_cyc = cyc;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset = 1'b1; dv_i = 1'b0; first_i = 1'b0; flush_i = 1'b0; val_i = '0;
    repeat (3) @(negedge clk);
    reset = 1'b0;
    for (int t = 0; t < 80; t++) begin
      uq_t s, w;
      int v[$];
      stats_t st;
      int len, x, amp, gap, last_val_cyc;
      len = 1 + $urandom % 60;
      s = {};
      x = $urandom % 65536;
      amp = 1 << ($urandom % 15);
      gap = (t % 2 != 0) ? 25 : 0;
      for (int i = 0; i < len; i++) begin
        x = x + int'($urandom % (2 * amp + 1)) - amp;
        s.push_back(x & 32'hffff);
      end
      st = '{default: 0};
      stage1(N, 1'b0, s, v, st);
      encode(N, 1'b0, s, w, st);
      stream = {};
      n_items = 0;
      flush_cyc = -1;
      foreach (v[i]) begin
        if (gap > 0 && ($urandom % 100) < gap) begin
          dv_i = 1'b0; first_i = 1'b0;
          @(negedge clk);
        end
        val_i = N'(v[i]);
        dv_i = 1'b1;
        first_i = (i == 0);
        @(negedge clk);
        if (i > 0 && i % 4 == 0) begin
          // a full group was just completed: its items follow within 5 cycles
          last_val_cyc = cyc;
        end
      end
      dv_i = 1'b0; first_i = 1'b0;
      flush_i = 1'b1;
      repeat (12) @(negedge clk);
      check(flush_cyc > 0, "flush_o never raised");
      check(flush_cyc > last_item_cyc, "flush_o before the last item");
      check(flush_cyc - cyc < 12 && flush_cyc <= last_item_cyc + 2, "flush_o late");
      if (gap == 0) check(last_item_cyc - (cyc - 12) <= 5, "last group issued late");
      check(n_items == len, $sformatf("trace %0d: %0d items, expected %0d", t, n_items, len));
      check(stream.size() == st.nbits, $sformatf("trace %0d: %0d bits, expected %0d", t, stream.size(), st.nbits));
      for (int i = 0; i < st.nbits && i < stream.size(); i++)
        check(stream[i] == w[i / 32][i % 32], $sformatf("trace %0d: bit %0d", t, i));
      flush_i = 1'b0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
