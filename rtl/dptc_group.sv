// dptc_group -- stage 2a of the trace compressor: header and group
// formation.
//
// How it works: differences from stage 1 are collected four at a time. For
// each value the smallest two's-complement width m (at least 1 bit) is
// found; the group uses the largest. The width change against the previous
// group, dm = (m - m_prev) mod N, selects the header: a 2-bit short header
// (01/10/11 for -1/0/+1) or the long header, code 00 followed by (dm - 2)
// in K = ceil(log2(N-3)) bits. Each value is stored in m bits with a bias of
// 2^(m-1), so no sign extension is needed when decoding. The first sample of
// a trace bypasses the grouping and is issued whole (N bits, no header); it
// also sets m_prev = N, so the first group's header is relative to N.
//
// A completed group is handed to a second register bank that issues one
// item per cycle (the first carrying the header) while the next group is
// being collected, so one sample per cycle is sustained without stalls. On
// flush a partly filled group is issued with only the values it has, and
// flush_o is raised once every item has been issued.
//
// Paper: groups of four, header codes, k, bias of 1 on m, bias of values,
// first sample stored whole. This design's choices: dm taken modulo N,
// m_prev = N at the start of a trace, the partial last group, and the item
// format below.
//
// Item format (matches the 22-bit shifter input for N = 16): item_data =
// {value[N-1:0], header[H-1:0]}, H = 2+K, with the header left-aligned in
// its field (long: {field, code}; short: {code, zeros}; none: zeros).
// In the terms of the paper's block diagram, item_data is the 'encoded'
// bus and item_kind/item_vlen form the 'auxiliary' bus to the merging stage;
// flush_o is the stage-2 flush pipeline.
// Timing: a full group is issued in the 4 cycles after its last value
// arrived (latency 2..5 cycles per value).
module dptc_group
  import dptc_pkg::*;
#(
  parameter int unsigned N  = 16,
  localparam int unsigned K  = k_bits(N),
  localparam int unsigned H  = long_hdr_bits(N),
  localparam int unsigned MW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          reset,
  input  logic [N-1:0]  val_i,
  input  logic          dv_i,
  input  logic          first_i,
  input  logic          flush_i,
  output logic          item_valid,
  output logic [N+H-1:0] item_data,
  output hdr_kind_e     item_kind,
  output logic [MW-1:0] item_vlen,   // value bits of this item
  output logic          flush_o
);

  // Smallest signed width holding v, at least 1.
  function automatic logic [MW-1:0] width_of(input logic [N-1:0] v);
    logic [N-1:0] u;
    logic [MW-1:0] w;
    u = v[N-1] ? ~v : v;
    w = MW'(1);
    for (int i = 0; i < N - 1; i++)
      if (u[i]) w = MW'(i + 2);
    return w;
  endfunction

  // ---- collection of a group ----
  logic [N-1:0]  cval [GROUP_SIZE];
  logic [1:0]    ccnt;
  logic [MW-1:0] cmax;
  logic [MW-1:0] m_prev;

  // ---- issuing bank ----
  logic [N-1:0]  eval [GROUP_SIZE];
  logic [2:0]    ecnt;       // items still to issue
  logic [1:0]    eidx;       // next item
  logic [MW-1:0] em;         // width of the group being issued
  logic [H-1:0]  ehdr;       // header, left-aligned
  hdr_kind_e     ekind;
  logic          efirst;     // bank holds the first sample of a trace

  logic [MW-1:0] w_in, gm, new_max;
  logic          full_go, part_go, go, bank_free;
  logic [MW:0]   dm_raw;
  logic [MW-1:0] dm;
  logic [H-1:0]  hdr_new;
  hdr_kind_e     kind_new;

  always_comb begin
    w_in      = width_of(val_i);
    new_max   = (ccnt == 2'd0 || w_in > cmax) ? w_in : cmax;
    bank_free = (ecnt <= 3'd1);
    full_go   = dv_i && !first_i && ccnt == 2'(GROUP_SIZE - 1);
    part_go   = flush_i && !dv_i && ccnt != 2'd0 && bank_free;
    go        = full_go || part_go;
    gm        = full_go ? new_max : cmax;
    // width change modulo N
    dm_raw = {1'b0, gm} - {1'b0, m_prev};
    if (dm_raw[MW]) dm_raw = dm_raw + (MW+1)'(N);
    dm = dm_raw[MW-1:0];
    hdr_new = '0;
    if (dm == MW'(0)) begin
      kind_new = HDR_SHORT;
      hdr_new[H-1 -: 2] = HDR_CODE_SAME;
    end else if (dm == MW'(1)) begin
      kind_new = HDR_SHORT;
      hdr_new[H-1 -: 2] = HDR_CODE_INC;
    end else if (dm == MW'(N - 1)) begin
      kind_new = HDR_SHORT;
      hdr_new[H-1 -: 2] = HDR_CODE_DEC;
    end else begin
      kind_new = HDR_LONG;
      hdr_new = {K'(dm - MW'(2)), HDR_CODE_LONG};
    end
  end

  // Biased value of the item being issued: v + 2^(m-1), kept to m bits.
  logic [N-1:0] cur_v, biased, mask;
  always_comb begin
    cur_v  = eval[eidx];
    mask   = (N'(1) << em) - N'(1);
    if (em == MW'(N)) mask = '1;
    biased = efirst ? cur_v : ((cur_v + (N'(1) << (em - MW'(1)))) & mask);
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      ccnt       <= '0;
      cmax       <= MW'(1);
      m_prev     <= MW'(N);
      cval       <= '{default: '0};
      eval       <= '{default: '0};
      ecnt       <= '0;
      eidx       <= '0;
      em         <= MW'(1);
      ehdr       <= '0;
      ekind      <= HDR_NONE;
      efirst     <= 1'b0;
      item_valid <= 1'b0;
      item_data  <= '0;
      item_kind  <= HDR_NONE;
      item_vlen  <= '0;
      flush_o    <= 1'b0;
    end else begin
      // issue one item
      item_valid <= 1'b0;
      if (ecnt != 3'd0) begin
        item_valid <= 1'b1;
        item_data  <= {biased, (eidx == 2'd0) ? ehdr : H'(0)};
        item_kind  <= (eidx == 2'd0) ? ekind : HDR_NONE;
        item_vlen  <= efirst ? MW'(N) : em;
        ecnt       <= ecnt - 3'd1;
        eidx       <= eidx + 2'd1;
      end

      // collect
      if (dv_i && first_i) begin
        // first sample of a trace: issued alone, whole
        eval[0] <= val_i;
        ecnt    <= 3'd1;
        eidx    <= '0;
        ehdr    <= '0;
        ekind   <= HDR_NONE;
        efirst  <= 1'b1;
        m_prev  <= MW'(N);
        ccnt    <= '0;
      end else if (dv_i) begin
        cval[ccnt] <= val_i;
        cmax       <= new_max;
        ccnt       <= ccnt + 2'd1;
      end

      if (go) begin
        for (int i = 0; i < GROUP_SIZE; i++) eval[i] <= cval[i];
        if (full_go) eval[GROUP_SIZE-1] <= val_i;
        ecnt   <= full_go ? 3'(GROUP_SIZE) : {1'b0, ccnt};
        eidx   <= '0;
        em     <= gm;
        ehdr   <= hdr_new;
        ekind  <= kind_new;
        efirst <= 1'b0;
        m_prev <= gm;
        ccnt   <= '0;
      end

      flush_o <= flush_i && !dv_i && ccnt == 2'd0 && ecnt == 3'd0;
    end
  end

  // A new group may only be handed over when the issuing bank is free.
  // Assertions are armed by the first reset; before it the registers hold
  // arbitrary power-up values. 'armed' has a power-up value of 0.
  logic armed = 1'b0;
  always_ff @(posedge clk) if (reset) armed <= 1'b1;

  a_bank_free : assert property (@(posedge clk) disable iff (reset || !armed)
                                 (full_go || (dv_i && first_i)) |-> bank_free);

endmodule
