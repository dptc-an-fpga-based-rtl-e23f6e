// dptc_shifter -- the barrel shifter that places an encoded item at the next
// free bit of the output word.
//
// How it works: a logarithmic left shifter, one 2:1 multiplexer layer per bit
// of the shift amount. For N = 16 the input is 22 bits (16 value bits plus a
// 6-bit header field), the shift is 0..37 (38 positions) and the output is
// 60 bits, the sizes the paper gives. The shift is the number of bits
// already used in the output word (0..31) plus the length of the header the
// item carries (6, 2 or 0 bits). The header sits left-aligned in the low 6
// input bits, directly below the value, and the merging stage drops the
// lowest 6 output bits; together this moves the first header bit (or the
// value, when there is no header) to the first free position. The paper
// quotes the extra offsets as 0, 4 or 6 for long, short or no header, which
// implies a different input layout it does not describe; the sizes here are
// the paper's, the layout is this design's.
//
// SHIFT_MULT = 1 selects the multiplier form of the same shift: the shift
// amount is first decoded to the one-hot factor 2^sh, and the input is
// multiplied by it, so an FPGA tool can map the shift onto DSP multipliers.
// The paper evaluates this variant and finds it no cheaper; it is off by
// default.
// Interface: purely combinational, din/sh in, dout out.
module dptc_shifter #(
  parameter int unsigned IN_W       = 22,
  parameter int unsigned SHIFT_MAX  = 37,
  parameter bit          SHIFT_MULT = 1'b0,
  localparam int unsigned OUT_W    = IN_W + SHIFT_MAX + 1,
  localparam int unsigned SW       = $clog2(SHIFT_MAX + 1)
) (
  input  logic [IN_W-1:0]  din,
  input  logic [SW-1:0]    sh,
  output logic [OUT_W-1:0] dout
);

  logic [OUT_W-1:0] stage [SW+1];
  logic [SHIFT_MAX:0] onehot;   // 2^sh

  always_comb begin
    stage[0] = OUT_W'(din);
    for (int s = 0; s < SW; s++)
      stage[s+1] = sh[s] ? (stage[s] << (1 << s)) : stage[s];
    onehot = '0;
    for (int i = 0; i <= SHIFT_MAX; i++)
      if (sh == SW'(i)) onehot[i] = 1'b1;
    if (SHIFT_MULT) dout = OUT_W'(din) * OUT_W'(onehot);
    else            dout = stage[SW];
  end

endmodule
