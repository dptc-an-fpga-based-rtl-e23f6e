// dptc_merge -- stage 2b of the trace compressor: output data merging.
//
// How it works: up to 31 pending bits are held in an accumulator, filled
// from the least significant bit. Each incoming item (header and/or value)
// is moved to the first free bit by the barrel shifter and OR-ed in. When
// the total reaches 32 bits the completed word is emitted with dv_out and
// the bits that did not fit start the next word. At most 31 + 22 = 53 bits
// are in flight, so at most one word leaves per cycle.
//
// At the end of a trace (flush_i from the group stage, which arrives only
// after the last item) a partly filled word is emitted with its unused high
// bits zero, and done pulses for one cycle in the same cycle. done pulses
// once per flush; the flush level must drop before the next trace can
// complete.
//
// Paper: 32-bit words filled from the LSB, a value that does not fit is
// split across words, the last word forced out by flush, the shifter sizes.
// This design's choices: done as a one-cycle pulse, zero padding of the
// last word, registered outputs.
//
// Interface: item_valid/item_data/item_kind/item_vlen/flush_i in,
// out_word/dv_out/done out (all registered). Latency 1 cycle.
module dptc_merge
  import dptc_pkg::*;
#(
  parameter int unsigned N          = 16,
  parameter bit          SHIFT_MULT = 1'b0,  // shift by multiplication
  localparam int unsigned H  = long_hdr_bits(N),
  localparam int unsigned MW = $clog2(N + 1),
  localparam int unsigned IN_W      = N + H,
  localparam int unsigned SHIFT_MAX = WORD_W - 1 + H,
  localparam int unsigned OUT_W     = IN_W + SHIFT_MAX + 1,
  localparam int unsigned SW        = $clog2(SHIFT_MAX + 1)
) (
  input  logic              clk,
  input  logic              reset,
  input  logic              item_valid,
  input  logic [IN_W-1:0]   item_data,
  input  hdr_kind_e         item_kind,
  input  logic [MW-1:0]     item_vlen,
  input  logic              flush_i,
  output logic [WORD_W-1:0] out_word,
  output logic              dv_out,
  output logic              done
);

  logic [WORD_W-1:0] acc;       // pending bits, unused ones zero
  logic [4:0]        fill;      // bits used in acc, 0..31
  logic              done_sent; // done already given for this flush

  logic [SW-1:0]     hlen, sh;
  logic [OUT_W-1:0]  shifted;
  logic [OUT_W-H-1:0] placed;
  logic [2*WORD_W-1:0] merged;
  logic [6:0]        total;

  always_comb begin
    unique case (item_kind)
      HDR_LONG:  hlen = SW'(H);
      HDR_SHORT: hlen = SW'(SHORT_HDR_W);
      default:   hlen = '0;
    endcase
    sh    = SW'(fill) + hlen;
    total = 7'(fill) + 7'(hlen) + 7'(item_vlen);
  end

  dptc_shifter #(.IN_W(IN_W), .SHIFT_MAX(SHIFT_MAX), .SHIFT_MULT(SHIFT_MULT)) u_shift (
    .din (item_data),
    .sh  (sh),
    .dout(shifted)
  );

  always_comb begin
    placed = shifted[OUT_W-1:H];
    merged = (2*WORD_W)'(placed) | (2*WORD_W)'(acc);
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      acc       <= '0;
      fill      <= '0;
      done_sent <= 1'b0;
      out_word  <= '0;
      dv_out    <= 1'b0;
      done      <= 1'b0;
    end else begin
      dv_out <= 1'b0;
      done   <= 1'b0;
      if (item_valid) begin
        if (total >= 7'(WORD_W)) begin
          out_word <= merged[WORD_W-1:0];
          dv_out   <= 1'b1;
          acc      <= merged[2*WORD_W-1:WORD_W];
          fill     <= 5'(total - 7'(WORD_W));
        end else begin
          acc  <= merged[WORD_W-1:0];
          fill <= 5'(total);
        end
      end else if (flush_i && !done_sent) begin
        if (fill != 5'd0) begin
          out_word <= acc;
          dv_out   <= 1'b1;
        end
        acc       <= '0;
        fill      <= '0;
        done      <= 1'b1;
        done_sent <= 1'b1;
      end
      if (!flush_i) done_sent <= 1'b0;
    end
  end

  // Assertions are armed by the first reset; before it the registers hold
  // arbitrary power-up values. 'armed' has a power-up value of 0.
  logic armed = 1'b0;
  always_ff @(posedge clk) if (reset) armed <= 1'b1;

  // Items never arrive once the group stage has signalled the end of a trace.
  a_no_item_after_flush : assert property (@(posedge clk) disable iff (reset || !armed)
                                           flush_i |-> !item_valid);

endmodule
