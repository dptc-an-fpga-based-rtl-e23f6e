// dptc_diff -- stage 1 of the trace compressor: differencing (and the
// optional linear predictor), with the data-valid and flush pipelines.
//
// How it works: the first sample after reset or after a flush is passed on
// whole and flagged with first_o. Every later sample becomes the difference
// to the previous sample, computed modulo 2^N. A sign-changing rule then
// makes negative values the common ones: when the last non-zero stored value
// was negative, the next non-zero value is stored negated; a positive one
// clears that; a zero leaves it as it was.
//
// Optional linear predictor (PREDICTOR=1, off by default as in the paper):
// when the previous three first differences were all non-zero and of the
// same sign, the second difference (d - d_prev) is stored instead of d. The
// exact form of that rule (which three values, history cleared per trace)
// is this design's reading of the paper's short description.
//
// Interface: sample/dv/flush in, val_o/dv_o/first_o/flush_o out.
// Timing: one sample per cycle, one register stage (latency 1). flush is a
// level that follows dv through the same register; while it is high the
// stage prepares for the next trace (first sample, sign rule cleared).
// reset is synchronous and active high.
module dptc_diff #(
  parameter int unsigned N         = 16,  // ADC bits, 5..16
  parameter bit          PREDICTOR = 1'b0 // second differencing heuristic
) (
  input  logic         clk,
  input  logic         reset,
  input  logic [N-1:0] sample,
  input  logic         dv,
  input  logic         flush,
  output logic [N-1:0] val_o,    // first sample, or stored difference
  output logic         dv_o,
  output logic         first_o,  // val_o is the first sample of a trace
  output logic         flush_o
);

  logic         first;        // next valid sample starts a trace
  logic         invert;       // negate the next non-zero value
  logic [N-1:0] prev;         // previous sample
  logic [N-1:0] hist [3];     // last three first differences, [0] newest
  logic [1:0]   hist_cnt;     // how many entries of hist are valid

  logic [N-1:0] d1;           // first difference, modulo 2^N
  logic [N-1:0] pred_val;     // value after the optional predictor
  logic [N-1:0] stored;       // value after the sign rule
  logic         pred_on;

  always_comb begin
    d1 = sample - prev;
    pred_on = 1'b0;
    if (PREDICTOR && hist_cnt == 2'd3) begin
      pred_on = (hist[0] != '0) && (hist[1] != '0) && (hist[2] != '0) &&
                (hist[0][N-1] == hist[1][N-1]) && (hist[1][N-1] == hist[2][N-1]);
    end
    pred_val = pred_on ? (d1 - hist[0]) : d1;
    stored   = invert ? (N'(0) - pred_val) : pred_val;
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      first    <= 1'b1;
      invert   <= 1'b0;
      prev     <= '0;
      hist     <= '{default: '0};
      hist_cnt <= '0;
      val_o    <= '0;
      dv_o     <= 1'b0;
      first_o  <= 1'b0;
      flush_o  <= 1'b0;
    end else begin
      dv_o    <= dv;
      flush_o <= flush;
      first_o <= dv && first;
      if (dv) begin
        prev <= sample;
        if (first) begin
          val_o <= sample;
          first <= 1'b0;
        end else begin
          val_o   <= stored;
          hist[0] <= d1;
          hist[1] <= hist[0];
          hist[2] <= hist[1];
          if (hist_cnt != 2'd3) hist_cnt <= hist_cnt + 2'd1;
          if (stored[N-1])        invert <= 1'b1;
          else if (stored != '0)  invert <= 1'b0;
        end
      end
      if (flush) begin
        first    <= 1'b1;
        invert   <= 1'b0;
        hist_cnt <= '0;
      end
    end
  end

endmodule
