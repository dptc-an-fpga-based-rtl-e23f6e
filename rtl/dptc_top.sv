// dptc_top -- difference predicted trace compression (DPTC): lossless,
// configuration-free compression of flash-ADC traces, one sample per clock.
//
// How it works: stage 1 (dptc_diff) turns each sample into the difference
// to the previous one (the first sample of a trace is kept whole) and
// applies the sign-changing rule. Stage 2 forms groups of four differences
// with a short or long width header and biased values (dptc_group), and
// merges header and value bits into 32-bit words filled from the LSB
// (dptc_merge with its barrel shifter). The data-valid and flush signals
// travel alongside the data through every stage. Two variants the paper
// evaluates are available and off by default: the linear predictor
// (PREDICTOR) and the shift done by multiplication (SHIFT_MULT).
//
// Interface (as in the paper's module interface):
//   clk, reset   reset synchronous, active high, hold it >= 4 cycles
//   input_val    n-bit sample, accepted when dv_in is high
//   dv_in        one sample per cycle at most, gaps allowed
//   flush        raise after the last sample of a trace, hold until done
//   output_word  32-bit word, valid when dv_out is high
//   dv_out       a completed word is present
//   done         one-cycle pulse: the trace is processed and its last
//                word is out (possibly in this same cycle)
// The number of samples, of words and n are not stored in the stream; the
// user keeps them. The next trace may start the cycle flush is dropped.
//
// Timing: inputs and outputs are registered (16+3 input and 32+2 output
// flip-flops for n = 16, as counted in the paper). One sample is accepted
// every cycle, whatever its value; there is no back-pressure. done comes at
// most 9 cycles after flush is raised following the last sample.
module dptc_top
  import dptc_pkg::*;
#(
  parameter int unsigned N         = 16,   // ADC bits, 5..16
  parameter bit          PREDICTOR = 1'b0, // linear predictor, off by default
  parameter bit          SHIFT_MULT = 1'b0, // shifter as multiplier, off by default
  localparam int unsigned H  = long_hdr_bits(N),
  localparam int unsigned MW = $clog2(N + 1)
) (
  input  logic              clk,
  input  logic              reset,
  input  logic [N-1:0]      input_val,
  input  logic              dv_in,
  input  logic              flush,
  output logic [WORD_W-1:0] output_word,
  output logic              dv_out,
  output logic              done
);

  // input registers
  logic         rst_q, dv_q, flush_q;
  logic [N-1:0] in_q;

  always_ff @(posedge clk) begin
    rst_q   <= reset;
    in_q    <= input_val;
    dv_q    <= dv_in && !reset;
    flush_q <= flush && !reset;
  end

  // stage 1: difference
  logic [N-1:0] d_val;
  logic         d_dv, d_first, d_flush;

  dptc_diff #(.N(N), .PREDICTOR(PREDICTOR)) u_diff (
    .clk    (clk),
    .reset  (rst_q),
    .sample (in_q),
    .dv     (dv_q),
    .flush  (flush_q),
    .val_o  (d_val),
    .dv_o   (d_dv),
    .first_o(d_first),
    .flush_o(d_flush)
  );

  // stage 2a: header and group formation
  logic          g_valid, g_flush;
  logic [N+H-1:0] g_data;
  hdr_kind_e     g_kind;
  logic [MW-1:0] g_vlen;

  dptc_group #(.N(N)) u_group (
    .clk       (clk),
    .reset     (rst_q),
    .val_i     (d_val),
    .dv_i      (d_dv),
    .first_i   (d_first),
    .flush_i   (d_flush),
    .item_valid(g_valid),
    .item_data (g_data),
    .item_kind (g_kind),
    .item_vlen (g_vlen),
    .flush_o   (g_flush)
  );

  // stage 2b: output data merging
  dptc_merge #(.N(N), .SHIFT_MULT(SHIFT_MULT)) u_merge (
    .clk       (clk),
    .reset     (rst_q),
    .item_valid(g_valid),
    .item_data (g_data),
    .item_kind (g_kind),
    .item_vlen (g_vlen),
    .flush_i   (g_flush),
    .out_word  (output_word),
    .dv_out    (dv_out),
    .done      (done)
  );

endmodule
