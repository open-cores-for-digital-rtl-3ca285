// iir_sos: one second-order section (biquad) in transposed direct form II.
//
// For each valid input x the section computes
//   w  = b0*x + s1
//   s1 <= b1*x - a1*w + s2
//   s2 <= b2*x - a2*w
//   y  = gain*w
// which is the published section diagram: the feedback taps take w before
// the output gain, and the gain (the N_sect-th root of the total gain) sits
// on the output. The leading denominator coefficient a0 is taken as 1. All
// coefficients and the gain are M-bit two's complement with Q fractional
// bits; every product is shifted right arithmetically by Q and truncated,
// and states and output wrap in the M+G bit data word (this design's choice).
//
// Timing: y and en_out are registered, so a section has one clock of
// latency; the critical path is two multipliers and two adders (b0 then a1).
module iir_sos #(
  parameter int M = 16,
  parameter int G = 8,
  parameter int Q = 13
) (
  input  logic                  clk,
  input  logic                  reset,
  input  logic                  en_in,
  input  logic signed [M+G-1:0] x,
  input  logic signed [M-1:0]   b0, b1, b2, a1, a2,
  input  logic signed [M-1:0]   gain,
  output logic signed [M+G-1:0] y,
  output logic                  en_out
);
  localparam int W = M + G;
  typedef logic signed [W-1:0] word_t;

  // coefficient * data, scaled back by Q fractional bits
  function automatic word_t cmul(logic signed [M-1:0] c, word_t d);
    logic signed [M+W-1:0] p;
    p = c * d;
    return word_t'(p >>> Q);
  endfunction

  word_t s1, s2, w;

  assign w = cmul(b0, x) + s1;

  always_ff @(posedge clk) begin
    if (reset) begin
      s1     <= '0;
      s2     <= '0;
      y      <= '0;
      en_out <= 1'b0;
    end else begin
      en_out <= en_in;
      if (en_in) begin
        s1 <= cmul(b1, x) - cmul(a1, w) + s2;
        s2 <= cmul(b2, x) - cmul(a2, w);
        y  <= cmul(gain, w);
      end
    end
  end
endmodule
