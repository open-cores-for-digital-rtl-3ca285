// fft_bf2: one radix-2 single-delay-feedback butterfly stage of the
// radix-2^2 SDF FFT, with its feedback shift register and output register.
//
// The stage holds D complex words in a feedback shift register. On each
// step, with f the word leaving the shift register and x the input:
//   s = 0: x enters the shift register, f is passed to the output
//   s = 1: f - x enters the shift register, f + x goes to the output
// With TRIV = 1 the stage is the second butterfly of a radix-2^2 pair: when
// both s and t are 1 the input is first multiplied by -j (re/im swapped,
// new imaginary part negated), which is the trivial twiddle of the radix-2^2
// decomposition. With SCALE = 1 the butterfly results are halved and rounded
// half away from zero, which keeps a DC bias out of later stages, otherwise they saturate to M bits. The shift register, the
// alternation of the two butterfly types and the s/t controls follow the
// published 64-point diagram; scaling and saturation are this design's own.
//
// Interface: complex words are packed {im, re}, each M-bit two's complement.
// Timing: everything advances only when step is high; dout is registered,
// so the stage adds one step of latency on top of its D-step feedback delay.
module fft_bf2 #(
  parameter int D     = 1,   // feedback delay (words)
  parameter int M     = 16,
  parameter bit TRIV  = 1'b0,
  parameter bit SCALE = 1'b0
) (
  input  logic           clk,
  input  logic           reset,
  input  logic           step,
  input  logic           s,
  input  logic           t,
  input  logic [2*M-1:0] din,
  output logic [2*M-1:0] dout
);
  typedef logic signed [M-1:0] word_t;
  typedef logic signed [M:0]   wide_t;

  function automatic word_t fit(wide_t v);
    if (SCALE) return word_t'((v + wide_t'(!v[M])) >>> 1);  // half away from 0
    if (v > wide_t'((2**(M-1)) - 1)) return word_t'((2**(M-1)) - 1);
    if (v < -wide_t'(2**(M-1)))      return word_t'(-(2**(M-1)));
    return word_t'(v);
  endfunction

  function automatic word_t neg(word_t v);
    return fit(-wide_t'(v) <<< SCALE);
  endfunction

  logic [2*M-1:0] fifo [D];
  word_t xr, xi, fr, fi;
  word_t sum_r, sum_i, dif_r, dif_i;

  always_comb begin
    if (TRIV && s && t) begin
      xr = din[2*M-1:M];             // (a + jb)(-j) = b - ja
      xi = neg(din[M-1:0]);
    end else begin
      xr = din[M-1:0];
      xi = din[2*M-1:M];
    end
    fr = fifo[D-1][M-1:0];
    fi = fifo[D-1][2*M-1:M];
    sum_r = fit(wide_t'(fr) + wide_t'(xr));
    sum_i = fit(wide_t'(fi) + wide_t'(xi));
    dif_r = fit(wide_t'(fr) - wide_t'(xr));
    dif_i = fit(wide_t'(fi) - wide_t'(xi));
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      for (int k = 0; k < D; k++) fifo[k] <= '0;
      dout <= '0;
    end else if (step) begin
      for (int k = D - 1; k > 0; k--) fifo[k] <= fifo[k-1];
      if (s) begin
        fifo[0] <= {dif_i, dif_r};
        dout    <= {sum_i, sum_r};
      end else begin
        fifo[0] <= {xi, xr};
        dout    <= fifo[D-1];
      end
    end
  end
endmodule
