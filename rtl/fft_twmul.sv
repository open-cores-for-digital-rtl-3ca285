// fft_twmul: twiddle-factor multiplier between two radix-2^2 stage pairs.
//
// Multiplies the complex input by W_N^e = cos(2*pi*e/N) - j*sin(2*pi*e/N).
// The N-entry twiddle table is computed at elaboration from the formula
// above, in Q fractional bits scaled by 2^Q - 1 and rounded to nearest, so
// that W^0 = 1 fits the M-bit word. Products are full precision, the two
// sums are rounded (half added, then shifted right arithmetically by Q) and
// wrapped to M bits (this design's choice). Complex words are packed {im, re}.
// Timing: dout is registered and advances only when step is high.
module fft_twmul #(
  parameter int N = 1024,
  parameter int M = 16,
  parameter int Q = 15
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 step,
  input  logic [$clog2(N)-1:0] e,
  input  logic [2*M-1:0]       din,
  output logic [2*M-1:0]       dout
);
  typedef logic signed [M-1:0] word_t;
  typedef logic [2*M-1:0]      tw_table_t [N];

  function automatic tw_table_t make_table();
    tw_table_t tab;
    real scale, ang;
    logic [M-1:0] c, sn;
    scale = real'((2 ** Q) - 1);
    for (int k = 0; k < N; k++) begin
      ang = 6.283185307179586 * real'(k) / real'(N);
      c      = M'($rtoi($floor($cos(ang) * scale + 0.5)));
      sn     = M'($rtoi($floor(-$sin(ang) * scale + 0.5)));
      tab[k] = {sn, c};
    end
    return tab;
  endfunction

  localparam tw_table_t TW = make_table();

  word_t xr, xi, wr, wi;
  logic signed [2*M:0] pr, pi;

  always_comb begin
    xr = din[M-1:0];
    xi = din[2*M-1:M];
    wr = TW[e][M-1:0];
    wi = TW[e][2*M-1:M];
    pr = (2*M+1)'(xr * wr) - (2*M+1)'(xi * wi) + (2*M+1)'(1 << (Q - 1));
    pi = (2*M+1)'(xr * wi) + (2*M+1)'(xi * wr) + (2*M+1)'(1 << (Q - 1));
  end

  always_ff @(posedge clk) begin
    if (reset)     dout <= '0;
    else if (step) dout <= {word_t'(pi >>> Q), word_t'(pr >>> Q)};
  end
endmodule
