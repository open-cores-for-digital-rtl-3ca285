// fir_pu: FIR filter processing unit, transposed realization form.
//
// Every enable pulse accepts one input sample x[n] and produces
// y[n] = sum_{k=0}^{N-1} h[k] x[n-k]. The structure is the transposed form:
// each tap multiplies the current sample by h[k] and adds it to the partial
// sum held in the register below it, so the N-1 delay registers carry partial
// sums upward to the output and the critical path is one multiplier and one
// adder. The transposed structure, the N coefficient inputs packed into one
// bus and the 4-bit Q input follow the published core; the arithmetic details
// are this design's own: each product h[k]*x is formed at full precision,
// shifted right arithmetically by Q (the number of fractional coefficient
// bits) and truncated to the M+G bit data word, and the adders wrap in M+G bits.
//
// Interface: input_signal and output_signal are M+G bit two's complement;
// filter_coeff holds h[k] in bits [k*M +: M]. Timing: output_signal and
// valid_out are registered and update on the clock edge where enable is high,
// i.e. one clock of latency; one sample per clock is possible.
module fir_pu #(
  parameter int N = 50,   // filter length (taps)
  parameter int M = 16,   // coefficient / word width
  parameter int G = 8     // bit growth of the data word
) (
  input  logic                  clk,
  input  logic                  reset,
  input  logic                  enable,
  input  logic [M+G-1:0]        input_signal,
  input  logic [N*M-1:0]        filter_coeff,
  input  logic [3:0]            Q,
  output logic [M+G-1:0]        output_signal,
  output logic                  valid_out
);
  localparam int W = M + G;

  typedef logic signed [W-1:0] word_t;

  word_t prod [N];        // scaled tap products
  word_t acc  [N];        // acc[k]: register z^-1 above tap k (acc[0] unused)

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic signed [M+W-1:0] full;
      full    = $signed(filter_coeff[k*M +: M]) * $signed(input_signal);
      prod[k] = word_t'(full >>> Q);
    end
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      for (int k = 0; k < N; k++) acc[k] <= '0;
      output_signal <= '0;
      valid_out     <= 1'b0;
    end else begin
      valid_out <= enable;
      if (enable) begin
        output_signal <= prod[0] + ((N > 1) ? acc[1 % N] : '0);
        for (int k = 1; k < N - 1; k++) acc[k] <= prod[k] + acc[k+1];
        acc[N-1] <= prod[N-1];
        acc[0]   <= '0;
      end
    end
  end
endmodule
