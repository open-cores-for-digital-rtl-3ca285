// fft_core: FFT core, a Wishbone slave.
//
// Connects the radix-2^2 SDF processing unit (fft_pu) to its Wishbone slave
// interface (fft_wb) as in the published block diagram: FFT_DATA writes feed
// Xinr/Xini and pulse enable, FFT_CONTROL writes pulse clear, and the unit's
// results with their bit-reversed (natural-order) index go into the result
// RAM. Host sequence: write FFT_CONTROL, write N samples to FFT_DATA, poll
// FFT_STATUS, read X[k] at FFT_MEMORY + 4k. After the N-th sample the unit
// needs about N + 3*log2(N)/2 clocks to flush out all results.
module fft_core #(
  parameter int N = 1024,
  parameter int M = 16,
  parameter int Q = 15
) (
  input  logic        clk,
  input  logic        reset,
  input  logic        stb_i,
  input  logic        we_i,
  input  logic [31:0] adr,
  input  logic [31:0] dat_i,
  output logic [31:0] dat_o,
  output logic        ack_o
);
  localparam int LN = $clog2(N);

  logic          clear, enable, valid, finish;
  logic [31:0]   x;
  logic [M-1:0]  yr, yi;
  logic [LN-1:0] index;

  fft_wb #(.N(N)) u_wb (
    .clk, .reset, .stb_i, .we_i, .adr, .dat_i, .dat_o, .ack_o,
    .clear_out(clear), .fft_enable(enable), .dat(x),
    .sdat_i({16'(signed'(yi)), 16'(signed'(yr))}), .adr_fft(index),
    .fft_enable_in(valid), .fft_finish(finish)
  );

  fft_pu #(.N(N), .M(M), .Q(Q)) u_pu (
    .clk, .reset, .enable, .clear, .Xinr(x[M-1:0]), .Xini(x[16 +: M]),
    .Xoutr(yr), .Xouti(yi), .index, .enable_out(valid), .frame_ready(finish)
  );
endmodule
