// fft_pu: FFT processing unit, pipelined radix-2^2 single-delay-feedback.
//
// An N-point FFT (N a power of 4) is built from log2(N) butterfly stages
// (fft_bf2). Stage i has a feedback shift register of N/2^(i+1) words, so
// the delays run N/2, N/4, ..., 1. Stages come in pairs: the first of a pair
// is a plain radix-2 butterfly, the second also applies the trivial -j
// twiddle; between pairs a multiplier (fft_twmul) applies the non-trivial
// twiddle factors. One log2(N)-bit counter controls the whole pipeline, as
// in the published 64-point diagram; here a step counter is kept and each
// stage reads the bits of (step count minus the stage's own delay), because
// this pipelined version has one register after every butterfly and every
// multiplier. For the first stage of a pair at local time n the control is
// s = bit(log2 Np - 1) of n, for the second s = bit(log2 Np - 2) and
// t = bit(log2 Np - 1), with Np = N/4^p the pair's sub-transform length. The
// multiplier after pair p at local time n, with quadrant q = top two bits of
// (n mod Np) and r = n mod Np/4, uses W_N^(r * bitrev2(q) * 4^p).
//
// Results leave in bit-reversed order; index gives the natural frequency
// bin (the output count with its bits reversed), which is the RAM address
// the slave interface writes. Sequencing (this design's own): after clear,
// each enable takes one input sample; after the N-th sample the unit runs
// by itself, feeding zeros, until all N results have left; enable_out
// pulses once per result and frame_ready stays high from the last result
// until clear. Further enables are ignored until clear.
//
// Scaling: SCALE_MASK bit i halves the results of stage i; the default
// halves the first four stages, for a total gain of 2^-4 at N = 1024.
module fft_pu #(
  parameter int N = 1024,
  parameter int M = 16,
  parameter int Q = 15,
  parameter logic [$clog2(N)-1:0] SCALE_MASK = $clog2(N)'(4'b1111)
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 enable,
  input  logic                 clear,
  input  logic [M-1:0]         Xinr,
  input  logic [M-1:0]         Xini,
  output logic [M-1:0]         Xoutr,
  output logic [M-1:0]         Xouti,
  output logic [$clog2(N)-1:0] index,
  output logic                 enable_out,
  output logic                 frame_ready
);
  localparam int LN     = $clog2(N);   // number of butterfly stages
  localparam int CW     = LN + 2;      // step counter width
  // registers passed before stage i: one per earlier stage and multiplier
  function automatic int regs_before(int i);
    return i + i / 2;
  endfunction
  // feedback delay accumulated before stage i
  function automatic int delay_before(int i);
    return N - (N >> i);
  endfunction
  localparam int LAST_LAT = (N - 1) + regs_before(LN - 1);

  initial assert (LN % 2 == 0 && N == (1 << LN))
    else $error("fft_pu: N must be a power of 4");

  logic [CW-1:0] scnt;                 // steps since clear
  logic [LN:0]   in_cnt;               // samples taken
  logic          flushing, step, done;

  assign flushing = in_cnt[LN] && !done;
  assign step     = (enable && !in_cnt[LN]) || flushing;

  always_ff @(posedge clk) begin
    if (reset || clear) begin
      scnt   <= '0;
      in_cnt <= '0;
    end else if (step) begin
      scnt <= scnt + 1'b1;
      if (!in_cnt[LN]) in_cnt <= in_cnt + 1'b1;
    end
  end

  // data path: stage/multiplier chain, packed {im, re}
  logic [2*M-1:0] bf_in  [LN];
  logic [2*M-1:0] bf_out [LN];

  assign bf_in[0] = flushing ? '0 : {Xini, Xinr};

  for (genvar i = 0; i < LN; i++) begin : g_stage
    localparam int LNP = LN - 2 * (i / 2);        // log2 of pair length
    localparam bit SECOND = (i % 2) == 1;
    logic [CW-1:0] lt;
    logic          s, t;
    assign lt = scnt - CW'(delay_before(i) + regs_before(i));
    assign s  = SECOND ? lt[LNP-2] : lt[LNP-1];
    assign t  = SECOND ? lt[LNP-1] : 1'b0;

    fft_bf2 #(.D(N >> (i + 1)), .M(M), .TRIV(SECOND), .SCALE(SCALE_MASK[i])) u_bf (
      .clk, .reset, .step, .s, .t, .din(bf_in[i]), .dout(bf_out[i])
    );

    if (SECOND && i < LN - 1) begin : g_tw
      localparam int P = i / 2;                   // pair index
      logic [CW-1:0] lm;
      logic [LN-1:0] r, e;
      logic [1:0]    q, qrev;
      assign lm   = scnt - CW'(delay_before(i + 1) + regs_before(i + 1) - 1);
      assign q    = lm[LNP-1 -: 2];
      assign qrev = {q[0], q[1]};
      assign r    = LN'(lm) & LN'((1 << (LNP - 2)) - 1);
      assign e    = LN'(r * qrev) << (2 * P);
      fft_twmul #(.N(N), .M(M), .Q(Q)) u_tw (
        .clk, .reset, .step, .e, .din(bf_out[i]), .dout(bf_in[i+1])
      );
    end else if (i < LN - 1) begin : g_direct
      assign bf_in[i+1] = bf_out[i];
    end
  end

  assign Xoutr = bf_out[LN-1][M-1:0];
  assign Xouti = bf_out[LN-1][2*M-1:M];

  // output sequencing
  logic [CW-1:0] ocnt;
  logic [LN-1:0] oidx;
  assign ocnt = scnt - CW'(LAST_LAT);
  assign done = frame_ready;

  always_ff @(posedge clk) begin
    if (reset || clear) begin
      oidx        <= '0;
      enable_out  <= 1'b0;
      frame_ready <= 1'b0;
    end else begin
      enable_out <= 1'b0;
      if (step && scnt >= CW'(LAST_LAT) && ocnt < CW'(N)) begin
        oidx       <= ocnt[LN-1:0];
        enable_out <= 1'b1;
        if (ocnt == CW'(N - 1)) frame_ready <= 1'b1;
      end
    end
  end

  always_comb
    for (int b = 0; b < LN; b++) index[b] = oidx[LN-1-b];
endmodule
