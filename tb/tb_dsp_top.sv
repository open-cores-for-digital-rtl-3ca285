// tb_dsp_top: end-to-end test of the three DSP cores through the top-level
// Wishbone port, at the default sizes (50-tap FIR, six-section IIR,
// 1024-point FFT); the top's parameters are left alone.
//
// A bus master (the tasks in tb_wb_master.svh) plays the host processor:
//   FIR  - loads coefficients and Q, filters an impulse and random samples
//          and compares with a direct-form convolution;
//   IIR  - loads six sections and a gain, filters with six sections, then
//          switches to two sections (IIR_NSECT) and filters again, against
//          the bit-true cascade model;
//   FFT  - computes the two-sample test frame, compared with its closed-form
//          DFT, then a full-scale DC frame, whose bin 0 must saturate.
// It also makes an access to the unused window. Each mechanism (FIR start
// and status, IIR start and status, IIR section-count switch, FFT frame with
// flush and status, FFT saturation, unused-window acknowledge) is counted,
// and a mechanism that never happened counts as a failure.
module tb_dsp_top;
  localparam int M = 16, G = 8, Q = 13, NS = 6;
  localparam int FIR_N = 50, FFT_N = 1024;
  localparam logic [31:0] FIR_B = 32'h0000, IIR_B = 32'h2000, FFT_B = 32'h4000;
  logic clk = 0, reset = 1;
  logic stb = 0, we = 0, ack;
  logic [31:0] adr = 0, wdat = 0, rdat;
  int checks = 0, failures = 0;
  int n_fir = 0, n_iir = 0, n_switch = 0, n_fft = 0, n_sat = 0, n_none = 0;
  logic signed [M-1:0] c [NS][5];
  logic signed [M-1:0] gain;

  `include "tb_iir_model.svh"

  dsp_top dut (.clk, .reset, .stb_i(stb), .we_i(we), .adr(adr), .dat_i(wdat), .dat_o(rdat), .ack_o(ack));

  `include "tb_wb_master.svh"

  always #5 clk = ~clk;
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v);
    return v < 0 ? -v : v;
  endfunction

  task automatic wait_status(logic [31:0] base, output int polls);
    logic [31:0] d;
    polls = 0;
    do begin wb_read(base + 8, d); polls++; end while (d != 1 && polls < 5000);
    checks++;
    if (d != 1) begin failures++; $display("status at %h never set", base); end
  endtask

  task automatic fir_test();
    logic signed [M-1:0] h [FIR_N];
    logic signed [M+G-1:0] hist [FIR_N];
    logic signed [M+G-1:0] x, acc;
    logic signed [2*M+G-1:0] p;
    logic [31:0] d;
    int polls;
    foreach (h[k]) begin
      h[k] = M'($urandom);
      wb_write(FIR_B + 16 + 4 * k, 32'(h[k]));
      hist[k] = '0;
    end
    wb_write(FIR_B + 12, 15);
    for (int n = 0; n < 70; n++) begin
      x = (n == 0) ? 24'sd32768 : (n < FIR_N ? '0 : 24'($urandom));
      wb_write(FIR_B + 4, 32'(x));
      wb_write(FIR_B + 0, 1);
      wait_status(FIR_B, polls);
      wb_read(FIR_B + 4, d);
      for (int k = FIR_N - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = x;
      acc = '0;
      for (int k = 0; k < FIR_N; k++) begin
        p = h[k] * hist[k];
        acc += 24'(p >>> 15);
      end
      check32($sformatf("FIR y[%0d]", n), d, 32'(acc));
      n_fir++;
    end
  endtask

  task automatic iir_run(int used, int nsamp);
    logic [31:0] d;
    logic signed [M-1:0] x;
    int polls;
    wb_write(IIR_B + 12, used - 1);
    for (int n = 0; n < nsamp; n++) begin
      x = (n == 0) ? 16'sd8192 : (n < 20 ? '0 : M'($urandom_range(2000)) - 16'sd1000);
      wb_write(IIR_B + 4, 32'(x));
      wb_write(IIR_B + 0, 1);
      wait_status(IIR_B, polls);
      wb_write(IIR_B + 8, 0);
      wb_read(IIR_B + 4, d);
      check32($sformatf("IIR y[%0d] (%0d sections)", n, used), d,
              32'(model_step(mw_t'(x), c, gain, used)));
      n_iir++;
    end
  endtask

  task automatic iir_test();
    for (int s = 0; s < NS; s++) begin
      c[s][0] = 16'sd300; c[s][1] = 16'sd0; c[s][2] = -16'sd300;
      c[s][3] = M'($rtoi(-2.0 * 0.9 * $cos(0.3 + 0.05 * s) * 8192.0));
      c[s][4] = M'($rtoi(0.81 * 8192.0));
      wb_write(IIR_B + 20 + 4 * (6*s + 0), 32'(c[s][4]));
      wb_write(IIR_B + 20 + 4 * (6*s + 1), 32'(c[s][3]));
      wb_write(IIR_B + 20 + 4 * (6*s + 2), 32'd8192);
      wb_write(IIR_B + 20 + 4 * (6*s + 3), 32'(c[s][2]));
      wb_write(IIR_B + 20 + 4 * (6*s + 4), 32'(c[s][1]));
      wb_write(IIR_B + 20 + 4 * (6*s + 5), 32'(c[s][0]));
    end
    gain = 16'sd10000;
    wb_write(IIR_B + 16, 32'(gain));
    model_reset();
    iir_run(NS, 40);
    // Switch to two sections. The first two sections keep their state, as
    // the model does, so filtering continues without a reset.
    iir_run(2, 30);
    n_switch++;
  endtask

  task automatic fft_frame(int xr [FFT_N], output logic [31:0] res [FFT_N]);
    int polls;
    wb_write(FFT_B + 0, 0);
    for (int n = 0; n < FFT_N; n++) wb_write(FFT_B + 4, {16'd0, 16'(xr[n])});
    wait_status(FFT_B, polls);
    for (int k = 0; k < FFT_N; k++) wb_read(FFT_B + 12 + 4 * k, res[k]);
    n_fft++;
  endtask

  task automatic fft_test();
    int xr [FFT_N];
    logic [31:0] res [FFT_N];
    real er, ei, ang;
    foreach (xr[n]) xr[n] = 0;
    xr[0] = -69; xr[1] = 64;
    fft_frame(xr, res);
    for (int k = 0; k < FFT_N; k++) begin
      ang = 6.283185307179586 * k / FFT_N;
      er = (-69.0 + 64.0 * $cos(ang)) / 16.0 - real'($signed(res[k][15:0]));
      ei = (-64.0 * $sin(ang)) / 16.0 - real'($signed(res[k][31:16]));
      checks++;
      if (absr(er) > 3.0 || absr(ei) > 3.0) begin
        failures++; $display("FFT X[%0d] = %h", k, res[k]);
      end
    end
    // full-scale DC: bin 0 would be 16000 * 1024 / 16, far beyond 16 bits
    foreach (xr[n]) xr[n] = 16000;
    fft_frame(xr, res);
    check32("FFT saturated bin 0", res[0], 32'h0000_7fff);
    if (res[0] == 32'h0000_7fff) n_sat++;
    for (int k = 1; k < FFT_N; k += 97) check32($sformatf("FFT DC frame X[%0d]", k), res[k], 0);
  endtask

  task automatic count(string what, int n);
    checks++;
    $display("%-28s happened %0d times", what, n);
    if (n == 0) begin failures++; $display("FAIL: %s never happened", what); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    reset <= 0;
    fir_test();
    iir_test();
    fft_test();
    wb_read(32'h6000, d);
    check32("unused window", d, 0);
    n_none++;
    count("FIR sample", n_fir);
    count("IIR sample", n_iir);
    count("IIR section-count switch", n_switch);
    count("FFT frame with flush", n_fft);
    count("FFT butterfly saturation", n_sat);
    count("unused-window access", n_none);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
