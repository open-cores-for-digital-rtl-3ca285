// tb_fir_lowpass: the FIR core running the low-pass filter of its published
// evaluation: 50 taps (49th order), pass band up to 0.375*pi, stop band from
// 0.5*pi, 16-bit coefficients with 15 fractional bits. The equiripple
// design itself is not reproduced here; a Hamming-windowed sinc with its
// cut-off half-way between the two edges, h[n] = wc/pi * sinc(wc (n - 24.5))
// * (0.54 - 0.46 cos(2 pi n / 49)), wc = 0.4375 pi, stands in for it.
//
// Over the bus the testbench (1) measures the impulse response, which must
// equal the quantized coefficients, (2) computes the mean squared error of
// its 512-point DFT against the unquantized design, sum_k |H[k] - H~[k]|^2,
// and (3) filters a pass-band and a stop-band sinusoid and checks the output
// amplitudes against the design's response.
module tb_fir_lowpass;
  localparam int N = 50, NFFT = 512;
  localparam real PI = 3.141592653589793;
  logic clk = 0, reset = 1;
  logic stb = 0, we = 0, ack;
  logic [31:0] adr = 0, wdat = 0, rdat;
  int checks = 0, failures = 0;

  fir_core dut (.clk, .reset, .stb_i(stb), .we_i(we), .adr(adr), .dat_i(wdat), .dat_o(rdat), .ack_o(ack));

  `include "tb_wb_master.svh"

  always #5 clk = ~clk;
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real h [N];
  int  hq [N];

  function automatic real mag(real w);     // |H(e^jw)| of the ideal design
    real re = 0, im = 0;
    for (int n = 0; n < N; n++) begin
      re += h[n] * $cos(w * n);
      im -= h[n] * $sin(w * n);
    end
    return $sqrt(re * re + im * im);
  endfunction

  task automatic sample(int x, output int y);
    logic [31:0] d;
    wb_write(4, 32'(x));
    wb_write(0, 1);
    wb_read(8, d);
    wb_read(4, d);
    y = int'($signed(d[23:0]));
  endtask

  task automatic tone(real w, real amp, string name);
    int y;
    real peak, want;
    peak = 0;
    for (int n = 0; n < 300; n++) begin
      sample(int'($rtoi(amp * $sin(w * n))), y);
      if (n >= 100 && (y < 0 ? -y : y) > peak) peak = (y < 0 ? -y : y);
    end
    want = amp * mag(w);
    $display("%s tone at %.3f pi: output peak %0.1f, design %0.1f", name, w / PI, peak, want);
    checks++;
    if (peak > want + 0.01 * amp + 3 || peak < want - 0.01 * amp - 3) begin
      failures++; $display("FAIL: %s tone amplitude", name);
    end
  endtask

  initial begin
    int y;
    real wc, t, mse, er, ei, ang;
    real hre [NFFT], him [NFFT];
    wc = 0.4375 * PI;
    for (int n = 0; n < N; n++) begin
      t = real'(n) - 24.5;
      h[n] = $sin(wc * t) / (PI * t) * (0.54 - 0.46 * $cos(2.0 * PI * n / (N - 1)));
      hq[n] = $rtoi($floor(h[n] * 32768.0 + 0.5));
    end
    repeat (3) @(posedge clk);
    reset <= 0;
    for (int n = 0; n < N; n++) wb_write(16 + 4 * n, 32'(hq[n]));
    wb_write(12, 15);
    // impulse response
    for (int n = 0; n < N + 10; n++) begin
      sample(n == 0 ? 32768 : 0, y);
      check32($sformatf("impulse response [%0d]", n), 32'(y), 32'(n < N ? hq[n] : 0));
    end
    // DFT of the measured response against the double-precision design
    mse = 0;
    for (int k = 0; k < NFFT; k++) begin
      er = 0; ei = 0;
      for (int n = 0; n < N; n++) begin
        ang = 2.0 * PI * real'((k * n) % NFFT) / NFFT;
        er += (real'(hq[n]) / 32768.0 - h[n]) * $cos(ang);
        ei -= (real'(hq[n]) / 32768.0 - h[n]) * $sin(ang);
      end
      mse += er * er + ei * ei;
    end
    $display("MSE of the %0d-point frequency response: %e", NFFT, mse);
    checks++;
    if (mse > 1e-4) begin failures++; $display("FAIL: MSE too large"); end
    tone(0.2 * PI, 20000.0, "pass-band");
    tone(0.75 * PI, 20000.0, "stop-band");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
