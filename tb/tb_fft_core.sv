// tb_fft_core: end-to-end test of the FFT core over Wishbone at full size
// (N = 1024, M = 16, Q = 15, total gain 2^-4). Frame 1 is the two-sample
// test signal x = {-69, 64, 0, ...} (about -0.0021 and 0.00195 in Q15);
// frame 2 is random data of amplitude 2^10. For each frame the host writes
// FFT_CONTROL, the 1024 samples, polls FFT_STATUS and reads all 1024 bins;
// each is compared with a double-precision DFT times 2^-4. Rounding noise
// of the scaled early stages is amplified by the six unscaled ones, so the
// bounds are: frame 1, 3 LSB per bin and 1 LSB^2 mean squared error per
// bin; frame 2, 40 LSB and 100 LSB^2. The total squared error is printed. FFT_STATUS must stay 0 until the flush after the last sample.
module tb_fft_core;
  localparam int N = 1024, LN = 10;
  logic clk = 0, reset = 1;
  logic stb = 0, we = 0, ack;
  logic [31:0] adr = 0, wdat = 0, rdat;
  int checks = 0, failures = 0;

  fft_core dut (.clk, .reset, .stb_i(stb), .we_i(we), .adr(adr), .dat_i(wdat), .dat_o(rdat), .ack_o(ack));

  `include "tb_wb_master.svh"

  always #5 clk = ~clk;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v);
    return v < 0 ? -v : v;
  endfunction

  int xr [N], xi [N];
  real cs [N], sn [N];

  task automatic frame(string name, real tol, real mse_max);
    logic [31:0] d;
    real rr, ri, er, ei, mse;
    int polls;
    wb_write(0, 0);
    for (int n = 0; n < N; n++) wb_write(4, {16'(xi[n]), 16'(xr[n])});
    wb_read(8, d);
    check32({name, ": status right after last sample"}, d, 0);
    polls = 0;
    do begin wb_read(8, d); polls++; end while (d != 1 && polls < 2000);
    checks++;
    if (d != 1) begin failures++; $display("%s: no finish", name); end
    mse = 0;
    for (int k = 0; k < N; k++) begin
      rr = 0; ri = 0;
      for (int n = 0; n < N; n++) begin
        int e = (k * n) % N;
        rr += xr[n] * cs[e] + xi[n] * sn[e];
        ri += xi[n] * cs[e] - xr[n] * sn[e];
      end
      rr /= 16.0; ri /= 16.0;
      wb_read(12 + 4 * k, d);
      er = rr - real'($signed(d[15:0]));
      ei = ri - real'($signed(d[31:16]));
      mse += er * er + ei * ei;
      checks++;
      if (absr(er) > tol || absr(ei) > tol) begin
        failures++;
        if (failures < 10) $display("%s: X[%0d] = (%0d,%0d) expected (%f,%f)", name, k,
                                    int'($signed(d[15:0])), int'($signed(d[31:16])), rr, ri);
      end
    end
    $display("%s: MSE over %0d bins = %f LSB^2", name, N, mse);
    checks++;
    if (mse / N > mse_max) begin
      failures++; $display("%s: mean squared error per bin %f above %f", name, mse / N, mse_max);
    end
  endtask

  initial begin
    for (int e = 0; e < N; e++) begin
      cs[e] = $cos(6.283185307179586 * e / N);
      sn[e] = $sin(6.283185307179586 * e / N);
    end
    repeat (3) @(posedge clk);
    reset <= 0;
    foreach (xr[n]) begin xr[n] = 0; xi[n] = 0; end
    xr[0] = -69; xr[1] = 64;
    frame("two-sample signal", 3.0, 1.0);
    foreach (xr[n]) begin
      xr[n] = int'($urandom_range(2048)) - 1024;
      xi[n] = int'($urandom_range(2048)) - 1024;
    end
    frame("random", 40.0, 100.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
