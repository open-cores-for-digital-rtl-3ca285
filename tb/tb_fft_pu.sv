// tb_fft_pu: self-checking test of the radix-2^2 SDF FFT processing unit.
//
// Runs a 64-point unit with a total gain of 2^-4 (first four of six stages
// halved) on three frames: a unit impulse, a two-sample impulse like the
// one used to characterise the full-size core, and random data. Every result
// is compared with a double-precision DFT divided by 16; a result may be
// off by up to 12 LSB because each stage and multiplier truncates. It also checks that every
// bin is written exactly once and that frame_ready rises exactly
// N - 1 + (stage and multiplier registers) + 1 clocks after the last
// sample, when samples are given one per clock.
module tb_fft_pu;
  localparam int N  = 64;
  localparam int LN = 6;
  localparam int M  = 16;
  localparam int TOL = 12;
  localparam int LATENCY = (N - 1) + (LN - 1) + (LN - 1) / 2 + 1;

  logic clk = 0, reset = 1, enable = 0, clear = 0;
  logic [M-1:0] xr, xi, yr, yi;
  logic [LN-1:0] index;
  logic enable_out, frame_ready;
  int checks = 0, failures = 0;

  fft_pu #(.N(N), .M(M), .Q(15), .SCALE_MASK(6'b001111)) dut (
    .clk, .reset, .enable, .clear, .Xinr(xr), .Xini(xi), .Xoutr(yr), .Xouti(yi),
    .index, .enable_out, .frame_ready
  );

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real v);
    return v < 0 ? -v : v;
  endfunction

  int in_r [N], in_i [N];
  int out_r [N], out_i [N];
  bit seen [N];

  always @(posedge clk) if (enable_out) begin
    if (seen[index]) begin
      failures++; $display("bin %0d written twice", index);
    end
    seen[index] = 1;
    out_r[index] = $signed(yr);
    out_i[index] = $signed(yi);
  end

  task automatic run_frame(string name);
    int cyc;
    real rr, ri, ang;
    foreach (seen[k]) seen[k] = 0;
    @(posedge clk); clear <= 1; @(posedge clk); clear <= 0;
    for (int n = 0; n < N; n++) begin
      xr <= M'(in_r[n]); xi <= M'(in_i[n]); enable <= 1;
      @(posedge clk);
    end
    enable <= 0;
    cyc = 0;
    while (!frame_ready) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc != LATENCY) begin
      failures++; $display("%s: frame_ready after %0d clocks, expected %0d", name, cyc, LATENCY);
    end
    @(posedge clk);
    for (int k = 0; k < N; k++) begin
      rr = 0; ri = 0;
      for (int n = 0; n < N; n++) begin
        ang = -6.283185307179586 * real'((k * n) % N) / real'(N);
        rr += in_r[n] * $cos(ang) - in_i[n] * $sin(ang);
        ri += in_r[n] * $sin(ang) + in_i[n] * $cos(ang);
      end
      rr /= 16.0; ri /= 16.0;
      checks++;
      if (!seen[k] || absr(rr - out_r[k]) > TOL || absr(ri - out_i[k]) > TOL) begin
        failures++;
        $display("%s: X[%0d] = (%0d,%0d) expected (%f,%f) seen=%0d", name, k, out_r[k], out_i[k], rr, ri, seen[k]);
      end
    end
  endtask

  initial begin
    xr = 0; xi = 0;
    repeat (3) @(posedge clk);
    reset <= 0;
    foreach (in_r[n]) begin in_r[n] = 0; in_i[n] = 0; end
    in_r[0] = 16000;
    run_frame("impulse");
    foreach (in_r[n]) begin in_r[n] = 0; in_i[n] = 0; end
    in_r[0] = -2200; in_r[1] = 2048;   // two-sample impulse
    run_frame("pair");
    foreach (in_r[n]) begin
      in_r[n] = int'($urandom_range(4000)) - 2000;
      in_i[n] = int'($urandom_range(4000)) - 2000;
    end
    run_frame("random");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
