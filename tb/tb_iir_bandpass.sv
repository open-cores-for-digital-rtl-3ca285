// tb_iir_bandpass: the IIR core running the filter of its published
// evaluation: a 12th-order Butterworth band-pass as six second-order
// sections, 16-bit coefficients and gain with 13 fractional bits, 24-bit
// data. The band edges are taken as 0.10625*pi and 0.11875*pi.
//
// The filter is designed here in double precision: the 6th-order analog
// Butterworth low-pass prototype poles p_k = exp(j*pi*(2k+5)/12) are mapped
// to band-pass poles by s^2 - p*B*s + W0^2 = 0 (B = W2 - W1, W0^2 = W1*W2,
// edges pre-warped as W = 2*tan(w/2)), then to z = (2+s)/(2-s). Each
// conjugate pole pair forms one section with numerator 1 - z^-2; the total
// gain that makes the response 1 at the centre frequency is spread as its
// 6th root over the sections. Sections are ordered by pole radius, the
// best damped first.
//
// Over the bus the testbench measures 1024 samples of the response to a
// full-scale impulse, checks each against the bit-true fixed-point model,
// computes the squared error of its 1024-point DFT against the
// double-precision filter, sum_k |H[k] - H~[k]|^2 (must stay below 2e-3;
// the part due to arithmetic round-off alone is printed too), and checks the
// gain at the band centre (1 +- 0.2) and at 0.5*pi (below 0.01).
module tb_iir_bandpass;
  localparam int M = 16, G = 8, Q = 13, NS = 6, L = 1024;
  localparam real PI = 3.141592653589793;
  localparam int AMP = 32767;                // impulse height, full 16-bit scale
  logic clk = 0, reset = 1;
  logic stb = 0, we = 0, ack;
  logic [31:0] adr = 0, wdat = 0, rdat;
  logic signed [M-1:0] c [NS][5];
  logic signed [M-1:0] gain;
  int checks = 0, failures = 0;

  `include "tb_iir_model.svh"

  iir_core dut (.clk, .reset, .stb_i(stb), .we_i(we), .adr(adr), .dat_i(wdat), .dat_o(rdat), .ack_o(ack));

  `include "tb_wb_master.svh"

  always #5 clk = ~clk;
  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ra1 [NS], ra2 [NS], rg;               // double-precision design
  real hr [L], hq [L], hm [L];   // double-precision design, same with Q13
                                 // coefficients, and measured responses

  // complex helpers on (re, im) pairs
  function automatic void csqrt(real a, real b, output real r, output real i);
    real m;
    m = $sqrt(a * a + b * b);
    r = $sqrt((m + a) / 2.0);
    i = (b < 0 ? -1.0 : 1.0) * $sqrt((m - a) / 2.0);
  endfunction

  task automatic make_filter();
    real w1, w2, B, W0s, pr, pi_, dr, di, sr, si, zr, zi, den, g, re, im, tr, ti, nr, ni;
    real sr2 [NS], si2 [NS], mag [NS];
    int idx;
    w1 = 2.0 * $tan(0.10625 * PI / 2.0);
    w2 = 2.0 * $tan(0.11875 * PI / 2.0);
    B = w2 - w1; W0s = w1 * w2;
    idx = 0;
    for (int k = 1; k <= 3; k++) begin     // prototype poles with Im > 0
      pr  = $cos(PI * (2 * k + 5) / 12.0);
      pi_ = $sin(PI * (2 * k + 5) / 12.0);
      // s = (pB +- sqrt((pB)^2 - 4 W0^2)) / 2
      csqrt((pr * pr - pi_ * pi_) * B * B - 4.0 * W0s, 2.0 * pr * pi_ * B * B, dr, di);
      for (int sg = -1; sg <= 1; sg += 2) begin
        sr = (pr * B + sg * dr) / 2.0;
        si = (pi_ * B + sg * di) / 2.0;
        // z = (2 + s) / (2 - s)
        den = (2.0 - sr) * (2.0 - sr) + si * si;
        zr = ((2.0 + sr) * (2.0 - sr) - si * si) / den;
        zi = (si * (2.0 - sr) + (2.0 + sr) * si) / den;
        sr2[idx] = zr; si2[idx] = zi;
        mag[idx] = zr * zr + zi * zi;
        idx++;
      end
    end
    // order sections by pole radius, smallest first
    for (int a = 0; a < NS; a++)
      for (int b = a + 1; b < NS; b++)
        if (mag[b] < mag[a]) begin
          zr = sr2[a]; zi = si2[a]; den = mag[a];
          sr2[a] = sr2[b]; si2[a] = si2[b]; mag[a] = mag[b];
          sr2[b] = zr; si2[b] = zi; mag[b] = den;
        end
    for (int s = 0; s < NS; s++) begin
      ra1[s] = -2.0 * sr2[s];
      ra2[s] = mag[s];
    end
    // gain at the centre frequency of the unnormalised cascade
    re = 1.0; im = 0.0;
    begin
      real w0 = 2.0 * $atan($sqrt(W0s) / 2.0);
      for (int s = 0; s < NS; s++) begin
        // (1 - e^-2jw) / (1 + a1 e^-jw + a2 e^-2jw)
        nr = 1.0 - $cos(2 * w0); ni = $sin(2 * w0);
        dr = 1.0 + ra1[s] * $cos(w0) + ra2[s] * $cos(2 * w0);
        di = -ra1[s] * $sin(w0) - ra2[s] * $sin(2 * w0);
        den = dr * dr + di * di;
        tr = (nr * dr + ni * di) / den;
        ti = (ni * dr - nr * di) / den;
        nr = re * tr - im * ti;
        im = re * ti + im * tr;
        re = nr;
      end
      g = 1.0 / $sqrt(re * re + im * im);
    end
    rg = $pow(g, 1.0 / NS);
  endtask

  initial begin
    logic [31:0] d;
    real v1 [NS], v2 [NS], u1 [NS], u2 [NS], x, xq, w, y, mse, mseq, er, ei, fr, fi, ang, e1, e2;
    real cr, ci, hc, hs;
    int nused;
    make_filter();
    gain = M'($rtoi($floor(rg * 8192.0 + 0.5)));
    for (int s = 0; s < NS; s++) begin
      c[s][0] = 16'sd8192; c[s][1] = 16'sd0; c[s][2] = -16'sd8192;
      c[s][3] = M'($rtoi($floor(ra1[s] * 8192.0 + 0.5)));
      c[s][4] = M'($rtoi($floor(ra2[s] * 8192.0 + 0.5)));
      $display("section %0d: a1 = %f a2 = %f (|pole| = %f)", s, ra1[s], ra2[s], $sqrt(ra2[s]));
    end
    $display("per-section gain %f (%0d in Q13)", rg, gain);
    repeat (3) @(posedge clk);
    reset <= 0;
    for (int s = 0; s < NS; s++) begin
      wb_write(20 + 4 * (6*s + 0), 32'(c[s][4]));
      wb_write(20 + 4 * (6*s + 1), 32'(c[s][3]));
      wb_write(20 + 4 * (6*s + 2), 32'd8192);
      wb_write(20 + 4 * (6*s + 3), 32'(c[s][2]));
      wb_write(20 + 4 * (6*s + 4), 32'(c[s][1]));
      wb_write(20 + 4 * (6*s + 5), 32'(c[s][0]));
    end
    wb_write(16, 32'(gain));
    wb_write(12, NS - 1);
    model_reset();
    foreach (v1[s]) begin v1[s] = 0; v2[s] = 0; u1[s] = 0; u2[s] = 0; end
    for (int n = 0; n < L; n++) begin
      int polls;
      x = (n == 0) ? 1.0 : 0.0;
      // double-precision reference, same structure
      for (int s = 0; s < NS; s++) begin
        w = x + v1[s];
        v1[s] = -ra1[s] * w + v2[s];
        v2[s] = -x - ra2[s] * w;
        x = rg * w;
      end
      hr[n] = x;
      xq = (n == 0) ? 1.0 : 0.0;
      for (int s = 0; s < NS; s++) begin
        w = xq + u1[s];
        u1[s] = -(c[s][3] / 8192.0) * w + u2[s];
        u2[s] = -xq - (c[s][4] / 8192.0) * w;
        xq = (gain / 8192.0) * w;
      end
      hq[n] = xq;
      wb_write(4, 32'(n == 0 ? AMP : 0));
      wb_write(0, 1);
      polls = 0;
      do begin wb_read(8, d); polls++; end while (d != 1 && polls < 10);
      wb_write(8, 0);
      wb_read(4, d);
      check32($sformatf("h[%0d] bit-true", n), d, 32'(model_step(mw_t'(n == 0 ? AMP : 0), c, gain, NS)));
      hm[n] = real'($signed(d[23:0])) / AMP;
    end
    mse = 0; mseq = 0; cr = 0; ci = 0; hc = 0; hs = 0;
    for (int k = 0; k < L; k++) begin
      er = 0; ei = 0; e1 = 0; e2 = 0; fr = 0; fi = 0;
      for (int n = 0; n < L; n++) begin
        ang = 2.0 * PI * real'((k * n) % L) / L;
        er += (hm[n] - hr[n]) * $cos(ang);
        ei -= (hm[n] - hr[n]) * $sin(ang);
        fr += (hm[n] - hq[n]) * $cos(ang);
        fi -= (hm[n] - hq[n]) * $sin(ang);
        e1 += hm[n] * $cos(ang);
        e2 -= hm[n] * $sin(ang);
      end
      mse += er * er + ei * ei;
      mseq += fr * fr + fi * fi;
      if (k == 57) begin cr = e1; ci = e2; end           // 0.111 pi, band centre
      if (k == 256) begin hc = e1; hs = e2; end          // 0.5 pi
    end
    $display("squared error of the %0d-point frequency response, summed: %e (mean %e)", L, mse, mse / L);
    $display("  of which arithmetic round-off (vs. quantized coefficients): %e", mseq);
    $display("|H| at 0.111 pi: %f, at 0.5 pi: %e", $sqrt(cr * cr + ci * ci), $sqrt(hc * hc + hs * hs));
    checks += 3;
    if (mse > 2e-3) begin failures++; $display("FAIL: squared error too large"); end
    if ($sqrt(cr * cr + ci * ci) < 0.8 || $sqrt(cr * cr + ci * ci) > 1.2) begin
      failures++; $display("FAIL: pass-band gain");
    end
    if ($sqrt(hc * hc + hs * hs) > 0.01) begin failures++; $display("FAIL: stop-band gain"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
