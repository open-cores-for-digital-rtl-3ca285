// tb_fir_core: end-to-end test of the FIR filter core over Wishbone, at
// full size (N = 50). The host loads 50 random coefficients and Q = 15,
// then filters an impulse followed by random samples, one sample per
// FIR_DATA write / FIR_CONTROL write / FIR_STATUS poll / FIR_DATA read.
// Outputs are compared with a direct-form convolution using the same
// fixed-point rule; the impulse response must reproduce the coefficients.
// FIR_STATUS must read 1 on the first poll after the FIR_CONTROL write.
module tb_fir_core;
  localparam int N = 50, M = 16, G = 8, W = M + G;
  logic clk = 0, reset = 1;
  logic stb = 0, we = 0, ack;
  logic [31:0] adr = 0, wdat = 0, rdat;
  int checks = 0, failures = 0;

  fir_core dut (.clk, .reset, .stb_i(stb), .we_i(we), .adr(adr), .dat_i(wdat), .dat_o(rdat), .ack_o(ack));

  `include "tb_wb_master.svh"

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [M-1:0] h [N];
  logic signed [W-1:0] hist [N];

  function automatic logic signed [W-1:0] model();
    logic signed [W-1:0] acc = '0;
    logic signed [M+W-1:0] p;
    for (int k = 0; k < N; k++) begin
      p = h[k] * hist[k];
      acc += W'(p >>> 15);
    end
    return acc;
  endfunction

  initial begin
    logic [31:0] d;
    logic signed [W-1:0] x;
    repeat (3) @(posedge clk);
    reset <= 0;
    foreach (h[k]) begin
      h[k] = M'($urandom);
      wb_write(16 + 4 * k, 32'(h[k]));
    end
    wb_write(12, 15);
    foreach (hist[k]) hist[k] = '0;
    for (int n = 0; n < 120; n++) begin
      x = (n == 0) ? W'(1 << 15) : (n < N ? '0 : W'($urandom));
      wb_write(4, 32'(x));
      wb_write(0, 1);
      wb_read(8, d);
      check32($sformatf("status after sample %0d", n), d, 1);
      wb_read(4, d);
      for (int k = N - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = x;
      check32($sformatf("y[%0d]", n), d, 32'(model()));
      if (n < N) check32($sformatf("impulse h[%0d]", n), d, 32'(h[n]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
