// tb_iir_core: end-to-end test of the IIR filter core over Wishbone at full
// size (6 sections, M=16, G=8, Q=13). The host loads a 12th-order filter
// made of six resonant band-pass sections and a per-section gain, then
// filters an impulse and random samples with all six sections, and again
// with three sections (IIR_NSECT = 2). Each output is compared with the
// bit-true model. IIR_STATUS is polled after each IIR_CONTROL write and
// cleared by writing it; the number of polls must match the section
// latency (one clock per section, two clocks per poll).
module tb_iir_core;
  localparam int M = 16, G = 8, Q = 13, NS = 6;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int used, int nsamp);
    logic [31:0] d;
    logic signed [M-1:0] x;
    int polls;
    wb_write(12, used - 1);
    model_reset();
    for (int n = 0; n < nsamp; n++) begin
      x = (n == 0) ? 16'sd8192 : (n < 40 ? '0 : M'($urandom_range(2000)) - 16'sd1000);
      wb_write(4, 32'(x));
      wb_write(0, 1);
      polls = 0;
      do begin wb_read(8, d); polls++; end while (d != 1 && polls < 20);
      // sections add one clock each; a poll takes two clocks
      check32($sformatf("polls %0d/%0d", used, n), 32'(polls), 32'((used + 1) / 2));
      wb_write(8, 0);
      wb_read(4, d);
      check32($sformatf("y[%0d] with %0d sections", n, used), d, 32'(model_step(mw_t'(x), c, gain, used)));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    reset <= 0;
    for (int s = 0; s < NS; s++) begin
      real r, th;
      r  = 0.95;
      th = 0.1 + 0.005 * s;
      c[s][0] = 16'sd400; c[s][1] = 16'sd0; c[s][2] = -16'sd400;
      c[s][3] = M'($rtoi(-2.0 * r * $cos(th) * 8192.0));
      c[s][4] = M'($rtoi(r * r * 8192.0));
      wb_write(20 + 4 * (6*s + 0), 32'(c[s][4]));
      wb_write(20 + 4 * (6*s + 1), 32'(c[s][3]));
      wb_write(20 + 4 * (6*s + 2), 32'd8192);
      wb_write(20 + 4 * (6*s + 3), 32'(c[s][2]));
      wb_write(20 + 4 * (6*s + 4), 32'(c[s][1]));
      wb_write(20 + 4 * (6*s + 5), 32'(c[s][0]));
    end
    gain = 16'sd12000;
    wb_write(16, 32'(gain));
    // the unit's state still holds the previous run; reset between runs
    run(NS, 100);
    reset <= 1; @(posedge clk); reset <= 0;
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < 6; j++)
        wb_write(20 + 4 * (6*s + j), 32'(j == 0 ? c[s][4] : j == 1 ? c[s][3] : j == 2 ? 16'sd8192 :
                                          j == 3 ? c[s][2] : j == 4 ? c[s][1] : c[s][0]));
    wb_write(16, 32'(gain));
    run(3, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
