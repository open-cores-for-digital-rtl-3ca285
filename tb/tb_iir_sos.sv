// tb_iir_sos: self-checking test of one second-order section (M=16, G=8,
// Q=13). A stable band-pass-like biquad and a random gain are driven with
// an impulse and random samples at irregular intervals; every output is
// compared with the bit-true section equations and must appear exactly one
// clock after its input.
module tb_iir_sos;
  localparam int M = 16, G = 8, Q = 13, NS = 1;
  logic clk = 0, reset = 1, en_in = 0, en_out;
  logic signed [M+G-1:0] x = '0, y;
  logic signed [M-1:0] c [NS][5];
  logic signed [M-1:0] gain;
  int checks = 0, failures = 0;

  `include "tb_iir_model.svh"

  iir_sos #(.M(M), .G(G), .Q(Q)) dut (
    .clk, .reset, .en_in, .x, .b0(c[0][0]), .b1(c[0][1]), .b2(c[0][2]),
    .a1(c[0][3]), .a2(c[0][4]), .gain, .y, .en_out
  );

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mw_t exp;
    // b = [0.3, 0, -0.3], a = [1, -1.6, 0.8] in Q13
    c[0][0] = 16'sd2458; c[0][1] = 16'sd0; c[0][2] = -16'sd2458;
    c[0][3] = -16'sd13107; c[0][4] = 16'sd6554;
    gain = 16'sd7000;
    model_reset();
    repeat (3) @(posedge clk);
    reset <= 0;
    @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      x <= (n == 0) ? mw_t'(1 << 15) : (n < 100 ? '0 : mw_t'($signed(16'($urandom))));
      en_in <= 1;
      @(posedge clk);
      en_in <= 0;
      exp = model_step(x, c, gain, 1);
      #1;
      checks++;
      if (!en_out || y !== exp) begin
        failures++;
        if (failures < 10) $display("n=%0d y=%0d en=%0d expected %0d", n, y, en_out, exp);
      end
      repeat ($urandom_range(2)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
