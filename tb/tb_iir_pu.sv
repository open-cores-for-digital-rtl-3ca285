// tb_iir_pu: self-checking test of the six-section IIR processing unit.
// Six random stable sections (poles inside the unit circle) and a gain
// are loaded; for every number of used sections (en_out = 0..5) an impulse
// and random samples are filtered, each output is compared with the
// bit-true cascade model, and enable_out must rise exactly en_out+1 clocks
// after the enable pulse.
module tb_iir_pu;
  localparam int M = 16, G = 8, Q = 13, NS = 6;
  logic clk = 0, reset = 1, enable = 0, enable_out;
  logic [M-1:0] x = '0, gain;
  logic [M+G-1:0] y;
  logic [6*NS*M-1:0] hq;
  logic [3:0] en_out = 0;
  logic signed [M-1:0] c [NS][5];
  int checks = 0, failures = 0;

  `include "tb_iir_model.svh"

  iir_pu #(.NSECT(NS), .M(M), .G(G), .Q(Q)) dut (
    .clk, .reset, .enable, .input_signal(x), .filter_coeff(hq), .gain, .en_out,
    .output_signal(y), .enable_out
  );

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mw_t exp;
    int lat;
    for (int s = 0; s < NS; s++) begin
      real r, th;
      r  = 0.5 + 0.45 * real'($urandom_range(100)) / 100.0;
      th = 3.14159 * real'($urandom_range(100)) / 100.0;
      c[s][0] = M'($urandom_range(4000));
      c[s][1] = M'(int'($urandom_range(4000)) - 2000);
      c[s][2] = M'(int'($urandom_range(4000)) - 2000);
      c[s][3] = M'($rtoi(-2.0 * r * $cos(th) * 8192.0));
      c[s][4] = M'($rtoi(r * r * 8192.0));
      // word order per section: a2, a1, a0, b2, b1, b0
      hq[(6*s+0)*M +: M] = c[s][4];
      hq[(6*s+1)*M +: M] = c[s][3];
      hq[(6*s+2)*M +: M] = M'(8192);
      hq[(6*s+3)*M +: M] = c[s][2];
      hq[(6*s+4)*M +: M] = c[s][1];
      hq[(6*s+5)*M +: M] = c[s][0];
    end
    gain = 16'sd9000;
    repeat (3) @(posedge clk);
    for (int used = 1; used <= NS; used++) begin
      reset <= 1; @(posedge clk); reset <= 0;
      model_reset();
      en_out <= 4'(used - 1);
      @(posedge clk);
      for (int n = 0; n < 80; n++) begin
        x <= (n == 0) ? M'(4000) : (n < 30 ? '0 : M'($urandom));
        enable <= 1;
        @(posedge clk);
        enable <= 0;
        exp = model_step(mw_t'($signed(x)), c, gain, used);
        lat = 1;
        #1;
        while (!enable_out && lat < 20) begin @(posedge clk); #1; lat++; end
        checks += 2;
        if (lat != used) begin
          failures++; $display("used=%0d latency %0d", used, lat);
        end
        if (y !== exp) begin
          failures++;
          if (failures < 10) $display("used=%0d n=%0d y=%0d expected %0d", used, n, $signed(y), exp);
        end
        @(posedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
