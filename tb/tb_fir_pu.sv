// tb_fir_pu: self-checking test of the transposed-form FIR processing unit
// at its full size (50 taps, 16-bit coefficients, 24-bit data). Random
// coefficients with Q = 15 and random samples, mixed with idle clocks, are
// filtered; each output is compared with a direct-form convolution computed
// here with the same fixed-point rule (product >>> Q, truncated to 24 bits,
// sums wrapping in 24 bits). Q changes halfway; a product keeps the Q that
// was in force when its sample entered, as the transposed form stores
// partial sums. The output must appear exactly one clock after
// each enable.
module tb_fir_pu;
  localparam int N = 50, M = 16, G = 8, W = M + G;
  logic clk = 0, reset = 1, enable = 0;
  logic [W-1:0] x, y;
  logic [N*M-1:0] h;
  logic [3:0] q;
  logic valid;
  int checks = 0, failures = 0;

  fir_pu #(.N(N), .M(M), .G(G)) dut (
    .clk, .reset, .enable, .input_signal(x), .filter_coeff(h), .Q(q),
    .output_signal(y), .valid_out(valid)
  );

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [W-1:0] hist [N];
  logic [3:0] qhist [N];   // Q in force when each sample entered

  function automatic logic signed [W-1:0] model();
    logic signed [W-1:0] acc;
    logic signed [M+W-1:0] p;
    acc = '0;
    for (int k = 0; k < N; k++) begin
      p = $signed(h[k*M +: M]) * hist[k];
      acc += W'(p >>> qhist[k]);
    end
    return acc;
  endfunction

  initial begin
    logic signed [W-1:0] exp;
    x = '0; q = 4'd15;
    for (int k = 0; k < N; k++) h[k*M +: M] = M'($urandom);
    foreach (hist[k]) begin hist[k] = '0; qhist[k] = 4'd15; end
    repeat (3) @(posedge clk);
    reset <= 0;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      if (n == 150) q = 4'd12;   // products already summed keep their Q
      x <= (n % 7 == 0) ? W'(-(2**(W-1))) : W'($urandom);
      enable <= 1;
      @(posedge clk);
      enable <= 0;
      for (int k = N - 1; k > 0; k--) begin hist[k] = hist[k-1]; qhist[k] = qhist[k-1]; end
      qhist[0] = q;
      hist[0] = $signed(x);
      exp = model();
      #1;
      checks++;
      if (!valid || y !== exp) begin
        failures++;
        if (failures < 10) $display("sample %0d: y=%0d valid=%0d expected %0d", n, $signed(y), valid, exp);
      end
      repeat ($urandom_range(2)) begin
        @(posedge clk); #1;
        checks++;
        if (valid) begin failures++; $display("valid without enable"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
