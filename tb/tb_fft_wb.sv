// tb_fft_wb: self-checking test of the FFT core's Wishbone slave interface.
// Checks one fft_enable pulse and the sample on dat per FFT_DATA write, a
// clear_out pulse and FFT_STATUS clearing per FFT_CONTROL write,
// FFT_STATUS set by fft_finish, and that results written through
// adr_fft / fft_enable_in are read back at FFT_MEMORY + 4k (N = 1024).
module tb_fft_wb;
  localparam int N = 1024;
  logic clk = 0, reset = 1;
  logic stb = 0, we = 0, ack;
  logic [31:0] adr = 0, wdat = 0, rdat;
  logic clear, en, wen = 0, fin = 0;
  logic [31:0] dat, sdat = 0;
  logic [9:0] adr_fft = 0;
  int checks = 0, failures = 0, clears = 0, enables = 0;

  fft_wb #(.N(N)) dut (
    .clk, .reset, .stb_i(stb), .we_i(we), .adr(adr), .dat_i(wdat), .dat_o(rdat), .ack_o(ack),
    .clear_out(clear), .fft_enable(en), .dat, .sdat_i(sdat), .adr_fft,
    .fft_enable_in(wen), .fft_finish(fin)
  );

  `include "tb_wb_master.svh"

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (clear && !reset) clears++;
    if (en && !reset) enables++;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [31:0] ram [N];
    repeat (3) @(posedge clk);
    reset <= 0;
    @(posedge clk);
    wb_write(0, 0);
    check32("clear pulses", 32'(clears), 1);
    for (int n = 0; n < 5; n++) begin
      wb_write(4, 32'h1000_0000 + n);
      check32("dat", dat, 32'h1000_0000 + n);
    end
    check32("enable pulses", 32'(enables), 5);
    // the unit writes every bin once, in a scrambled order
    for (int k = 0; k < N; k++) begin
      ram[k] = $urandom;
      @(posedge clk);
      wen <= 1; adr_fft <= 10'(k * 37); sdat <= ram[k];
    end
    @(posedge clk) wen <= 0;
    wb_read(8, d);
    check32("status before finish", d, 0);
    @(posedge clk) fin <= 1;
    @(posedge clk) fin <= 0;
    wb_read(8, d);
    check32("status after finish", d, 1);
    for (int k = 0; k < N; k += 7) begin
      wb_read(12 + 4 * ((k * 37) % N), d);
      check32($sformatf("X[%0d]", (k * 37) % N), d, ram[k]);
    end
    wb_read(12 + 4 * (N - 1), d);
    check32("last word", d, ram[(N - 1) * 941 % N]);   // 37*941 = 1 mod 1024
    wb_write(0, 0);
    wb_read(8, d);
    check32("status cleared by control", d, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
