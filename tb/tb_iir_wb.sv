// tb_iir_wb: self-checking test of the IIR core's Wishbone slave interface.
// Checks the reset values of IIR_NSECT and IIR_GAIN, writes every register
// and all 36 coefficient words and checks what reaches the processing-unit
// side, one start pulse per IIR_CONTROL write, IIR_STATUS set by enable_in
// and cleared by a write to IIR_STATUS, and the sign-extended IIR_DATA read.
module tb_iir_wb;
  localparam int NS = 6, M = 16, G = 8;
  logic clk = 0, reset = 1;
  logic stb = 0, we = 0, ack;
  logic [31:0] adr = 0, wdat = 0, rdat;
  logic start, done = 0;
  logic [M-1:0] gain;
  logic [3:0] nsect;
  logic [M+G-1:0] sdat_o, sdat_i = '0;
  logic [6*NS*M-1:0] hq;
  int checks = 0, failures = 0, starts = 0;

  iir_wb #(.NSECT(NS), .M(M), .G(G)) dut (
    .clk, .reset, .stb_i(stb), .we_i(we), .adr(adr), .dat_i(wdat), .dat_o(rdat), .ack_o(ack),
    .start, .gain, .sdat_o, .HQ(hq), .en_out(nsect), .sdat_i, .enable_in(done)
  );

  `include "tb_wb_master.svh"

  always #5 clk = ~clk;
  always @(posedge clk) if (start && !reset) starts++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [M-1:0] coef [6*NS];
    repeat (3) @(posedge clk);
    reset <= 0;
    @(posedge clk);
    check32("reset nsect", 32'(nsect), NS - 1);
    check32("reset gain", 32'(gain), 1 << 13);
    foreach (coef[k]) begin
      coef[k] = M'($urandom);
      wb_write(20 + 4 * k, 32'(coef[k]));
    end
    foreach (coef[k]) check32($sformatf("HQ[%0d]", k), 32'(hq[k*M +: M]), 32'(coef[k]));
    wb_write(12, 2);
    check32("nsect", 32'(nsect), 2);
    wb_write(16, 32'h1234);
    check32("gain", 32'(gain), 32'h1234);
    wb_write(4, 32'h00_fe_dcba);
    check32("sdat_o", 32'(sdat_o), 32'h00fe_dcba);
    wb_write(0, 1);
    check32("start pulse", 32'(starts), 1);
    @(posedge clk) done <= 1;
    @(posedge clk) done <= 0;
    wb_read(8, d);
    check32("status set", d, 1);
    wb_read(8, d);
    check32("status stays set on read", d, 1);
    wb_write(8, 0);
    wb_read(8, d);
    check32("status cleared by write", d, 0);
    sdat_i <= 24'h800000;
    wb_read(4, d);
    check32("data read", d, 32'hff80_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
