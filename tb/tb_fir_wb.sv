// tb_fir_wb: self-checking test of the FIR core's Wishbone slave interface.
// Writes every register and coefficient and checks what reaches the
// processing-unit side (HQ, Q, sdat_o, one start pulse per FIR_CONTROL
// write), checks FIR_STATUS being set by done_i and cleared by a start, and
// reads FIR_DATA back from sdat_i with sign extension.
module tb_fir_wb;
  localparam int N = 50, M = 16, G = 8;
  logic clk = 0, reset = 1;
  logic stb = 0, we = 0, ack;
  logic [31:0] adr = 0, wdat = 0, rdat;
  logic start, done = 0;
  logic [3:0] q;
  logic [M+G-1:0] sdat_o, sdat_i = '0;
  logic [N*M-1:0] hq;
  int checks = 0, failures = 0, starts = 0;

  fir_wb #(.N(N), .M(M), .G(G)) dut (
    .clk, .reset, .stb_i(stb), .we_i(we), .adr(adr), .dat_i(wdat), .dat_o(rdat), .ack_o(ack),
    .start, .Q(q), .sdat_o, .HQ(hq), .sdat_i, .done_i(done)
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
    logic [M-1:0] coef [N];
    repeat (3) @(posedge clk);
    reset <= 0;
    @(posedge clk);
    foreach (coef[k]) begin
      coef[k] = M'($urandom);
      wb_write(32'h9000_0000 + 16 + 4 * k, {16'hdead, coef[k]});
    end
    foreach (coef[k]) check32($sformatf("HQ[%0d]", k), 32'(hq[k*M +: M]), 32'(coef[k]));
    wb_write(12, 32'd13);
    check32("Q", 32'(q), 32'd13);
    wb_write(4, 32'h00_abcdef);
    check32("sdat_o", 32'(sdat_o), 32'h00ab_cdef);
    check32("starts before control", 32'(starts), 0);
    wb_write(0, 32'd1);
    check32("one start pulse", 32'(starts), 1);
    wb_read(8, d);
    check32("status clear", d, 0);
    @(posedge clk) done <= 1;
    @(posedge clk) done <= 0;
    wb_read(8, d);
    check32("status set", d, 1);
    sdat_i <= 24'h80_0001;
    wb_read(4, d);
    check32("data read", d, 32'hff80_0001);
    wb_read(12, d);
    check32("write-only reads 0", d, 0);
    wb_write(0, 32'd1);
    wb_read(8, d);
    check32("status cleared by start", d, 0);
    check32("two start pulses", 32'(starts), 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
