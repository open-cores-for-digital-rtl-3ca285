// fir_wb: Wishbone slave interface of the FIR filter core.
//
// Holds the registers the host sees and drives the processing unit:
//   +0  FIR_CONTROL (W)  writing 1 in bit 0 starts filtering of FIR_DATA
//   +4  FIR_DATA    (RW) write: input sample; read: last filtered sample
//   +8  FIR_STATUS  (R)  bit 0 set when the processing unit has finished
//   +12 FIR_Q       (W)  number of fractional bits of the coefficients
//   +16 + 4k        (W)  coefficient h[k], 16-bit, k = 0 .. N-1
// The map follows the published register table. A write to FIR_CONTROL
// produces a one-clock start pulse and clears FIR_STATUS; done_i (the unit's
// output-valid) sets it again. Clearing on start and the done_i wire are this
// design's own choices; the published block diagram shows no completion wire.
//
// Bus timing (Wishbone classic, no CYC): the master raises stb_i with we_i,
// adr and dat_i and holds them; ack_o rises on the next clock edge for one
// clock, with dat_o valid while ack_o is high. Only adr[12:0] is decoded;
// the base address is decoded outside. Write-only registers read as 0.
module fir_wb
  import dsp_pkg::*;
#(
  parameter int N = 50,
  parameter int M = 16,
  parameter int G = 8
) (
  input  logic               clk,
  input  logic               reset,
  input  logic               stb_i,
  input  logic               we_i,
  input  logic [31:0]        adr,
  input  logic [31:0]        dat_i,
  output logic [31:0]        dat_o,
  output logic               ack_o,
  output logic               start,
  output logic [3:0]         Q,
  output logic [M+G-1:0]     sdat_o,
  output logic [N*M-1:0]     HQ,
  input  logic [M+G-1:0]     sdat_i,
  input  logic               done_i
);
  localparam int AW = 13;

  logic [AW-1:0] off;
  logic          access, wr;
  logic          status;

  assign off    = adr[AW-1:0];
  assign access = stb_i && !ack_o;
  assign wr     = access && we_i;

  always_ff @(posedge clk) begin
    if (reset) begin
      ack_o  <= 1'b0;
      start  <= 1'b0;
      status <= 1'b0;
      Q      <= 4'd15;
      sdat_o <= '0;
      HQ     <= '0;
    end else begin
      ack_o <= access;
      start <= wr && off == AW'(FIR_CONTROL) && dat_i[0];
      if (done_i) status <= 1'b1;
      if (wr) begin
        if (off == AW'(FIR_CONTROL) && dat_i[0]) status <= 1'b0;
        if (off == AW'(FIR_DATA))  sdat_o <= dat_i[M+G-1:0];
        if (off == AW'(FIR_Q))     Q      <= dat_i[3:0];
        for (int k = 0; k < N; k++)
          if (off == AW'(FIR_COEFF + 4 * k)) HQ[k*M +: M] <= dat_i[M-1:0];
      end
    end
  end

  // Read data: registers are stable while ack_o is high.
  always_comb begin
    dat_o = '0;
    if (ack_o && !we_i) begin
      unique case (off)
        AW'(FIR_DATA):   dat_o = 32'($signed(sdat_i));
        AW'(FIR_STATUS): dat_o = {31'd0, status};
        default:         dat_o = '0;
      endcase
    end
  end

  // One acknowledge per strobe: the master must hold stb_i until ack_o.
  ack_one_clock: assert property (@(posedge clk) disable iff (reset) ack_o |=> !ack_o);
endmodule
