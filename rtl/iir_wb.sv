// iir_wb: Wishbone slave interface of the IIR filter core.
//
// Register map (byte offsets, following the published register table):
//   +0  IIR_CONTROL (W)  writing 1 in bit 0 starts filtering of IIR_DATA
//   +4  IIR_DATA    (RW) write: input sample; read: last filtered sample
//   +8  IIR_STATUS  (RW) bit 0 set when filtering finishes; any write clears
//   +12 IIR_NSECT   (W)  number of used sections minus one
//   +16 IIR_GAIN    (W)  per-section gain, Q fractional bits
//   +20 + 4*(6s+j)  (W)  coefficient j of section s, j = a2,a1,a0,b2,b1,b0
// A write to IIR_CONTROL gives a one-clock start pulse and also clears
// IIR_STATUS (this design's choice); enable_in from the unit sets it.
// Reset values: IIR_NSECT = NSECT-1, IIR_GAIN = 1.0, coefficients 0.
// Bus timing as in the FIR interface: registered single-clock ack_o one
// clock after stb_i, dat_o valid with ack_o, adr[12:0] decoded.
module iir_wb
  import dsp_pkg::*;
#(
  parameter int NSECT = 6,
  parameter int M     = 16,
  parameter int G     = 8,
  parameter int Q     = 13
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 stb_i,
  input  logic                 we_i,
  input  logic [31:0]          adr,
  input  logic [31:0]          dat_i,
  output logic [31:0]          dat_o,
  output logic                 ack_o,
  output logic                 start,
  output logic [M-1:0]         gain,
  output logic [M+G-1:0]       sdat_o,
  output logic [6*NSECT*M-1:0] HQ,
  output logic [3:0]           en_out,
  input  logic [M+G-1:0]       sdat_i,
  input  logic                 enable_in
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
      gain   <= M'(1 << Q);
      en_out <= 4'(NSECT - 1);
      sdat_o <= '0;
      HQ     <= '0;
    end else begin
      ack_o <= access;
      start <= wr && off == AW'(IIR_CONTROL) && dat_i[0];
      if (enable_in) status <= 1'b1;
      if (wr) begin
        if (off == AW'(IIR_STATUS)) status <= 1'b0;
        if (off == AW'(IIR_CONTROL) && dat_i[0]) status <= 1'b0;
        if (off == AW'(IIR_DATA))  sdat_o <= dat_i[M+G-1:0];
        if (off == AW'(IIR_NSECT)) en_out <= dat_i[3:0];
        if (off == AW'(IIR_GAIN))  gain   <= dat_i[M-1:0];
        for (int k = 0; k < 6 * NSECT; k++)
          if (off == AW'(IIR_COEFF + 4 * k)) HQ[k*M +: M] <= dat_i[M-1:0];
      end
    end
  end

  always_comb begin
    dat_o = '0;
    if (ack_o && !we_i) begin
      unique case (off)
        AW'(IIR_DATA):   dat_o = 32'($signed(sdat_i));
        AW'(IIR_STATUS): dat_o = {31'd0, status};
        default:         dat_o = '0;
      endcase
    end
  end

  ack_one_clock: assert property (@(posedge clk) disable iff (reset) ack_o |=> !ack_o);
endmodule
