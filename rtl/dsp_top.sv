// dsp_top: the FIR, IIR and FFT cores behind one Wishbone slave port.
//
// This is the part of the DSP system-on-chip that sits on the processor's
// Wishbone bus: a decoder (wb_decode) splits the port into three 8 KB
// windows, FIR at +0x0000, IIR at +0x2000 and FFT at +0x4000 (adr[14:13]),
// and each core answers its own register map inside its window. Accesses to
// +0x6000..0x7FFF are acknowledged with data 0. Bits above 14 are left to
// the system interconnect. The processor and the rest of the system are not
// part of this module; a bus master connects to the port directly.
//
// Default sizes are those of the published configuration: 50-tap FIR,
// six-section IIR, 1024-point FFT, 16-bit words, 8 bits of growth in the
// filters, Q13 IIR coefficients and Q15 FFT data. The window size limits
// the cores to FIR_N <= 2044 and FFT_N <= 2045 (in practice 1024, the
// largest power of 4 that fits); elaboration-time assertions check this.
module dsp_top
  import dsp_pkg::*;
#(
  parameter int FIR_N     = 50,
  parameter int IIR_NS = 6,
  parameter int FFT_N     = 1024
) (
  input  logic        clk,
  input  logic        reset,
  input  logic        stb_i,
  input  logic        we_i,
  input  logic [31:0] adr,
  input  logic [31:0] dat_i,
  output logic [31:0] dat_o,
  output logic        ack_o
);
  // each core's register space must fit its window
  initial begin
    assert (FIR_COEFF + 4 * FIR_N <= 2 ** CORE_WIN_BITS)
      else $error("dsp_top: FIR coefficient space exceeds its window");
    assert (IIR_COEFF + 24 * IIR_NS <= 2 ** CORE_WIN_BITS)
      else $error("dsp_top: IIR coefficient space exceeds its window");
    assert (FFT_MEMORY + 4 * FFT_N <= 2 ** CORE_WIN_BITS)
      else $error("dsp_top: FFT result space exceeds its window");
  end

  logic [2:0]       s_stb, s_ack;
  logic [2:0][31:0] s_dat;

  wb_decode #(.NS(3), .WIN_BITS(CORE_WIN_BITS), .SELW(2)) u_dec (
    .clk, .reset, .stb_i, .adr, .dat_o, .ack_o, .s_stb, .s_ack, .s_dat
  );

  fir_core #(.N(FIR_N), .M(16), .G(8)) u_fir (
    .clk, .reset, .stb_i(s_stb[SEL_FIR]), .we_i, .adr, .dat_i,
    .dat_o(s_dat[SEL_FIR]), .ack_o(s_ack[SEL_FIR])
  );

  iir_core #(.NSECT(IIR_NS), .M(16), .G(8), .Q(13)) u_iir (
    .clk, .reset, .stb_i(s_stb[SEL_IIR]), .we_i, .adr, .dat_i,
    .dat_o(s_dat[SEL_IIR]), .ack_o(s_ack[SEL_IIR])
  );

  fft_core #(.N(FFT_N), .M(16), .Q(15)) u_fft (
    .clk, .reset, .stb_i(s_stb[SEL_FFT]), .we_i, .adr, .dat_i,
    .dat_o(s_dat[SEL_FFT]), .ack_o(s_ack[SEL_FFT])
  );
endmodule
