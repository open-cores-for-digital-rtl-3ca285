// iir_core: IIR filter core, a Wishbone slave.
//
// Connects the cascade of second-order sections (iir_pu) to its Wishbone
// slave interface (iir_wb) as in the published block diagram: start enables
// the unit, IIR_DATA (low M bits), IIR_GAIN, IIR_NSECT and the coefficient
// bus feed it, and its output and completion flag return to IIR_DATA and
// IIR_STATUS. Host sequence per sample: write IIR_DATA, write 1 to
// IIR_CONTROL, poll IIR_STATUS, read IIR_DATA. With IIR_NSECT = n-1 the
// result is ready n+1 clocks after the acknowledge of the IIR_CONTROL write.
module iir_core #(
  parameter int NSECT = 6,
  parameter int M     = 16,
  parameter int G     = 8,
  parameter int Q     = 13
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
  logic                 start, done;
  logic [M-1:0]         gain;
  logic [M+G-1:0]       x, y;
  logic [6*NSECT*M-1:0] hq;
  logic [3:0]           nsect;

  iir_wb #(.NSECT(NSECT), .M(M), .G(G), .Q(Q)) u_wb (
    .clk, .reset, .stb_i, .we_i, .adr, .dat_i, .dat_o, .ack_o,
    .start, .gain, .sdat_o(x), .HQ(hq), .en_out(nsect), .sdat_i(y), .enable_in(done)
  );

  iir_pu #(.NSECT(NSECT), .M(M), .G(G), .Q(Q)) u_pu (
    .clk, .reset, .enable(start), .input_signal(x[M-1:0]), .filter_coeff(hq),
    .gain, .en_out(nsect), .output_signal(y), .enable_out(done)
  );
endmodule
