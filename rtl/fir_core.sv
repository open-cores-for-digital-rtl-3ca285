// fir_core: FIR filter core, a Wishbone slave.
//
// Connects the transposed-form processing unit (fir_pu) to its Wishbone
// slave interface (fir_wb) as in the published block diagram: the start
// pulse enables the unit, the FIR_DATA and FIR_Q registers and the packed
// coefficient bus feed it, and its output returns to FIR_DATA for reading.
// The unit's valid output also sets FIR_STATUS (this design's own wire).
// Host sequence per sample: write FIR_DATA, write 1 to FIR_CONTROL, poll
// FIR_STATUS until 1, read FIR_DATA. The filtered sample is ready two clocks
// after the acknowledge of the FIR_CONTROL write.
module fir_core #(
  parameter int N = 50,
  parameter int M = 16,
  parameter int G = 8
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
  logic           start, valid;
  logic [3:0]     q;
  logic [M+G-1:0] x, y;
  logic [N*M-1:0] hq;

  fir_wb #(.N(N), .M(M), .G(G)) u_wb (
    .clk, .reset, .stb_i, .we_i, .adr, .dat_i, .dat_o, .ack_o,
    .start, .Q(q), .sdat_o(x), .HQ(hq), .sdat_i(y), .done_i(valid)
  );

  fir_pu #(.N(N), .M(M), .G(G)) u_pu (
    .clk, .reset, .enable(start), .input_signal(x), .filter_coeff(hq),
    .Q(q), .output_signal(y), .valid_out(valid)
  );
endmodule
