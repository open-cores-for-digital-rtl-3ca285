// iir_pu: IIR filter processing unit, a cascade of second-order sections.
//
// NSECT pipelined sections (iir_sos) are chained: section s feeds section
// s+1, and each adds one clock of latency. The host chooses how many sections
// are in use by en_out (number of used sections minus one); the unit's output
// and its completion flag enable_out are taken from section en_out, so the
// filtered sample appears en_out+1 clocks after the enable pulse. Sections
// beyond en_out still run but their results are not used.
//
// Interface (following the published block diagram): input_signal is M bits
// and is sign-extended to the M+G bit word; filter_coeff carries, for section
// s, six M-bit words at [(6s+j)*M +: M] in the order a2, a1, a0, b2, b1, b0
// (the order of the IIR coefficient address space); a0 is not used. gain is
// common to all sections. Output selection by en_out is this design's own
// way of realising "number of used sections".
module iir_pu
  import dsp_pkg::*;
#(
  parameter int NSECT = 6,
  parameter int M     = 16,
  parameter int G     = 8,
  parameter int Q     = 13
) (
  input  logic                  clk,
  input  logic                  reset,
  input  logic                  enable,
  input  logic [M-1:0]          input_signal,
  input  logic [6*NSECT*M-1:0]  filter_coeff,
  input  logic [M-1:0]          gain,
  input  logic [3:0]            en_out,
  output logic [M+G-1:0]        output_signal,
  output logic                  enable_out
);
  localparam int W = M + G;

  logic signed [W-1:0] xs [NSECT+1];
  logic                es [NSECT+1];

  assign xs[0] = W'($signed(input_signal));
  assign es[0] = enable;

  function automatic logic signed [M-1:0] coef(int s, sos_coef_e j);
    return filter_coeff[(6*s + int'(j))*M +: M];
  endfunction

  for (genvar s = 0; s < NSECT; s++) begin : g_sect
    iir_sos #(.M(M), .G(G), .Q(Q)) u_sos (
      .clk, .reset,
      .en_in (es[s]),
      .x     (xs[s]),
      .b0    (coef(s, SOS_B0)),
      .b1    (coef(s, SOS_B1)),
      .b2    (coef(s, SOS_B2)),
      .a1    (coef(s, SOS_A1)),
      .a2    (coef(s, SOS_A2)),
      .gain  (gain),
      .y     (xs[s+1]),
      .en_out(es[s+1])
    );
  end

  // Output of the last section in use; out-of-range selects the last one.
  always_comb begin
    int sel;
    sel = (int'(en_out) < NSECT) ? int'(en_out) : NSECT - 1;
    output_signal = xs[sel+1];
    enable_out    = es[sel+1];
  end
endmodule
