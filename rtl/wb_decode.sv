// wb_decode: Wishbone address decoder in front of the three DSP cores.
//
// One slave port is split into NS slave windows of 2^WIN_BITS bytes each:
// adr[WIN_BITS +: SELW] picks slave i, whose strobe is raised while the
// master's strobe is; the chosen slave's ack and read data are returned.
// Address, data and write enable go to all slaves unchanged. An access to a
// window with no slave (index NS or above) is acknowledged by the decoder
// itself one clock later with read data 0, so a stray access cannot hang
// the bus. The window size and order are this design's own choices.
module wb_decode #(
  parameter int NS       = 3,
  parameter int WIN_BITS = 13,
  parameter int SELW     = 2
) (
  input  logic              clk,
  input  logic              reset,
  input  logic              stb_i,
  input  logic [31:0]       adr,
  output logic [31:0]       dat_o,
  output logic              ack_o,
  output logic [NS-1:0]     s_stb,
  input  logic [NS-1:0]     s_ack,
  input  logic [NS-1:0][31:0] s_dat
);
  logic [SELW-1:0] sel;
  logic            none, none_ack;

  assign sel  = adr[WIN_BITS +: SELW];
  assign none = int'(sel) >= NS;

  always_comb begin
    s_stb = '0;
    dat_o = '0;
    ack_o = none_ack;
    if (!none) begin
      s_stb[sel] = stb_i;
      ack_o      = s_ack[sel];
      dat_o      = s_dat[sel];
    end
  end

  always_ff @(posedge clk) begin
    if (reset) none_ack <= 1'b0;
    else       none_ack <= stb_i && none && !none_ack;
  end
endmodule
