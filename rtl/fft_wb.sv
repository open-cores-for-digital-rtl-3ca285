// fft_wb: Wishbone slave interface of the FFT core, with the result RAM.
//
// Register map (byte offsets, following the published register table):
//   +0  FFT_CONTROL (W)  any write clears the processing unit and FFT_STATUS
//   +4  FFT_DATA    (W)  input sample: [15:0] real, [31:16] imaginary; each
//                        write gives the unit one enable pulse
//   +8  FFT_STATUS  (R)  bit 0 set when the whole frame has been computed
//   +12 + 4k        (R)  X[k], k = 0 .. N-1: [15:0] real, [31:16] imaginary
// Results arrive from the unit with their natural-order bin number on
// adr_fft and are written into an N-word RAM (fft_ram) when fft_enable_in is
// high; a rising edge of fft_finish sets FFT_STATUS (the level is still high
// for a clock after a clear, so an edge is used). Bus timing as in the filter cores:
// registered single-clock ack_o one clock after stb_i; a read of the result
// space starts the synchronous RAM read in the strobe clock, so dat_o is
// valid with ack_o. adr[13:0] is decoded. The RAM organisation and the
// clear-on-any-write behaviour are this design's own choices.
module fft_wb
  import dsp_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 stb_i,
  input  logic                 we_i,
  input  logic [31:0]          adr,
  input  logic [31:0]          dat_i,
  output logic [31:0]          dat_o,
  output logic                 ack_o,
  output logic                 clear_out,
  output logic                 fft_enable,
  output logic [31:0]          dat,
  input  logic [31:0]          sdat_i,
  input  logic [$clog2(N)-1:0] adr_fft,
  input  logic                 fft_enable_in,
  input  logic                 fft_finish
);
  localparam int AW = 14;
  localparam int LN = $clog2(N);

  logic [AW-1:0] off, moff;
  logic          access, wr, status, is_mem, finish_q;
  logic [LN-1:0] raddr;
  logic [31:0]   rdata;

  assign off    = adr[AW-1:0];
  assign access = stb_i && !ack_o;
  assign wr     = access && we_i;
  assign moff   = off - AW'(FFT_MEMORY);
  assign is_mem = off >= AW'(FFT_MEMORY);
  assign raddr  = moff[LN+1:2];

  always_ff @(posedge clk) begin
    if (reset) begin
      ack_o      <= 1'b0;
      clear_out  <= 1'b0;
      fft_enable <= 1'b0;
      status     <= 1'b0;
      dat        <= '0;
      finish_q   <= 1'b0;
    end else begin
      finish_q   <= fft_finish;
      ack_o      <= access;
      clear_out  <= wr && off == AW'(FFT_CONTROL);
      fft_enable <= wr && off == AW'(FFT_DATA);
      if (fft_finish && !finish_q) status <= 1'b1;
      if (wr && off == AW'(FFT_CONTROL)) status <= 1'b0;
      if (wr && off == AW'(FFT_DATA))    dat    <= dat_i;
    end
  end

  fft_ram #(.DEPTH(N), .W(32)) u_ram (
    .clk, .we(fft_enable_in), .waddr(adr_fft), .wdata(sdat_i), .raddr, .rdata
  );

  always_comb begin
    dat_o = '0;
    if (ack_o && !we_i) begin
      if (is_mem)                       dat_o = rdata;
      else if (off == AW'(FFT_STATUS))  dat_o = {31'd0, status};
    end
  end

  ack_one_clock: assert property (@(posedge clk) disable iff (reset) ack_o |=> !ack_o);
endmodule
