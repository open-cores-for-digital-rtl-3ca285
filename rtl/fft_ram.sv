// fft_ram: on-chip result memory of the FFT core.
//
// DEPTH words of W bits with one write port, driven by the processing unit
// (address = natural-order frequency bin), and one synchronous read port,
// driven by the Wishbone interface: rdata holds mem[raddr] from the clock
// edge after raddr is presented. Contents are not reset.
module fft_ram #(
  parameter int DEPTH = 1024,
  parameter int W     = 32
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
