// dsp_pkg: constants shared by the three Wishbone DSP cores and the top.
//
// Register offsets are byte offsets from each core's base address and follow
// the register maps of the FIR, IIR and FFT cores (control at +0, data at +4,
// status at +8, then the core-specific registers and address spaces). The
// window selects used by the top-level address decoder are this design's own
// choice; the bases of the cores are not fixed by the register maps.
package dsp_pkg;

  // FIR core register map
  localparam int unsigned FIR_CONTROL = 0;
  localparam int unsigned FIR_DATA    = 4;
  localparam int unsigned FIR_STATUS  = 8;
  localparam int unsigned FIR_Q       = 12;
  localparam int unsigned FIR_COEFF   = 16;

  // IIR core register map
  localparam int unsigned IIR_CONTROL = 0;
  localparam int unsigned IIR_DATA    = 4;
  localparam int unsigned IIR_STATUS  = 8;
  localparam int unsigned IIR_NSECT   = 12;
  localparam int unsigned IIR_GAIN    = 16;
  localparam int unsigned IIR_COEFF   = 20;

  // Order of the six words of one second-order section in the IIR
  // coefficient space
  typedef enum logic [2:0] {
    SOS_A2 = 3'd0, SOS_A1 = 3'd1, SOS_A0 = 3'd2,
    SOS_B2 = 3'd3, SOS_B1 = 3'd4, SOS_B0 = 3'd5
  } sos_coef_e;

  // FFT core register map
  localparam int unsigned FFT_CONTROL = 0;
  localparam int unsigned FFT_DATA    = 4;
  localparam int unsigned FFT_STATUS  = 8;
  localparam int unsigned FFT_MEMORY  = 12;

  // Top-level windows: adr[14:13] selects the core
  localparam int unsigned CORE_WIN_BITS = 13;  // 8 KB per core
  typedef enum logic [1:0] {
    SEL_FIR = 2'd0, SEL_IIR = 2'd1, SEL_FFT = 2'd2, SEL_NONE = 2'd3
  } core_sel_e;

endpackage
