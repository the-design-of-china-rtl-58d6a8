// crane_pkg: types and constants shared by the FPGA back-end modules.
//
// The back end has four observing modes (narrow spectral line, incoherent
// pulsar, baseband and broad spectral line); the mode list and the 12-bit ADC
// sample width follow the paper,
// the numeric mode encoding and the internal word widths are this design's
// own choices.
package crane_pkg;

  // Observing mode of one back-end board.
  typedef enum logic [1:0] {
    MODE_NARROW   = 2'd0,  // narrow spectral line: mixer, CIC, compensation, gain
    MODE_PULSAR   = 2'd1,  // incoherent pulsar: PFB, Stokes, accumulate, truncate
    MODE_BASEBAND = 2'd2,  // baseband: mixer, decimation filter, gain
    MODE_BROAD    = 2'd3   // broad spectral line: PFB, corner turn, second FFT, Stokes
  } mode_e;

  localparam int ADC_W  = 12;  // ADC12D1600 output word, timestamp in bit 0
  localparam int SMP_W  = 12;  // sample width after the timestamp bit is cleared
  localparam int DDC_W  = 16;  // mixer / filter sample width (per I or Q)
  localparam int OUT8_W = 8;   // requantised output width (per I, Q or Stokes term)

  // Item handed to the packetiser: 32 bits, two items per 64-bit word.
  localparam int ITEM_W = 32;
  localparam int WORD_W = 64;

  // Packet header magic byte.
  localparam logic [7:0] PKT_MAGIC = 8'hC5;

  // Complex sample after down-conversion.
  typedef struct packed {
    logic signed [DDC_W-1:0] re;
    logic signed [DDC_W-1:0] im;
  } cplx16_t;

  // Bit reversal of the low n bits of x (n <= 32).
  function automatic logic [31:0] bitrev(input logic [31:0] x, input int n);
    logic [31:0] r;
    r = '0;
    for (int i = 0; i < 32; i++)
      if (i < n) r[i] = x[n-1-i];
    return r;
  endfunction

endpackage
