// fx_pkg: constants and types shared by the F-engine (FPGA front end of a
// hybrid FPGA/GPU FX correlator).
//
// The numbers follow the 32-input field system: each FPGA board takes eight
// 8-bit ADC inputs at 200 MS/s, channelises them with a 2-tap, 8192-point
// polyphase filter bank, requantises every channel to 4-bit real + 4-bit
// imaginary, and sends selected sub-bands out of its Ethernet ports in packets
// that open with a 16-byte header (64-bit sequence number, 64-bit identifier).
// Widths the text does not give (FFT word width, gain format, port count
// limits) are this design's choices and are marked as such below.
package fx_pkg;

  // ---- sizes of the field system -------------------------------------------
  localparam int unsigned NA_DEF     = 8;     // inputs per FPGA board (paper)
  localparam int unsigned NFFT_DEF   = 8192;  // PFB points (paper)
  localparam int unsigned TAPS_DEF   = 2;     // PFB taps (paper)
  localparam int unsigned ADC_W      = 8;     // ADC sample bits (paper)
  localparam int unsigned DW_DEF     = 18;    // FFT component width: 36-bit complex (paper)
  localparam int unsigned QW         = 4;     // requantised component width (paper)
  localparam int unsigned NPORT_DEF  = 4;     // Ethernet ports per board (choice)
  localparam int unsigned WORD_W     = 64;    // Ethernet stream word (choice)
  localparam int unsigned BUFW_DEF   = 1024;  // payload words per packet, 8 kB (choice)
  localparam int unsigned NT_MAX_DEF = 16;    // max spectra per packet (choice)
  localparam int unsigned GAIN_W     = 16;    // equalisation gain bits (choice)
  localparam int unsigned GAIN_FRAC  = 8;     // fractional gain bits (choice)

  // ---- packet header (two 64-bit words, 16 bytes) ----------------------------
  typedef struct packed {
    logic [63:0] seq;      // packet sequence number, counts packet slots since sync
    logic [63:0] ident;    // identifier word, F-engine id in the low 16 bits
  } pkt_hdr_t;

  // One requantised channel sample: real nibble first (upper), imaginary lower.
  typedef struct packed {
    logic signed [QW-1:0] re;
    logic signed [QW-1:0] im;
  } cq4_t;

  // Identifier word layout: reserved upper bits left zero for future use.
  function automatic logic [63:0] make_ident(input logic [15:0] fid);
    return {48'd0, fid};
  endfunction

endpackage
