// mkid_pkg: sizes and types shared by the MKID readout blocks.
//
// The numbers are the readout's headline configuration: a 2^10-channel
// coarse polyphase filterbank, 2^9 fine channels per coarse bin (2^19 samples
// per measurement window, about 10 kHz resolution and frame rate at 5 GS/s),
// 1400 tones (1008 science + 392 blind/calibration) and 12-bit converters.
// Internal word widths, the tone-table record and the split of tones over
// parallel lanes are this design's own choices.
package mkid_pkg;

  // Coarse channelizer: number of PFB channels (FFT size) and taps per branch.
  localparam int NCHAN      = 1024;
  localparam int LOG2_NCHAN = 10;
  localparam int PFB_TAPS   = 4;

  // Fine channelizer: down-conversion points per coarse bin.
  localparam int NFINE      = 512;
  localparam int LOG2_NFINE = 9;

  // Tones and parallel tone lanes (ceil(1400 / 1024) = 2 tones per clock).
  localparam int NUM_TONES  = 1400;
  localparam int TONE_LANES = 2;
  localparam int TONE_AW    = 11;            // tone index width

  // Converter and internal widths.
  localparam int ADC_W      = 12;
  localparam int DAC_W      = 12;
  localparam int COEF_W     = 18;            // PFB coefficient word
  localparam int COEF_FRAC  = 16;            // fractional bits of a coefficient
  localparam int AMP_W      = 16;            // drive-tone amplitude
  localparam int PHASE_W    = 16;            // CORDIC phase word, full turn = 2^PHASE_W

  // Cosmic-ray matched filter.
  localparam int CR_TAPS    = 4;             // glitch template length
  localparam int CR_TW      = 8;             // template coefficient width
  localparam int CR_THR_W   = 32;            // detection threshold width
  localparam int GCOUNT_W   = LOG2_NFINE + 1;

  // One entry of the tone table, shared by tone synthesis and fine DDC.
  // bin  : coarse PFB channel that holds the tone
  // fine : fine-channel index inside that bin, 0..NFINE-1 (modulo NFINE)
  // amp  : drive amplitude used by the tone synthesizer
  typedef struct packed {
    logic                     en;
    logic [LOG2_NCHAN-1:0]    bin;
    logic [LOG2_NFINE-1:0]    fine;
    logic signed [AMP_W-1:0]  amp;
  } tone_cfg_t;

  // Bit reversal of the low n bits of v.
  function automatic logic [31:0] bitrev(input logic [31:0] v, input int n);
    logic [31:0] r;
    r = '0;
    for (int i = 0; i < 32; i++)
      if (i < n) r[i] = v[n-1-i];
    return r;
  endfunction

endpackage
