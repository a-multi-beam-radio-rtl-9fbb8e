// tardis_pkg: types and constants shared by the Tardis-ASKAP transient
// detector. The defaults are the Tardis-ASKAP numbers: 16-bit spectra
// samples, 304 frequency channels, 36 combined beams, 448 trials,
// groups of J = 16 spectra and an FTA of 2^14 spectra per channel.
// The 32-bit accumulator width follows from the stated 504 KB of
// accumulator memory for 9 beams x 448 trials x 16 samples x 2 regions.
package tardis_pkg;

  localparam int unsigned SAMPLE_W = 16;   // spectra, bits/sample
  localparam int unsigned ACC_W    = 32;   // de-dispersed sample width
  localparam int unsigned BEAM_IW  = 7;    // beam index field width
  localparam int unsigned CHAN_IW  = 12;   // channel index field width (up to 4096)
  localparam int unsigned LAG_W    = 16;   // sample offset field in the SST

  // One sample of a dynamic-spectrum stream (combined beams, 16 bit).
  // The beam and channel travel with the sample; `last` marks the final
  // sample of one integration (one spectrum of every beam).
  typedef struct packed {
    logic [SAMPLE_W-1:0] data;
    logic [BEAM_IW-1:0]  beam;
    logic [CHAN_IW-1:0]  chan;
    logic                last;
  } spec_sample_t;

  // Sample selection table entry of one trial and one channel: the
  // de-dispersion sum runs over S[c, m-eoff .. m-loff] (eoff >= loff),
  // i.e. E = -eoff and L = -loff in the paper's notation.
  typedef struct packed {
    logic [LAG_W-1:0] eoff;
    logic [LAG_W-1:0] loff;
  } sst_entry_t;

  // Per-processing-slot channel table entry: which channel the slot
  // processes, whether it is enabled, and the fetch window it needs
  // (max eoff and min loff over all trials of that channel).
  typedef struct packed {
    logic [CHAN_IW-1:0] chan;
    logic               en;
    logic [LAG_W-1:0]   eoff_max;
    logic [LAG_W-1:0]   loff_min;
  } chan_entry_t;

  function automatic int unsigned clog2_min1(input int unsigned v);
    return (v <= 2) ? 1 : $clog2(v);
  endfunction

endpackage
