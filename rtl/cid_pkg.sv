// cid_pkg -- constants and types shared by the crystal identification chain.
//
// An event is a frame of N_SAMPLES consecutive ADC words (36 16-bit words,
// as in the detector front end the chain was written for).  Between stages a
// frame travels as a stream of sample_t, one sample per clock at most, with
// the first and last sample of the frame flagged; there is no back-pressure.
// Stream samples are signed DW-bit values: baseline-corrected ADC counts
// after the baseline stage, Q(DW-NORM_FRAC).NORM_FRAC fractions of the pulse
// amplitude after the normalisation stage.
package cid_pkg;

  localparam int unsigned N_SAMPLES  = 36;   // words per event (paper)
  localparam int unsigned ADC_W      = 16;   // ADC word width (paper)
  localparam int unsigned DW         = 18;   // stream sample width (own choice)
  localparam int unsigned IDX_W      = $clog2(N_SAMPLES);
  localparam int unsigned BL_N       = 8;    // pre-trigger samples averaged (own choice)
  localparam int unsigned NORM_FRAC  = 14;   // normalised 1.0 = 2**14 (own choice)
  localparam int unsigned PH_FRAC    = 6;    // fractional bits of the phase (own choice)
  localparam int unsigned AMP_W      = 18;   // interpolated amplitude width

  typedef logic signed [DW-1:0] sample_w_t;

  typedef struct packed {
    logic      first;
    logic      last;
    sample_w_t data;
  } sample_t;

  // per-event result of the chain
  typedef struct packed {
    logic [ADC_W-1:0]         baseline;  // estimated baseline, ADC counts
    logic [IDX_W-1:0]         peak_idx;  // index of the largest sample
    logic [AMP_W-1:0]         amplitude; // interpolated peak amplitude above baseline
    logic                     crossed;   // pulse crossed half its amplitude
    logic [IDX_W+PH_FRAC-1:0] t_half;    // half-amplitude crossing time, in samples
  } cid_result_t;

endpackage
