// mfic_pkg -- shared constants and helpers of the multiplierless in-filter
// classifier (MP filter bank followed by an MP kernel machine).
//
// The sizes below are the ones of the FPGA build: a 10-bit datapath, 6-tap
// low-pass windows, 16-tap band-pass windows, four low-pass stages, 5
// band-pass filters at the full rate and 25 on the decimated octaves (30 in
// all), 24-bit kernel accumulators and frames of 16000 samples (1 s at
// 16 kHz). The margin width GAMMA_W is this design's own choice.
//
// Octave map (own choice where the source is inconsistent): the 25 decimated
// filters are numbered 0..24; filter j reads register bank j/5+1 for j < 20,
// and bank 4 (the lowest rate) for j = 20..24, so the lowest-rate bank serves
// two groups of five cut-offs.
package mfic_pkg;

  parameter int unsigned DATA_W    = 10;     // datapath precision
  parameter int unsigned ACC_W     = 24;     // kernel accumulator width
  parameter int unsigned PHI_W     = 10;     // kernel bits used by the classifier
  parameter int unsigned GAMMA_W   = 10;     // width of the MP margins
  parameter int unsigned LP_TAPS   = 6;      // low-pass window
  parameter int unsigned BP_TAPS   = 16;     // band-pass window
  parameter int unsigned N_LP      = 4;      // low-pass stages L1..L4
  parameter int unsigned N_OCT1    = 5;      // band-pass filters at full rate
  parameter int unsigned N_OCTR    = 25;     // band-pass filters on decimated octaves
  parameter int unsigned N_FILT    = N_OCT1 + N_OCTR;
  parameter int unsigned N_SAMPLES = 16000;  // samples per classified frame

  typedef logic signed [DATA_W-1:0] sample_t;

  // Clamp a wide signed value into the DATA_W-bit datapath.
  function automatic sample_t sat_data(input logic signed [31:0] v);
    localparam logic signed [31:0] MAXV = (32'sd1 <<< (DATA_W-1)) - 32'sd1;
    localparam logic signed [31:0] MINV = -(32'sd1 <<< (DATA_W-1));
    if (v > MAXV)      return sample_t'(MAXV);
    else if (v < MINV) return sample_t'(MINV);
    else               return sample_t'(v);
  endfunction

  // Register bank (1..4) read by decimated band-pass filter j (0..24).
  function automatic logic [1:0] bank_of(input int unsigned j);
    // returns bank index minus one (0..3)
    if (j < 20) return 2'(j / 5);
    else        return 2'd3;
  endfunction

endpackage
