// mfic_top -- multiplierless in-filter acoustic classifier.
//
// A 16 kHz audio stream is classified once per frame of N_SAMPLES samples
// (one second). A bank of 30 FIR band-pass filters, evaluated in the Margin
// Propagation (MP) domain with additions, comparisons and shifts only, acts
// both as feature extractor and as the kernel of a kernel machine: the
// rectified output of every filter is summed over the frame, the upper bits
// of each sum form the kernel vector, and an MP kernel machine turns it into
// the decision value p (class = sign of p).
//
// Structure (all MP arithmetic time-multiplexed on six MP units):
//   lp_section   MP0: four decimating low-pass stages, octaves 2..5
//   bp_octave1   MP1: 5 band-pass filters at 16 kHz       -> u_acc5 (RegBank5)
//   bp_octaves   MP2: 25 band-pass filters on octaves 2..5 -> u_acc6 (RegBank6)
//   inference_engine MP3, MP4, MP5: kernel machine over the 30 kernel values
//
// Per sample: MP1 and the low-pass chain start together; MP2 starts when the
// chain is done. With the default sizes a sample takes at most about 1000
// cycles, well inside the 3125 cycles between samples at 50 MHz. After the
// last sample of a frame the classifier runs (381 cycles), its result
// is presented with a one-cycle `result_valid`, and the accumulators are
// cleared for the next frame. The filter windows carry over between frames.
//
// Interface: `x_valid` delivers a sample; it is taken only while `x_ready`
// is high, otherwise it is dropped and counted in `dropped` (this handshake
// is this design's own). gamma_f (filter margin) and gamma_1 (classifier
// margin) are learned values and so are inputs; gamma_n is a parameter.
// The kernel vector Phi_0..Phi_29 appears on kernel_valid / kernel_idx /
// kernel_phi, one entry per cycle, while the classifier reads it (own
// addition, for observing the features).
// ACC_W_P is the accumulator width (24 in the paper); Phi is always its
// upper 10 bits, so a narrower accumulator suits shorter frames.
// Lint note: rst_n is reported as both an asynchronous reset and a
// synchronous signal only because the assertions use it in `disable iff`;
// every flip-flop resets asynchronously.
module mfic_top
  import mfic_pkg::*;
#(
  parameter int unsigned N_SAMPLES_P = mfic_pkg::N_SAMPLES,
  parameter int unsigned GW          = mfic_pkg::GAMMA_W,
  parameter int unsigned GAMMA_N     = 1,
  parameter int unsigned ACC_W_P     = mfic_pkg::ACC_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       x_valid,
  input  logic signed [DATA_W-1:0]   x,
  output logic                       x_ready,
  input  logic        [GW-1:0]       gamma_f,
  input  logic        [GW-1:0]       gamma_1,
  output logic                       result_valid,
  output logic signed [DATA_W+4:0]   p,
  output logic        [DATA_W+3:0]   p_plus,
  output logic        [DATA_W+3:0]   p_minus,
  output logic signed [DATA_W+2:0]   z_plus,
  output logic signed [DATA_W+2:0]   z_minus,
  output logic signed [DATA_W+3:0]   z,
  output logic        [15:0]         dropped,
  output logic                       kernel_valid,
  output logic        [4:0]          kernel_idx,
  output logic        [PHI_W-1:0]    kernel_phi
);

  localparam int unsigned FCW = $clog2(N_SAMPLES_P + 1);

  typedef enum logic [1:0] {S_IDLE, S_SAMPLE, S_INFER} state_t;
  state_t state;

  logic [FCW-1:0] nsamp_q;          // samples taken in this frame
  logic           bp1_done_q, bp2_done_q;
  logic           take;

  assign x_ready = (state == S_IDLE);
  assign take    = x_valid && x_ready;

  // ---------------- low-pass cascade (MP0) ----------------
  logic                    oct_push;
  logic [1:0]              oct_idx;
  logic signed [DATA_W-1:0] oct_y;
  logic                    lp_busy, lp_done;
  lp_section #(.N_LP(N_LP), .LP_TAPS(LP_TAPS), .W(DATA_W), .GW(GW)) u_lp (
    .clk, .rst_n, .x_valid(take), .x, .gamma_f,
    .oct_push, .oct_idx, .oct_y, .busy(lp_busy), .done(lp_done)
  );

  // ---------------- octave 1 band-pass (MP1) ----------------
  logic                     a5_en;
  logic [$clog2(N_OCT1)-1:0] a5_sel;
  logic signed [DATA_W-1:0] a5_y;
  logic                     bp1_busy, bp1_done;
  bp_octave1 #(.NF(N_OCT1), .BP_TAPS(BP_TAPS), .W(DATA_W), .GW(GW)) u_bp1 (
    .clk, .rst_n, .x_valid(take), .x, .gamma_f,
    .acc_en(a5_en), .acc_sel(a5_sel), .acc_y(a5_y), .busy(bp1_busy), .done(bp1_done)
  );

  // ---------------- octaves 2..5 band-pass (MP2) ----------------
  logic                     a6_en;
  logic [$clog2(N_OCTR)-1:0] a6_sel;
  logic signed [DATA_W-1:0] a6_y;
  logic                     bp2_busy, bp2_done;
  bp_octaves #(.NF(N_OCTR), .N_BANK(N_LP), .BP_TAPS(BP_TAPS), .W(DATA_W), .GW(GW)) u_bp2 (
    .clk, .rst_n, .oct_push, .oct_idx, .oct_y, .start(lp_done), .gamma_f,
    .acc_en(a6_en), .acc_sel(a6_sel), .acc_y(a6_y), .busy(bp2_busy), .done(bp2_done)
  );

  // ---------------- kernel accumulators (RegBank5, RegBank6) ----------------
  logic                      acc_clear;
  logic [$clog2(N_FILT+1)-1:0] sel6;
  logic [PHI_W-1:0]          phi5, phi6, phi;
  logic [ACC_W_P-1:0]          acc5 [N_OCT1];
  logic [ACC_W_P-1:0]          acc6 [N_OCTR];

  kernel_accum #(.NF(N_OCT1), .ACC_W(ACC_W_P), .W(DATA_W), .PHI_W(PHI_W)) u_acc5 (
    .clk, .rst_n, .clear(acc_clear), .acc_en(a5_en), .acc_sel(a5_sel), .acc_y(a5_y),
    .rd_sel($clog2(N_OCT1)'(sel6)), .phi(phi5), .acc(acc5)
  );
  kernel_accum #(.NF(N_OCTR), .ACC_W(ACC_W_P), .W(DATA_W), .PHI_W(PHI_W)) u_acc6 (
    .clk, .rst_n, .clear(acc_clear), .acc_en(a6_en), .acc_sel(a6_sel), .acc_y(a6_y),
    .rd_sel($clog2(N_OCTR)'(sel6 - ($clog2(N_FILT+1))'(N_OCT1))), .phi(phi6), .acc(acc6)
  );

  // sel6: kernel entries 0..4 from RegBank5, 5..29 from RegBank6
  assign phi = (int'(sel6) < N_OCT1) ? phi5 : phi6;

  // ---------------- inference engine (MP3, MP4, MP5) ----------------
  logic ie_start, ie_busy, ie_done, ie_phi_take;
  logic signed [DATA_W+2:0] ie_zp, ie_zm;
  logic signed [DATA_W+3:0] ie_z;
  logic        [DATA_W+3:0] ie_pp, ie_pm;
  logic signed [DATA_W+4:0] ie_p;
  inference_engine #(.P(N_FILT), .W(DATA_W), .PHI_W(PHI_W), .GW(GW), .GAMMA_N(GAMMA_N)) u_ie (
    .clk, .rst_n, .start(ie_start), .gamma_1, .sel6, .phi,
    .busy(ie_busy), .done(ie_done), .z_plus(ie_zp), .z_minus(ie_zm), .z(ie_z),
    .p_plus(ie_pp), .p_minus(ie_pm), .p(ie_p), .phi_take(ie_phi_take)
  );

  // ---------------- sample / frame sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      nsamp_q      <= '0;
      bp1_done_q   <= 1'b0;
      bp2_done_q   <= 1'b0;
      ie_start     <= 1'b0;
      acc_clear    <= 1'b0;
      result_valid <= 1'b0;
      p            <= '0;
      p_plus       <= '0;
      p_minus      <= '0;
      z_plus       <= '0;
      z_minus      <= '0;
      z            <= '0;
      dropped      <= '0;
      kernel_valid <= 1'b0;
      kernel_idx   <= '0;
      kernel_phi   <= '0;
    end else begin
      // kernel vector, as read by the classifier, one entry per cycle
      kernel_valid <= ie_phi_take;
      kernel_idx   <= 5'(sel6);
      kernel_phi   <= phi;
      ie_start     <= 1'b0;
      acc_clear    <= 1'b0;
      result_valid <= 1'b0;
      if (x_valid && !x_ready && dropped != '1) dropped <= dropped + 1'b1;
      unique case (state)
        S_IDLE: if (take) begin
          nsamp_q    <= nsamp_q + 1'b1;
          bp1_done_q <= 1'b0;
          bp2_done_q <= 1'b0;
          state      <= S_SAMPLE;
        end
        S_SAMPLE: begin
          if (bp1_done) bp1_done_q <= 1'b1;
          if (bp2_done) bp2_done_q <= 1'b1;
          if ((bp1_done || bp1_done_q) && (bp2_done || bp2_done_q)) begin
            if (int'(nsamp_q) == N_SAMPLES_P) begin
              ie_start <= 1'b1;
              state    <= S_INFER;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        S_INFER: if (ie_done) begin
          result_valid <= 1'b1;
          p            <= ie_p;
          p_plus       <= ie_pp;
          p_minus      <= ie_pm;
          z_plus       <= ie_zp;
          z_minus      <= ie_zm;
          z            <= ie_z;
          acc_clear    <= 1'b1;
          nsamp_q      <= '0;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the accumulators are never cleared while a filter result is arriving
  a_clear_quiet: assert property (@(posedge clk) disable iff (!rst_n) acc_clear |-> !(a5_en || a6_en));
  // the band-pass units are idle when a sample is taken
  // a new frame starts from empty accumulators
  a_cleared: assert property (@(posedge clk) disable iff (!rst_n)
    acc_clear |=> (acc5.or() == '0) && (acc6.or() == '0));
  a_take_idle: assert property (@(posedge clk) disable iff (!rst_n) take |-> !(lp_busy || bp1_busy || bp2_busy || ie_busy));

endmodule
