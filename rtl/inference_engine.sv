// inference_engine -- the MP kernel machine (MP3, MP4, MP5).
//
// A kernel machine f = w^T K + b is evaluated in the Margin Propagation
// domain with the kernel split as K+ = K, K- = -K:
//   z+ = MP([w+_i + K_i, w-_i - K_i, b+], gamma_1)          (MP3)
//   z- = MP([w+_i - K_i, w-_i + K_i, b-], gamma_1)          (MP4)
//   z  = MP([z+, z-], gamma_n)                               (MP5)
//   p+ = [z+ - z]_+,  p- = [z- - z]_+,  p = p+ - p-
// so p+ + p- = gamma_n and the sign of p is the class decision.
//
// How it works: the P kernel values Phi_i (unsigned PHI_W bits, the upper
// bits of the accumulators) are read one at a time through the `sel6`
// multiplexer. MP3 and MP4 are two mp_serial units run in lock step; for
// every pass they request, the engine streams beats i = 0..P-1 with the two
// inputs of entry i, then a last beat carrying only the bias. The weights
// come from a ROM: row i < P is {w+_i, w-_i}, row P is {b+, b-}. MP5 is an
// mp_core with two inputs; p+, p- and p are registered at the end.
//
// Interface: pulse `start` (ignored while busy) with the kernel stable;
// `sel6` drives the kernel read and `phi` must return Phi_sel6 in the same
// cycle. `done` pulses with all outputs valid, after
// (GW+1)(P+3)+GW+8 cycles (381 at the defaults). gamma_n (GAMMA_N) is a parameter, gamma_1 a port.
// `phi_take` marks the P cycles of the first pass in which Phi_sel6 is
// read, so the kernel vector can be observed from outside (own addition).
module inference_engine #(
  parameter int unsigned P           = 30,
  parameter int unsigned W           = 10,
  parameter int unsigned PHI_W       = 10,
  parameter int unsigned GW          = 10,
  parameter int unsigned GAMMA_N     = 1,
  parameter string       WEIGHT_FILE = "rtl/weights.hex",
  localparam int unsigned SELW       = $clog2(P + 1),
  localparam int unsigned LW         = W + 2,     // w +/- Phi
  localparam int unsigned ZW         = LW + 1,    // z+ / z-
  localparam int unsigned Z5W        = ZW + 1     // z
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic         [GW-1:0] gamma_1,
  output logic       [SELW-1:0] sel6,
  input  logic      [PHI_W-1:0] phi,
  output logic                  busy,
  output logic                  done,
  output logic signed [ZW-1:0]  z_plus,
  output logic signed [ZW-1:0]  z_minus,
  output logic signed [Z5W-1:0] z,
  output logic        [Z5W-1:0] p_plus,
  output logic        [Z5W-1:0] p_minus,
  output logic signed [Z5W:0]   p,
  output logic                 phi_take   // phi[sel6] is read in the first pass
);

  typedef enum logic [1:0] {S_IDLE, S_KM, S_NORM, S_OUT} state_t;
  state_t state;

  // weight ROM: {w+, w-} per row, bias in row P
  logic signed [W-1:0] wrow [2];
  coef_rom #(.ROWS(P+1), .TAPS(2), .W(W), .INIT_FILE(WEIGHT_FILE)) u_wrom (
    .addr(sel6), .row(wrow)
  );

  // stream sequencer shared by MP3 and MP4
  logic streaming_q;
  logic in_valid, in_last;
  logic [1:0] mask_c;
  logic signed [LW-1:0] d3 [2];
  logic signed [LW-1:0] d4 [2];

  assign in_valid = streaming_q;

  // the first pass reads every kernel value exactly once, in order
  logic first_q;
  assign phi_take = streaming_q && first_q && (int'(sel6) < P);
  assign in_last  = streaming_q && (int'(sel6) == P);

  always_comb begin
    logic signed [LW-1:0] k, wp, wm;
    k  = $signed({2'b00, phi});
    wp = LW'(wrow[0]);
    wm = LW'(wrow[1]);
    if (int'(sel6) < P) begin
      mask_c = 2'b11;
      d3[0] = wp + k;  d3[1] = wm - k;
      d4[0] = wp - k;  d4[1] = wm + k;
    end else begin
      mask_c = 2'b01;
      d3[0] = wp;      d3[1] = '0;      // b+
      d4[0] = wm;      d4[1] = '0;      // b-
    end
  end

  logic mp_start;
  logic ps3, ps4, b3, b4, dn3, dn4;
  logic signed [ZW-1:0] z3, z4;

  mp_serial #(.LANES(2), .LW(LW), .GW(GW), .MAXN(2*P+2)) u_mp3 (
    .clk, .rst_n, .start(mp_start), .gamma(gamma_1), .pass_start(ps3),
    .in_valid, .in_last, .in_data(d3), .in_mask(mask_c),
    .busy(b3), .done(dn3), .z(z3)
  );
  mp_serial #(.LANES(2), .LW(LW), .GW(GW), .MAXN(2*P+2)) u_mp4 (
    .clk, .rst_n, .start(mp_start), .gamma(gamma_1), .pass_start(ps4),
    .in_valid, .in_last, .in_data(d4), .in_mask(mask_c),
    .busy(b4), .done(dn4), .z(z4)
  );

  // MP5: normalisation of z+ and z-
  logic                 n_start, n_busy, n_done;
  logic signed [ZW-1:0] n_in [2];
  logic signed [Z5W-1:0] n_z;
  assign n_in[0] = z_plus;
  assign n_in[1] = z_minus;
  mp_core #(.N(2), .LW(ZW), .GW(GW)) u_mp5 (
    .clk, .rst_n, .start(n_start), .l_in(n_in), .gamma(GW'(GAMMA_N)),
    .busy(n_busy), .done(n_done), .z(n_z)
  );

  // reverse water filling read-out: p+ = [z+ - z]_+, p- = [z- - z]_+
  logic signed [Z5W:0] dp_c, dm_c;
  logic        [Z5W-1:0] pp_c, pm_c;
  assign dp_c = (Z5W+1)'(z_plus)  - (Z5W+1)'(z);
  assign dm_c = (Z5W+1)'(z_minus) - (Z5W+1)'(z);
  assign pp_c = dp_c[Z5W] ? '0 : dp_c[Z5W-1:0];
  assign pm_c = dm_c[Z5W] ? '0 : dm_c[Z5W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      streaming_q <= 1'b0;
      first_q     <= 1'b0;
      sel6        <= '0;
      mp_start    <= 1'b0;
      n_start     <= 1'b0;
      z_plus      <= '0;
      z_minus     <= '0;
      z           <= '0;
      p_plus      <= '0;
      p_minus     <= '0;
      p           <= '0;
      done        <= 1'b0;
    end else begin
      mp_start <= 1'b0;
      n_start  <= 1'b0;
      done     <= 1'b0;
      // stream one pass whenever the MP units ask for it
      if (start && state == S_IDLE) first_q <= 1'b1;
      else if (streaming_q && int'(sel6) == P) first_q <= 1'b0;
      if (ps3) begin
        streaming_q <= 1'b1;
        sel6        <= '0;
      end else if (streaming_q) begin
        if (int'(sel6) == P) begin
          streaming_q <= 1'b0;
          sel6        <= '0;
        end else begin
          sel6 <= sel6 + 1'b1;
        end
      end
      unique case (state)
        S_IDLE: if (start) begin
          mp_start <= 1'b1;
          state    <= S_KM;
        end
        S_KM: if (dn3) begin
          z_plus  <= z3;
          z_minus <= z4;
          n_start <= 1'b1;
          state   <= S_NORM;
        end
        S_NORM: if (n_done) begin
          z     <= n_z;
          state <= S_OUT;
        end
        S_OUT: begin
          p_plus  <= pp_c;
          p_minus <= pm_c;
          p       <= $signed((Z5W+1)'(pp_c)) - $signed((Z5W+1)'(pm_c));
          done    <= 1'b1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // MP3 and MP4 run the same schedule
  a_mp5_idle: assert property (@(posedge clk) disable iff (!rst_n) n_start |-> !n_busy);
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) (ps3 == ps4) && (dn3 == dn4) && (b3 == b4));

endmodule
