// mp_filter -- one FIR filter output computed in the Margin Propagation domain.
//
// An FIR output y = sum_k h_k x_k is replaced by the multiplierless MP form
//   y = MP([h_k + x_k, -h_k - x_k], gamma) - MP([h_k - x_k, -h_k + x_k], gamma)
// over all taps k, i.e. the positive and negative parts of every coefficient
// and sample are combined by additions only (h+ = h, h- = -h, x+ = x,
// x- = -x). Both low-pass and band-pass filters of the bank use this unit.
//
// How it works: a single mp_core is used twice, first for z_p (the
// "same-sign" sums), then for z_n (the "opposite-sign" sums); y = z_p - z_n
// is clamped to the W-bit datapath (the clamp is this design's own choice).
//
// Interface: pulse `start`; x (x[0] the newest sample) and h must stay
// stable until `done`, which pulses 2*(GW+2)+3 cycles after `start` with y
// valid from then until the next start.
module mp_filter #(
  parameter int unsigned M  = 16,  // taps
  parameter int unsigned W  = 10,  // sample and coefficient width
  parameter int unsigned GW = 10   // margin width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] x [M],
  input  logic signed [W-1:0] h [M],
  input  logic       [GW-1:0] gamma,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] y
);

  localparam int unsigned LW = W + 2;

  typedef enum logic [1:0] {S_IDLE, S_ZP, S_ZN} state_t;
  state_t state;

  logic                 neg_phase;   // 0: z_p inputs, 1: z_n inputs
  logic signed [LW-1:0] l_c [2*M];
  logic                 mp_start, mp_busy, mp_done;
  logic signed [LW:0]   mp_z;
  logic signed [LW:0]   zp_q;

  // the 2M MP inputs of the current phase
  always_comb begin
    for (int k = 0; k < M; k++) begin
      logic signed [LW-1:0] hx;
      hx = neg_phase ? (LW'(h[k]) - LW'(x[k])) : (LW'(h[k]) + LW'(x[k]));
      l_c[2*k]   = hx;
      l_c[2*k+1] = -hx;
    end
  end

  mp_core #(.N(2*M), .LW(LW), .GW(GW)) u_mp (
    .clk, .rst_n, .start(mp_start), .l_in(l_c), .gamma,
    .busy(mp_busy), .done(mp_done), .z(mp_z)
  );

  // clamp to the datapath
  function automatic logic signed [W-1:0] clamp(input logic signed [LW+1:0] v);
    localparam logic signed [LW+1:0] MAXV = (LW+2)'((1 << (W-1)) - 1);
    localparam logic signed [LW+1:0] MINV = -(LW+2)'(1 << (W-1));
    if (v > MAXV)      return W'(MAXV);
    else if (v < MINV) return W'(MINV);
    else               return W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      neg_phase <= 1'b0;
      mp_start  <= 1'b0;
      zp_q      <= '0;
      y         <= '0;
      done      <= 1'b0;
    end else begin
      mp_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          neg_phase <= 1'b0;
          mp_start  <= 1'b1;
          state     <= S_ZP;
        end
        S_ZP: if (mp_done) begin
          zp_q      <= mp_z;
          neg_phase <= 1'b1;
          mp_start  <= 1'b1;
          state     <= S_ZN;
        end
        S_ZN: if (mp_done) begin
          y     <= clamp((LW+2)'(zp_q) - (LW+2)'(mp_z));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // the core is idle whenever a new phase is launched
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) mp_start |-> !mp_busy);

endmodule
