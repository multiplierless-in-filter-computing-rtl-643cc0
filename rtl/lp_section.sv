// lp_section -- the decimating low-pass cascade (one MP filter unit, MP0).
//
// The filter bank works on octaves: the full-rate input feeds the top octave
// and is also low-pass filtered (L1) and decimated by 2 to give the input of
// the next octave, which is filtered again (L2) and decimated, and so on for
// N_LP stages. Every stage uses the same short LP_TAPS-tap filter, since each
// one only has to halve the band of its own, already reduced, rate.
//
// How it works: four windows (LPRegBank0..3, LP_TAPS x W) hold the inputs of
// L1..L4; bank 0 takes x(n), bank k takes the decimated output of L_k. One
// mp_filter (MP0) and ROM0 serve all four stages in turn: the stage index is
// the bank read select (sel1) and ROM row. Only outputs that survive the
// decimation are computed (own choice): L1 runs on every second input sample,
// L_k when the k low bits of the input sample count are all ones. Each kept
// output is pushed into the next LP window and sent out on oct_* with the
// octave bank index (sel2 of the band-pass section).
//
// Interface: `x_valid` stores x and starts the chain for that sample (ignored
// while busy). For every stage that runs, `oct_push` pulses with oct_idx =
// stage index (0 for L1) and oct_y; `done` pulses when the chain ends, one
// cycle after the last oct_push, or three cycles after x_valid when no stage runs.
// A sample takes 3 + r*(2*(GW+2)+5) cycles from x_valid to done for r
// stages run, one cycle less when all N_LP stages run (29 cycles per
// stage at GW = 10).
module lp_section #(
  parameter int unsigned N_LP     = 4,
  parameter int unsigned LP_TAPS  = 6,
  parameter int unsigned W        = 10,
  parameter int unsigned GW       = 10,
  parameter string       ROM_FILE = "rtl/rom0_lp.hex"
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                x_valid,
  input  logic signed [W-1:0] x,
  input  logic       [GW-1:0] gamma_f,
  output logic                oct_push,
  output logic [1:0]          oct_idx,
  output logic signed [W-1:0] oct_y,
  output logic                busy,
  output logic                done
);

  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_RUN, S_DONE} state_t;
  state_t state;

  logic [N_LP-1:0] cnt_q;     // input samples seen, modulo 2^N_LP
  logic [N_LP-1:0] phase_q;   // count of the sample being processed
  logic [1:0]      k_q;       // stage index (sel0 / sel1)

  // LPRegBank0..N_LP-1
  logic signed [W-1:0] win   [N_LP][LP_TAPS];
  logic                push  [N_LP];
  logic signed [W-1:0] pdin  [N_LP];

  for (genvar b = 0; b < N_LP; b++) begin : g_bank
    shift_regbank #(.DEPTH(LP_TAPS), .W(W)) u_bank (
      .clk, .rst_n, .push(push[b]), .din(pdin[b]), .q(win[b])
    );
  end

  logic signed [W-1:0] coef [LP_TAPS];
  coef_rom #(.ROWS(N_LP), .TAPS(LP_TAPS), .W(W), .INIT_FILE(ROM_FILE)) u_rom0 (
    .addr(k_q), .row(coef)
  );

  logic                f_start, f_busy, f_done;
  logic signed [W-1:0] f_y;
  mp_filter #(.M(LP_TAPS), .W(W), .GW(GW)) u_mp0 (
    .clk, .rst_n, .start(f_start), .x(win[k_q]), .h(coef), .gamma(gamma_f),
    .busy(f_busy), .done(f_done), .y(f_y)
  );

  // sel0: bank 0 takes the input, bank k+1 the output of stage k
  always_comb begin
    for (int b = 0; b < N_LP; b++) begin
      push[b] = 1'b0;
      pdin[b] = f_y;
    end
    pdin[0] = x;
    push[0] = x_valid && (state == S_IDLE);
    if (state == S_RUN && f_done && int'(k_q) < N_LP-1) push[int'(k_q)+1] = 1'b1;
  end

  // stage k runs when bits k..0 of the sample count are all ones
  logic run_c;
  always_comb begin
    run_c = 1'b1;
    for (int i = 0; i < N_LP; i++)
      if (i <= int'(k_q) && !phase_q[i]) run_c = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cnt_q    <= '0;
      phase_q  <= '0;
      k_q      <= '0;
      f_start  <= 1'b0;
      oct_push <= 1'b0;
      oct_idx  <= '0;
      oct_y    <= '0;
      done     <= 1'b0;
    end else begin
      f_start  <= 1'b0;
      oct_push <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE: if (x_valid) begin
          phase_q <= cnt_q;
          cnt_q   <= cnt_q + 1'b1;
          k_q     <= '0;
          state   <= S_CHECK;
        end
        S_CHECK: begin
          if (run_c) begin
            f_start <= 1'b1;
            state   <= S_RUN;
          end else begin
            state <= S_DONE;
          end
        end
        S_RUN: if (f_done) begin
          oct_push <= 1'b1;
          oct_idx  <= k_q;
          oct_y    <= f_y;
          if (int'(k_q) == N_LP-1) state <= S_DONE;
          else begin
            k_q   <= k_q + 1'b1;
            state <= S_CHECK;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // MP0 is never restarted while it is working
  a_filter_idle: assert property (@(posedge clk) disable iff (!rst_n) f_start |-> !f_busy);

endmodule
