// bp_octave1 -- band-pass filters of the top octave (one MP filter unit, MP1).
//
// The top octave works at the full input rate. Its NF band-pass filters all
// read the same BP_TAPS-sample window of x(n) (RegBank0); one mp_filter (MP1)
// is reused for them one after the other, with ROM1 row f holding the
// coefficients of filter f. Each result is sent to the kernel accumulator of
// the top octave (RegBank5) with the filter index (sel4).
//
// Interface: `x_valid` (ignored while busy) pushes x into the window and
// starts the filters, in index order 0..NF-1. For each filter `acc_en`
// pulses with acc_sel and acc_y. `done` pulses one cycle after the last one.
// One sample takes NF*(2*(GW+2)+5)+2 cycles (147 at the defaults).
module bp_octave1 #(
  parameter int unsigned NF       = 5,
  parameter int unsigned BP_TAPS  = 16,
  parameter int unsigned W        = 10,
  parameter int unsigned GW       = 10,
  parameter string       ROM_FILE = "rtl/rom1_bp.hex",
  localparam int unsigned SELW    = (NF > 1) ? $clog2(NF) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                x_valid,
  input  logic signed [W-1:0] x,
  input  logic       [GW-1:0] gamma_f,
  output logic                acc_en,
  output logic [SELW-1:0]     acc_sel,
  output logic signed [W-1:0] acc_y,
  output logic                busy,
  output logic                done
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN, S_DONE} state_t;
  state_t state;

  logic [SELW-1:0] f_q;

  logic signed [W-1:0] win [BP_TAPS];
  shift_regbank #(.DEPTH(BP_TAPS), .W(W)) u_regbank0 (
    .clk, .rst_n, .push(x_valid && state == S_IDLE), .din(x), .q(win)
  );

  logic signed [W-1:0] coef [BP_TAPS];
  coef_rom #(.ROWS(NF), .TAPS(BP_TAPS), .W(W), .INIT_FILE(ROM_FILE)) u_rom1 (
    .addr(f_q), .row(coef)
  );

  logic                f_start, f_busy, f_done;
  logic signed [W-1:0] f_y;
  mp_filter #(.M(BP_TAPS), .W(W), .GW(GW)) u_mp1 (
    .clk, .rst_n, .start(f_start), .x(win), .h(coef), .gamma(gamma_f),
    .busy(f_busy), .done(f_done), .y(f_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      f_q     <= '0;
      f_start <= 1'b0;
      acc_en  <= 1'b0;
      acc_sel <= '0;
      acc_y   <= '0;
      done    <= 1'b0;
    end else begin
      f_start <= 1'b0;
      acc_en  <= 1'b0;
      done    <= 1'b0;
      unique case (state)
        S_IDLE: if (x_valid) begin
          f_q   <= '0;
          state <= S_START;
        end
        S_START: begin
          f_start <= 1'b1;
          state   <= S_RUN;
        end
        S_RUN: if (f_done) begin
          acc_en  <= 1'b1;
          acc_sel <= f_q;
          acc_y   <= f_y;
          if (int'(f_q) == NF-1) state <= S_DONE;
          else begin
            f_q   <= f_q + 1'b1;
            state <= S_START;
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

  a_filter_idle: assert property (@(posedge clk) disable iff (!rst_n) f_start |-> !f_busy);

endmodule
