// bp_octaves -- band-pass filters of the decimated octaves (one MP filter
// unit, MP2).
//
// The low-pass cascade delivers a new sample for octave 2 on every second
// input sample, for octave 3 on every fourth, and so on. Those samples are
// written (sel2) into four BP_TAPS-sample windows RegBank1..4. Because the
// lower octaves produce samples rarely, one mp_filter (MP2) is enough for all
// NF filters: after each input sample it runs, in index order, every filter
// whose window received a new sample, reading that window through sel3 and
// its coefficients from ROM2 row j. Filter j reads bank j/5 (0-based) for
// j < 20 and the lowest-rate bank for j >= 20 (mfic_pkg::bank_of). Each
// result goes to the kernel accumulator RegBank6 with the filter index
// (sel5).
//
// Interface: `oct_push` with oct_idx (0..3) and oct_y stores a sample in a
// window and marks it pending. `start` (ignored while busy) runs the pending
// filters and clears the marks; `acc_en` pulses per filter with acc_sel and
// acc_y; `done` pulses at the end (also when nothing was pending). Samples
// must not be pushed while busy. Each filter that runs takes 2*(GW+2)+5
// cycles, each one skipped one cycle.
module bp_octaves #(
  parameter int unsigned NF       = 25,
  parameter int unsigned N_BANK   = 4,
  parameter int unsigned BP_TAPS  = 16,
  parameter int unsigned W        = 10,
  parameter int unsigned GW       = 10,
  parameter string       ROM_FILE = "rtl/rom2_bp.hex",
  localparam int unsigned SELW    = (NF > 1) ? $clog2(NF) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                oct_push,
  input  logic [1:0]          oct_idx,
  input  logic signed [W-1:0] oct_y,
  input  logic                start,
  input  logic       [GW-1:0] gamma_f,
  output logic                acc_en,
  output logic [SELW-1:0]     acc_sel,
  output logic signed [W-1:0] acc_y,
  output logic                busy,
  output logic                done
);

  import mfic_pkg::bank_of;

  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_RUN, S_DONE} state_t;
  state_t state;

  logic [SELW-1:0]   j_q;
  logic [N_BANK-1:0] pend_q;      // bank received a sample since last run
  logic [N_BANK-1:0] run_q;       // banks being served by this run
  logic [1:0]        bank_c;      // sel3

  assign bank_c = bank_of(int'(j_q));

  // RegBank1..4, written through sel2
  logic signed [W-1:0] win [N_BANK][BP_TAPS];
  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    shift_regbank #(.DEPTH(BP_TAPS), .W(W)) u_bank (
      .clk, .rst_n, .push(oct_push && int'(oct_idx) == b), .din(oct_y), .q(win[b])
    );
  end

  logic signed [W-1:0] coef [BP_TAPS];
  coef_rom #(.ROWS(NF), .TAPS(BP_TAPS), .W(W), .INIT_FILE(ROM_FILE)) u_rom2 (
    .addr(j_q), .row(coef)
  );

  logic                f_start, f_busy, f_done;
  logic signed [W-1:0] f_y;
  mp_filter #(.M(BP_TAPS), .W(W), .GW(GW)) u_mp2 (
    .clk, .rst_n, .start(f_start), .x(win[bank_c]), .h(coef), .gamma(gamma_f),
    .busy(f_busy), .done(f_done), .y(f_y)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      j_q     <= '0;
      pend_q  <= '0;
      run_q   <= '0;
      f_start <= 1'b0;
      acc_en  <= 1'b0;
      acc_sel <= '0;
      acc_y   <= '0;
      done    <= 1'b0;
    end else begin
      f_start <= 1'b0;
      acc_en  <= 1'b0;
      done    <= 1'b0;
      if (oct_push) pend_q[oct_idx] <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          run_q  <= pend_q;
          pend_q <= oct_push ? (N_BANK'(1) << oct_idx) : '0;
          j_q    <= '0;
          state  <= S_CHECK;
        end
        S_CHECK: begin
          if (run_q[bank_c]) begin
            f_start <= 1'b1;
            state   <= S_RUN;
          end else if (int'(j_q) == NF-1) begin
            state <= S_DONE;
          end else begin
            j_q <= j_q + 1'b1;
          end
        end
        S_RUN: if (f_done) begin
          acc_en  <= 1'b1;
          acc_sel <= j_q;
          acc_y   <= f_y;
          if (int'(j_q) == NF-1) state <= S_DONE;
          else begin
            j_q   <= j_q + 1'b1;
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

  a_filter_idle: assert property (@(posedge clk) disable iff (!rst_n) f_start |-> !f_busy);
  a_no_push_while_busy: assert property (@(posedge clk) disable iff (!rst_n) oct_push |-> (state == S_IDLE));

endmodule
