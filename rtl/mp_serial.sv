// mp_serial -- Margin Propagation unit for inputs that arrive as a stream.
//
// Computes the same function as mp_core: the largest integer z with
// sum_i [L_i - z]_+ >= gamma. It is used where the inputs are not available
// side by side but are selected one after the other, as in the classifier,
// which reads the 30 kernel values through one multiplexer.
//
// How it works: the unit asks its source for the whole input set several
// times. Pass 0 finds the maximum m; passes 1..GW are the bit-serial binary
// search of the offset above m - gamma (MSB first), each accumulating
// sum [L_i - z]_+ for its trial level while the inputs stream past. Each beat
// carries up to LANES inputs; `in_mask` marks the lanes that hold one.
//
// Interface: pulse `start` with gamma. The unit pulses `pass_start`; from the
// next cycle on the source sends beats with `in_valid`, the last of the pass
// with `in_last`. The unit then pulses `pass_start` for the next pass, or
// `done` (z valid) after the last one. A pass of B back-to-back beats takes
// B+2 cycles, a whole run (GW+1)(B+2)+2 cycles from start to done. The stream protocol is this design's own.
// MAXN bounds the number of inputs in a pass and sets the sum width.
module mp_serial #(
  parameter int unsigned LANES = 2,
  parameter int unsigned LW    = 12,
  parameter int unsigned GW    = 10,
  parameter int unsigned MAXN  = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic        [GW-1:0] gamma,
  output logic                 pass_start,
  input  logic                 in_valid,
  input  logic                 in_last,
  input  logic signed [LW-1:0] in_data [LANES],
  input  logic     [LANES-1:0] in_mask,
  output logic                 busy,
  output logic                 done,
  output logic signed [LW:0]   z
);

  localparam int unsigned SW = GW + $clog2(MAXN) + 1;
  localparam int unsigned BW = (GW > 1) ? $clog2(GW) : 1;

  typedef enum logic [2:0] {S_IDLE, S_REQ, S_MAX, S_EVAL, S_FINISH} state_t;
  state_t state;

  logic        [GW-1:0] g_q;
  logic signed [LW-1:0] max_q;
  logic                 have_max_q;
  logic signed [LW+1:0] lo_q;
  logic        [GW-1:0] off_q;
  logic        [BW-1:0] bit_q;
  logic                 first_q;   // next request is the max pass
  logic        [SW-1:0] sum_q;

  logic        [GW-1:0] cand_c;
  logic signed [LW+1:0] zc_c;
  assign cand_c = off_q | (GW'(1) << bit_q);
  assign zc_c   = lo_q + $signed((LW+2)'(cand_c));

  // beat contributions
  logic signed [LW-1:0] bmax_c;
  logic                 bany_c;
  logic        [SW-1:0] bsum_c;
  always_comb begin
    logic signed [LW+2:0] d;
    d      = '0;
    bmax_c = max_q;
    bany_c = have_max_q;
    bsum_c = '0;
    for (int k = 0; k < LANES; k++) begin
      if (in_mask[k]) begin
        if (!bany_c || in_data[k] > bmax_c) bmax_c = in_data[k];
        bany_c = 1'b1;
        d = (LW+3)'(in_data[k]) - (LW+3)'(zc_c);
        if (d > 0) bsum_c = bsum_c + SW'(d);
      end
    end
  end

  logic [SW-1:0] fsum_c;
  logic          keep_c;
  assign fsum_c = sum_q + bsum_c;
  assign keep_c = (cand_c <= g_q) && (fsum_c >= SW'(g_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pass_start <= 1'b0;
      done       <= 1'b0;
      z          <= '0;
      g_q        <= '0;
      max_q      <= '0;
      have_max_q <= 1'b0;
      lo_q       <= '0;
      off_q      <= '0;
      bit_q      <= '0;
      first_q    <= 1'b0;
      sum_q      <= '0;
    end else begin
      pass_start <= 1'b0;
      done       <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          g_q        <= gamma;
          have_max_q <= 1'b0;
          first_q    <= 1'b1;
          state      <= S_REQ;
        end
        S_REQ: begin
          pass_start <= 1'b1;
          sum_q      <= '0;
          state      <= first_q ? S_MAX : S_EVAL;
        end
        S_MAX: if (in_valid) begin
          max_q      <= bmax_c;
          have_max_q <= bany_c;
          if (in_last) begin
            lo_q    <= (LW+2)'(bmax_c) - $signed((LW+2)'(g_q));
            off_q   <= '0;
            bit_q   <= BW'(GW-1);
            first_q <= 1'b0;
            state   <= S_REQ;
          end
        end
        S_EVAL: if (in_valid) begin
          sum_q <= fsum_c;
          if (in_last) begin
            if (keep_c) off_q <= cand_c;
            if (bit_q == '0) state <= S_FINISH;
            else begin
              bit_q <= bit_q - 1'b1;
              state <= S_REQ;
            end
          end
        end
        S_FINISH: begin
          z     <= (LW+1)'(lo_q + $signed((LW+2)'(off_q)));
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
