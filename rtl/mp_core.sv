// mp_core -- Margin Propagation (MP) unit with all inputs in parallel.
//
// MP(L, gamma) is the level z at which the parts of the inputs L_i that stand
// above z add up to the margin gamma:  sum_i [L_i - z]_+ = gamma  ("reverse
// water filling"). It replaces a dot product in both the filter bank and the
// classifier, and needs only comparators, adders and shifts.
//
// How it works (this design's own architecture; only the function is given
// by the method): the inputs and gamma are registered on `start`. One cycle
// finds the maximum m. Because every term is at most m - z, the answer lies
// in [m - gamma, m]. A binary search over the offset from m - gamma then sets
// one bit per cycle, MSB first: a trial bit is kept when the sum of
// [L_i - z]_+ at the trial level is still >= gamma. The result is the largest
// integer z with sum_i [L_i - z]_+ >= gamma, i.e. the floor of the exact MP
// solution; with gamma = 0 it is the maximum.
//
// Interface: pulse `start` with l_in and gamma valid (they are copied, so
// they may change afterwards). `busy` is high while running; `done` pulses
// for one cycle exactly GW+2 cycles after `start`, with `z` valid from then
// until the next start. Reset is asynchronous, active low.
module mp_core #(
  parameter int unsigned N  = 32,  // number of MP inputs
  parameter int unsigned LW = 12,  // signed input width
  parameter int unsigned GW = 10   // margin width (unsigned)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [LW-1:0] l_in [N],
  input  logic        [GW-1:0] gamma,
  output logic                 busy,
  output logic                 done,
  output logic signed [LW:0]   z
);

  localparam int unsigned SW = GW + $clog2(N) + 1;   // sum width
  localparam int unsigned BW = (GW > 1) ? $clog2(GW) : 1;

  typedef enum logic [1:0] {S_IDLE, S_MAX, S_ITER} state_t;
  state_t state;

  logic signed [LW-1:0] l_q [N];
  logic        [GW-1:0] g_q;
  logic signed [LW+1:0] lo_q;     // m - gamma
  logic        [GW-1:0] off_q;    // offset found so far
  logic        [BW-1:0] bit_q;    // bit being tried

  // maximum of the registered inputs
  logic signed [LW-1:0] max_c;
  always_comb begin
    max_c = l_q[0];
    for (int i = 1; i < N; i++)
      if (l_q[i] > max_c) max_c = l_q[i];
  end

  // trial level and the sum of the parts above it
  logic        [GW-1:0] cand_c;
  logic signed [LW+1:0] zc_c;
  logic        [SW-1:0] sum_c;
  logic                 keep_c;
  always_comb begin
    logic signed [LW+2:0] d;
    d      = '0;
    cand_c = off_q | (GW'(1) << bit_q);
    zc_c   = lo_q + $signed((LW+2)'(cand_c));
    sum_c  = '0;
    for (int i = 0; i < N; i++) begin
      d = (LW+3)'(l_q[i]) - (LW+3)'(zc_c);
      if (d > 0) sum_c = sum_c + SW'(d);
    end
    keep_c = (cand_c <= g_q) && (sum_c >= SW'(g_q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      z     <= '0;
      g_q   <= '0;
      lo_q  <= '0;
      off_q <= '0;
      bit_q <= '0;
      for (int i = 0; i < N; i++) l_q[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < N; i++) l_q[i] <= l_in[i];
          g_q   <= gamma;
          state <= S_MAX;
        end
        S_MAX: begin
          lo_q  <= (LW+2)'(max_c) - $signed((LW+2)'(g_q));
          off_q <= '0;
          bit_q <= BW'(GW-1);
          state <= S_ITER;
        end
        S_ITER: begin
          if (keep_c) off_q <= cand_c;
          if (bit_q == '0) begin
            z     <= (LW+1)'(lo_q + $signed((LW+2)'(keep_c ? cand_c : off_q)));
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            bit_q <= bit_q - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
