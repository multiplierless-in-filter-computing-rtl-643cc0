// shift_regbank -- sample window of a filter (a DEPTH x W register bank).
//
// Holds the last DEPTH samples a filter needs: 6 x 10 bit for a low-pass
// stage, 16 x 10 bit for a band-pass octave. On `push` every entry moves one
// place older and `din` enters at q[0], so q[k] is the sample k steps back,
// x(n-k). All entries are readable at once. Reset clears the window to zero
// (own choice). Write takes effect at the clock edge after `push`.
module shift_regbank #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                push,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] q [DEPTH]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) q[k] <= '0;
    end else if (push) begin
      q[0] <= din;
      for (int k = 1; k < DEPTH; k++) q[k] <= q[k-1];
    end
  end

endmodule
