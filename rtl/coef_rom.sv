// coef_rom -- coefficient ROM returning one whole row per address.
//
// Holds ROWS rows of TAPS signed W-bit values, row-major (entry r*TAPS+k is
// coefficient k of row r). A filter unit reads all taps of one filter at once;
// the classifier reads {w+, w-} pairs. The read is combinational (a LUT ROM;
// the reference build uses no block RAM). The contents are loaded at
// elaboration from INIT_FILE, one hexadecimal two's-complement value per
// line; the files shipped with this design are stand-ins for trained values
// (see the README for how they were formed).
module coef_rom #(
  parameter int unsigned ROWS      = 5,
  parameter int unsigned TAPS      = 16,
  parameter int unsigned W         = 10,
  parameter string       INIT_FILE = "rtl/rom1_bp.hex"
) (
  input  logic [$clog2(ROWS > 1 ? ROWS : 2)-1:0] addr,
  output logic signed [W-1:0]                     row [TAPS]
);

  logic [W-1:0] mem [ROWS*TAPS];

  initial $readmemh(INIT_FILE, mem);

  always_comb begin
    for (int k = 0; k < TAPS; k++)
      row[k] = (int'(addr) < ROWS) ? $signed(mem[int'(addr)*TAPS + k]) : '0;
  end

endmodule
