// kernel_accum -- half-wave rectifier and per-filter accumulators (kernel).
//
// Each band-pass output is rectified, d = max(0, y), and added to the
// register of its filter, so after a frame of N samples register p holds
// s_p = sum_n d_p(n). The upper PHI_W bits of that ACC_W-bit register are the
// kernel value Phi_p handed to the classifier. One instance holds the 5
// full-rate filters, another the 25 decimated ones.
//
// Interface: `acc_en` with `acc_sel` (the filter index) and `acc_y` adds at
// the next clock edge; `clear` zeroes all registers (it wins over acc_en).
// `phi` is the combinational read of register `rd_sel`; `acc` shows all
// registers. The add saturates at 2^ACC_W - 1 (own choice; with 10-bit
// inputs and 16000 samples the sum stays below 2^23 and never saturates).
module kernel_accum #(
  parameter int unsigned NF    = 5,
  parameter int unsigned ACC_W = 24,
  parameter int unsigned W     = 10,
  parameter int unsigned PHI_W = 10,
  localparam int unsigned SELW = (NF > 1) ? $clog2(NF) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                acc_en,
  input  logic [SELW-1:0]     acc_sel,
  input  logic signed [W-1:0] acc_y,
  input  logic [SELW-1:0]     rd_sel,
  output logic [PHI_W-1:0]    phi,
  output logic [ACC_W-1:0]    acc [NF]
);

  logic [W-2:0]   hwr_c;      // rectified sample (sign bit dropped)
  logic [ACC_W:0] sum_c;

  assign hwr_c = acc_y[W-1] ? '0 : acc_y[W-2:0];
  assign sum_c = {1'b0, acc[acc_sel]} + (ACC_W+1)'(hwr_c);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NF; i++) acc[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < NF; i++) acc[i] <= '0;
    end else if (acc_en && int'(acc_sel) < NF) begin
      acc[acc_sel] <= sum_c[ACC_W] ? '1 : sum_c[ACC_W-1:0];
    end
  end

  assign phi = (int'(rd_sel) < NF) ? acc[rd_sel][ACC_W-1 -: PHI_W] : '0;

endmodule
