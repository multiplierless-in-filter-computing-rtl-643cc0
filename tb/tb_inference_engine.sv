// tb_inference_engine -- self-checking test of the MP kernel machine.
// The testbench plays the kernel register banks: it answers sel6 with a
// random 10-bit kernel vector. z+, z-, z, p+, p- and p are compared with
// the reference model (exact MP by sorting) using the weight ROM contents;
// p+ + p- must equal gamma_n, both signs of p must occur, and a run must
// take (GW+1)(P+3)+GW+8 cycles.
module tb_inference_engine;
  import mfic_ref_pkg::*;

  localparam int P = 30, GW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [9:0] gamma_1;
  logic [4:0] sel6;
  logic [9:0] phi;
  logic signed [12:0] z_plus, z_minus;
  logic signed [13:0] z;
  logic [13:0] p_plus, p_minus;
  logic signed [14:0] p;
  inference_engine dut (.clk, .rst_n, .start, .gamma_1, .sel6, .phi, .busy, .done,
                        .z_plus, .z_minus, .z, .p_plus, .p_minus, .p);

  logic [9:0] kern [32];
  assign phi = kern[sel6];

  logic [9:0] r0[24], r1[80], r2[400], rw[62];
  mfic_model m;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pos = 0, neg = 0;
    $readmemh("rtl/rom0_lp.hex", r0);
    $readmemh("rtl/rom1_bp.hex", r1);
    $readmemh("rtl/rom2_bp.hex", r2);
    $readmemh("rtl/weights.hex", rw);
    m = new();
    m.load(r0, r1, r2, rw);
    start = 0; gamma_1 = 0;
    foreach (kern[i]) kern[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int ezp, ezm, ez, epp, epm, ep, cyc;
      for (int i = 0; i < 32; i++) begin
        case (t % 3)
          0: kern[i] = 10'($urandom_range(0, 1023));
          1: kern[i] = 10'($urandom_range(0, 60));
          default: kern[i] = (i < 15) ? 10'($urandom_range(0, 200)) : 10'($urandom_range(0, 10));
        endcase
      end
      for (int i = 0; i < 30; i++) m.acc[i] = longint'(kern[i]) << 14;
      gamma_1 = 10'($urandom_range(0, 1023));
      if (t % 9 == 0) gamma_1 = '0;
      m.infer(int'(gamma_1), 1, ezp, ezm, ez, epp, epm, ep);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (int'(z_plus) != ezp || int'(z_minus) != ezm || int'(z) != ez) begin
        failures++;
        $display("run %0d: z+ %0d z- %0d z %0d, expected %0d %0d %0d", t, z_plus, z_minus, z, ezp, ezm, ez);
      end
      checks++;
      if (int'(p_plus) != epp || int'(p_minus) != epm || int'(p) != ep) begin
        failures++;
        $display("run %0d: p+ %0d p- %0d p %0d, expected %0d %0d %0d", t, p_plus, p_minus, p, epp, epm, ep);
      end
      checks++;
      if (int'(p_plus) + int'(p_minus) < 1 || int'(p_plus) + int'(p_minus) > 2) begin
        failures++;
        $display("run %0d: p+ + p- = %0d", t, int'(p_plus) + int'(p_minus));
      end
      checks++;
      if (cyc != (GW + 1) * (P + 3) + GW + 8) begin
        failures++;
        $display("run %0d: took %0d cycles, expected %0d", t, cyc, (GW + 1) * (P + 3) + GW + 8);
      end
      if (p > 0) pos++;
      if (p < 0) neg++;
    end
    checks++;
    if (pos == 0 || neg == 0) begin failures++; $display("decisions: %0d positive, %0d negative", pos, neg); end
    $display("decisions: %0d positive, %0d negative", pos, neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
