// tb_mfic_top_full -- the classifier at its default size for one full frame.
// mfic_top is used exactly as built (16000-sample frame, 24-bit
// accumulators). 16000 samples of a noisy chirp sweeping the audio band are
// fed as fast as x_ready allows, and the reference model processes the same
// stream. At the frame end the 30-entry kernel stream (kernel_valid/idx/phi)
// must match the model, as must z+, z-, z, p+, p- and p. Every sample must
// finish in under 3125 cycles (50 MHz clock, 16 kHz sampling), the result
// must appear within 3125 cycles of the last sample, and nothing may be
// dropped.
module tb_mfic_top_full;
  import mfic_ref_pkg::*;

  localparam int NS = 16000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic x_valid, x_ready, result_valid, kernel_valid;
  logic signed [9:0] x;
  logic [9:0] gamma_f, gamma_1, kernel_phi;
  logic [4:0] kernel_idx;
  logic signed [14:0] p;
  logic [13:0] p_plus, p_minus;
  logic signed [12:0] z_plus, z_minus;
  logic signed [13:0] z;
  logic [15:0] dropped;

  mfic_top u_dut (
    .clk, .rst_n, .x_valid, .x, .x_ready, .gamma_f, .gamma_1, .result_valid,
    .p, .p_plus, .p_minus, .z_plus, .z_minus, .z, .dropped,
    .kernel_valid, .kernel_idx, .kernel_phi);

  logic [9:0] r0[24], r1[80], r2[400], rw[62];
  mfic_model m;

  int k_seen = 0, k_order_err = 0;
  int k_val[30];
  always @(posedge clk) if (rst_n && kernel_valid) begin
    if (int'(kernel_idx) != k_seen) k_order_err++;
    if (k_seen < 30) k_val[k_seen] = int'(kernel_phi);
    k_seen++;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int max_cyc, tail, nonzero;
    int ezp, ezm, ez, epp, epm, ep;
    int ephi[30];
    max_cyc = 0; nonzero = 0;
    $readmemh("rtl/rom0_lp.hex", r0);
    $readmemh("rtl/rom1_bp.hex", r1);
    $readmemh("rtl/rom2_bp.hex", r2);
    $readmemh("rtl/weights.hex", rw);
    m = new();
    m.load(r0, r1, r2, rw);
    gamma_f = 10'd20; gamma_1 = 10'd60;
    m.gf = 20;
    x_valid = 0; x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      int xv, cyc;
      real t;
      t = real'(s) / real'(NS);
      // chirp from near DC to about 0.3 cycles per sample
      xv = int'(300.0 * $sin(2.0 * 3.14159265 * (0.3 * real'(NS) / 2.0) * t * t))
           + int'($urandom_range(0, 80)) - 40;
      while (!x_ready) @(negedge clk);
      x_valid = 1; x = 10'(xv);
      m.sample(xv);
      m.ev_lp_idx.delete(); m.ev_lp_val.delete(); m.ev_bp_idx.delete(); m.ev_bp_val.delete();
      @(negedge clk);
      x_valid = 0;
      if (s == NS - 1) break;
      cyc = 1;
      while (!x_ready) begin @(negedge clk); cyc++; end
      if (cyc > max_cyc) max_cyc = cyc;
    end
    for (int i = 0; i < 30; i++) begin
      ephi[i] = m.phi(i);
      if (ephi[i] != 0) nonzero++;
    end
    m.infer(int'(gamma_1), 1, ezp, ezm, ez, epp, epm, ep);
    tail = 0;
    while (!result_valid) begin @(negedge clk); tail++; end
    checks++;
    if (tail >= 3125) begin failures++; $display("result %0d cycles after the last sample", tail); end
    checks++;
    if (max_cyc >= 3125) begin failures++; $display("a sample took %0d cycles", max_cyc); end
    checks++;
    if (k_seen != 30 || k_order_err != 0) begin
      failures++; $display("%0d kernel entries, %0d out of order", k_seen, k_order_err);
    end
    for (int i = 0; i < 30; i++) begin
      checks++;
      if (k_val[i] != ephi[i]) begin failures++; $display("Phi_%0d = %0d, expected %0d", i, k_val[i], ephi[i]); end
    end
    checks++;
    if (nonzero < 20) begin failures++; $display("only %0d non-zero kernel values", nonzero); end
    checks++;
    if (int'(z_plus) != ezp || int'(z_minus) != ezm || int'(z) != ez ||
        int'(p_plus) != epp || int'(p_minus) != epm || int'(p) != ep) begin
      failures++;
      $display("z+ %0d z- %0d z %0d p+ %0d p- %0d p %0d; expected %0d %0d %0d %0d %0d %0d",
               z_plus, z_minus, z, p_plus, p_minus, p, ezp, ezm, ez, epp, epm, ep);
    end
    checks++;
    if (dropped != 0) begin failures++; $display("%0d samples dropped", dropped); end
    $display("kernel: %0d %0d %0d %0d %0d | %0d %0d %0d %0d %0d ...", ephi[0], ephi[1], ephi[2], ephi[3], ephi[4],
             ephi[5], ephi[6], ephi[7], ephi[8], ephi[9]);
    $display("p = %0d (z+ %0d, z- %0d, z %0d); longest sample %0d cycles, classifier %0d cycles",
             p, z_plus, z_minus, z, max_cyc, tail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
