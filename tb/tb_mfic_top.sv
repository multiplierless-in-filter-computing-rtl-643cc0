// tb_mfic_top -- end-to-end test of the classifier with short frames.
// The frame is cut to 32 samples (instead of 16000) and the accumulators to
// 11 bits (instead of 24), so three frames run quickly and the kernel values
// (upper 10 accumulator bits, here the accumulator shifted right by 1) are
// non-trivial and the louder frames saturate; everything else is at its
// default size. Only the ports are used. Chirp-plus-noise samples are fed as fast as x_ready allows, and the
// reference model processes the same stream. At every frame end the
// 30-entry kernel stream (kernel_valid/idx/phi) must match the model in value
// and order, and z+, z-, z, p+, p-, p must match the model's kernel machine.
// Per sample the number of cycles x_ready stays low must depend only on the
// number of low-pass stages run, must grow with it and stay below 3125 (the
// sample period at 50 MHz and 16 kHz). Mechanisms counted, each must occur:
// every low-pass stage and decimated bank, a saturated accumulator, a
// dropped sample, a gamma change, one classification per frame, and
// decisions of both signs.
module tb_mfic_top;
  import mfic_ref_pkg::*;

  localparam int NS = 32, FRAMES = 3, ACC_W = 11;
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

  mfic_top #(.N_SAMPLES_P(NS), .ACC_W_P(ACC_W)) u_dut (
    .clk, .rst_n, .x_valid, .x, .x_ready, .gamma_f, .gamma_1, .result_valid,
    .p, .p_plus, .p_minus, .z_plus, .z_minus, .z, .dropped,
    .kernel_valid, .kernel_idx, .kernel_phi);

  logic [9:0] r0[24], r1[80], r2[400], rw[62];
  mfic_model m;

  // kernel stream capture
  int k_seen, k_order_err;
  int k_val[30];
  always @(posedge clk) if (rst_n && kernel_valid) begin
    if (int'(kernel_idx) != k_seen) k_order_err++;
    if (k_seen < 30) k_val[k_seen] = int'(kernel_phi);
    k_seen++;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_sent, max_cyc, drops_sent, saturated, gamma_changes, classifications, pos, neg;
    int cyc_by_r[5];
    foreach (cyc_by_r[i]) cyc_by_r[i] = -1;
    n_sent = 0; max_cyc = 0; drops_sent = 0; saturated = 0; gamma_changes = 0;
    classifications = 0; pos = 0; neg = 0;
    k_seen = 0; k_order_err = 0;
    $readmemh("rtl/rom0_lp.hex", r0);
    $readmemh("rtl/rom1_bp.hex", r1);
    $readmemh("rtl/rom2_bp.hex", r2);
    $readmemh("rtl/weights.hex", rw);
    m = new();
    m.load(r0, r1, r2, rw);
    m.acc_w = ACC_W;
    gamma_f = 10'd20; gamma_1 = 10'd40;
    m.gf = 20;
    x_valid = 0; x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      int ezp, ezm, ez, epp, epm, ep;
      int ephi[30];
      if (f > 0) gamma_changes++;
      gamma_1 = 10'(40 + 30 * f);
      for (int s = 0; s < NS; s++) begin
        int xv, cyc, r, lp_before[4];
        xv = int'((150.0 + 170.0 * f) * $sin((0.05 + 0.6 * f) * n_sent + 0.002 * n_sent * n_sent))
             + int'($urandom_range(0, 60)) - 30;
        n_sent++;
        while (!x_ready) @(negedge clk);
        x_valid = 1; x = 10'(xv);
        lp_before = m.lp_runs;
        m.sample(xv);
        m.ev_lp_idx.delete(); m.ev_lp_val.delete(); m.ev_bp_idx.delete(); m.ev_bp_val.delete();
        r = 0;
        for (int k = 0; k < 4; k++) if (m.lp_runs[k] != lp_before[k]) r++;
        @(negedge clk);
        // one sample per frame arrives while the design is busy: dropped
        x_valid = (s == 5);
        if (s == 5) drops_sent++;
        x = 10'sd100;
        @(negedge clk);
        x_valid = 0;
        cyc = 2;
        if (s == NS - 1) continue;   // the last sample is followed by the classifier
        while (!x_ready) begin @(negedge clk); cyc++; end
        if (cyc > max_cyc) max_cyc = cyc;
        if (cyc_by_r[r] < 0) cyc_by_r[r] = cyc;
        checks++;
        if (cyc != cyc_by_r[r]) begin
          failures++; $display("sample %0d: %0d cycles, earlier %0d with %0d stages", n_sent, cyc, cyc_by_r[r], r);
        end
      end
      for (int i = 0; i < 30; i++) begin
        ephi[i] = m.phi(i);
        if (m.acc[i] == (longint'(1) << ACC_W) - 1) saturated++;
      end
      begin
        longint mx; mx = 0;
        foreach (m.acc[i]) if (m.acc[i] > mx) mx = m.acc[i];
        $display("frame %0d: largest accumulator %0d", f, mx);
      end
      m.infer(int'(gamma_1), 1, ezp, ezm, ez, epp, epm, ep);
      while (!result_valid) @(negedge clk);
      classifications++;
      checks++;
      if (k_seen != 30 || k_order_err != 0) begin
        failures++; $display("frame %0d: %0d kernel entries, %0d out of order", f, k_seen, k_order_err);
      end
      for (int i = 0; i < 30; i++) begin
        checks++;
        if (k_val[i] != ephi[i]) begin
          failures++; $display("frame %0d: Phi_%0d = %0d, expected %0d", f, i, k_val[i], ephi[i]);
        end
      end
      k_seen = 0; k_order_err = 0;
      checks++;
      if (int'(z_plus) != ezp || int'(z_minus) != ezm || int'(z) != ez ||
          int'(p_plus) != epp || int'(p_minus) != epm || int'(p) != ep) begin
        failures++;
        $display("frame %0d: z+ %0d z- %0d z %0d p+ %0d p- %0d p %0d; expected %0d %0d %0d %0d %0d %0d",
                 f, z_plus, z_minus, z, p_plus, p_minus, p, ezp, ezm, ez, epp, epm, ep);
      end
      if (p > 0) pos++; else if (p < 0) neg++;
      $display("frame %0d: p = %0d (z+ %0d, z- %0d, z %0d)", f, p, z_plus, z_minus, z);
    end
    checks++;
    if (int'(dropped) != drops_sent) begin failures++; $display("dropped %0d, sent early %0d", dropped, drops_sent); end
    checks++;
    if (max_cyc >= 3125) begin failures++; $display("a sample took %0d cycles", max_cyc); end
    for (int r = 1; r <= 4; r++) begin
      checks++;
      if (cyc_by_r[r] >= 0 && cyc_by_r[r - 1] >= 0 && cyc_by_r[r] <= cyc_by_r[r - 1]) begin
        failures++; $display("%0d stages took %0d cycles, %0d stages %0d", r, cyc_by_r[r], r - 1, cyc_by_r[r - 1]);
      end
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (m.lp_runs[k] == 0 || m.bank_runs[k] == 0) begin failures++; $display("stage/bank %0d never ran", k); end
    end
    checks++;
    if (saturated == 0) begin failures++; $display("no accumulator saturated"); end
    checks++;
    if (dropped == 0) begin failures++; $display("no sample dropped"); end
    checks++;
    if (pos == 0 || neg == 0) begin failures++; $display("decisions of only one sign"); end
    checks++;
    if (gamma_changes == 0 || classifications != FRAMES) begin failures++; $display("frames incomplete"); end
    $display("cycles per sample by low-pass stages run: %0d %0d %0d %0d %0d (longest %0d)",
             cyc_by_r[0], cyc_by_r[1], cyc_by_r[2], cyc_by_r[3], cyc_by_r[4], max_cyc);
    $display("mechanisms: LP stages %0d %0d %0d %0d, banks %0d %0d %0d %0d, saturated %0d, dropped %0d, gamma changes %0d, classifications %0d (p>0 %0d, p<0 %0d)",
             m.lp_runs[0], m.lp_runs[1], m.lp_runs[2], m.lp_runs[3],
             m.bank_runs[0], m.bank_runs[1], m.bank_runs[2], m.bank_runs[3],
             saturated, dropped, gamma_changes, classifications, pos, neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
