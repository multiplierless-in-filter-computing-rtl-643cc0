// tb_lp_section -- self-checking test of the decimating low-pass cascade.
// Feeds 160 samples (a tone plus noise); for each one the sequence of
// decimated outputs (stage index and value) must match the reference
// model, stage k must run exactly when the k+1 low bits of the sample
// count are all ones, every stage must have run, and the processing time
// must be 3 + 29*r cycles (one less when all four run) for r stages run.
module tb_lp_section;
  import mfic_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic x_valid, oct_push, busy, done;
  logic signed [9:0] x, oct_y;
  logic [1:0] oct_idx;
  logic [9:0] gamma_f;
  lp_section dut (.clk, .rst_n, .x_valid, .x, .gamma_f, .oct_push, .oct_idx, .oct_y, .busy, .done);

  logic [9:0] r0[24], r1[80], r2[400], rw[62];
  mfic_model m;
  int runs[4];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $readmemh("rtl/rom0_lp.hex", r0);
    $readmemh("rtl/rom1_bp.hex", r1);
    $readmemh("rtl/rom2_bp.hex", r2);
    $readmemh("rtl/weights.hex", rw);
    m = new();
    m.load(r0, r1, r2, rw);
    x_valid = 0; x = '0; gamma_f = 10'd24;
    m.gf = 24;
    foreach (runs[i]) runs[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 160; n++) begin
      int xv, cyc, r;
      xv = int'(300.0 * $sin(0.3 * n)) + int'($urandom_range(0, 200)) - 100;
      m.sample(xv);
      @(negedge clk);
      x_valid = 1; x = 10'(xv);
      @(negedge clk);
      x_valid = 0;
      cyc = 1; r = 0;
      while (!done) begin
        if (oct_push) begin
          int ei, ev;
          ei = m.ev_lp_idx.pop_front();
          ev = m.ev_lp_val.pop_front();
          checks++;
          if (int'(oct_idx) != ei || int'(oct_y) != ev) begin
            failures++;
            $display("sample %0d: push stage %0d value %0d, expected stage %0d value %0d", n, oct_idx, oct_y, ei, ev);
          end
          runs[oct_idx]++;
          r++;
        end
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (m.ev_lp_idx.size() != 0) begin
        failures++;
        $display("sample %0d: %0d expected outputs missing", n, m.ev_lp_idx.size());
        m.ev_lp_idx.delete(); m.ev_lp_val.delete();
      end
      checks++;
      if (cyc != 3 + 29 * r - (r == 4 ? 1 : 0)) begin
        failures++;
        $display("sample %0d: %0d stages took %0d cycles", n, r, cyc);
      end
      m.ev_bp_idx.delete(); m.ev_bp_val.delete();
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      // stage k runs on every 2^(k+1)-th sample
      if (runs[k] != 160 >> (k + 1)) begin
        failures++;
        $display("stage %0d ran %0d times, expected %0d", k, runs[k], 160 >> (k + 1));
      end
    end
    $display("stage runs %0d %0d %0d %0d", runs[0], runs[1], runs[2], runs[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
