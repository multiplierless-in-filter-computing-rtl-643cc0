// tb_bp_octave1 -- self-checking test of the full-rate band-pass section.
// Feeds 120 samples; for each, the five filter outputs (index and value)
// must match the reference model in order, and the section must finish in
// 5*29+2 = 147 cycles, far inside the 3125-cycle sample period of a
// 50 MHz clock at 16 kHz.
module tb_bp_octave1;
  import mfic_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic x_valid, acc_en, busy, done;
  logic signed [9:0] x, acc_y;
  logic [2:0] acc_sel;
  logic [9:0] gamma_f;
  bp_octave1 dut (.clk, .rst_n, .x_valid, .x, .gamma_f, .acc_en, .acc_sel, .acc_y, .busy, .done);

  logic [9:0] r0[24], r1[80], r2[400], rw[62];
  mfic_model m;

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
    x_valid = 0; x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      int xv, cyc, nout;
      gamma_f = (n < 60) ? 10'd16 : 10'd200;
      m.gf = int'(gamma_f);
      xv = int'(400.0 * $sin(1.9 * n)) + int'($urandom_range(0, 100)) - 50;
      m.sample(xv);
      @(negedge clk);
      x_valid = 1; x = 10'(xv);
      @(negedge clk);
      x_valid = 0;
      cyc = 1; nout = 0;
      while (!done) begin
        if (acc_en) begin
          int ei, ev;
          ei = m.ev_bp_idx.pop_front();
          ev = m.ev_bp_val.pop_front();
          checks++;
          if (int'(acc_sel) != ei || int'(acc_y) != ev) begin
            failures++;
            $display("sample %0d: filter %0d value %0d, expected filter %0d value %0d", n, acc_sel, acc_y, ei, ev);
          end
          nout++;
        end
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (nout != 5) begin failures++; $display("sample %0d: %0d outputs", n, nout); end
      checks++;
      if (cyc != 147) begin failures++; $display("sample %0d: took %0d cycles", n, cyc); end
      // drop the model's outputs of the other octaves
      while (m.ev_bp_idx.size() > 0 && m.ev_bp_idx[0] >= 5) begin
        void'(m.ev_bp_idx.pop_front()); void'(m.ev_bp_val.pop_front());
      end
      m.ev_lp_idx.delete(); m.ev_lp_val.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
