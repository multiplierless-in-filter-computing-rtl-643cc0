// tb_bp_octaves -- self-checking test of the decimated-octave band-pass
// section. Random decimated samples are pushed into random banks (0 to 4
// pushes between runs, several into the same bank at times); after `start`
// exactly the filters of the banks that received samples must run, in
// index order, with values from the reference MP filter on this testbench's
// own copy of the windows. Filter j reads bank j/5, filters 20..24 bank 3.
module tb_bp_octaves;
  import mfic_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic oct_push, start, acc_en, busy, done;
  logic [1:0] oct_idx;
  logic signed [9:0] oct_y, acc_y;
  logic [4:0] acc_sel;
  logic [9:0] gamma_f;
  bp_octaves dut (.clk, .rst_n, .oct_push, .oct_idx, .oct_y, .start, .gamma_f,
                  .acc_en, .acc_sel, .acc_y, .busy, .done);

  logic [9:0] r2[400];
  int win[4][16];
  int bank_hits[4];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $readmemh("rtl/rom2_bp.hex", r2);
    foreach (win[b, k]) win[b][k] = 0;
    foreach (bank_hits[b]) bank_hits[b] = 0;
    oct_push = 0; start = 0; oct_idx = 0; oct_y = '0; gamma_f = 10'd30;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      bit pend[4];
      int expi[$], expv[$];
      int np, cyc;
      foreach (pend[b]) pend[b] = 0;
      np = $urandom_range(0, 4);
      for (int i = 0; i < np; i++) begin
        int b, v;
        b = $urandom_range(0, 3);
        v = int'($urandom_range(0, 1023)) - 512;
        @(negedge clk);
        oct_push = 1; oct_idx = 2'(b); oct_y = 10'(v);
        for (int k = 15; k > 0; k--) win[b][k] = win[b][k-1];
        win[b][0] = v;
        pend[b] = 1;
      end
      @(negedge clk);
      oct_push = 0;
      for (int j = 0; j < 25; j++) begin
        int b;
        int w[], h[];
        w = new[16]; h = new[16];
        b = (j < 20) ? j / 5 : 3;
        if (pend[b]) begin
          for (int k = 0; k < 16; k++) begin w[k] = win[b][k]; h[k] = s10(r2[j*16+k]); end
          expi.push_back(j);
          expv.push_back(filt_ref(w, h, int'(gamma_f)));
        end
      end
      foreach (pend[b]) if (pend[b]) bank_hits[b]++;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 2000) begin
        if (acc_en) begin
          checks++;
          if (expi.size() == 0) begin
            failures++; $display("run %0d: unexpected filter %0d", t, acc_sel);
          end else begin
            int ei, ev;
            ei = expi.pop_front(); ev = expv.pop_front();
            if (int'(acc_sel) != ei || int'(acc_y) != ev) begin
              failures++;
              $display("run %0d: filter %0d value %0d, expected filter %0d value %0d", t, acc_sel, acc_y, ei, ev);
            end
          end
        end
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (expi.size() != 0) begin failures++; $display("run %0d: %0d filters missing", t, expi.size()); end
    end
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (bank_hits[b] == 0) begin failures++; $display("bank %0d never filtered", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
