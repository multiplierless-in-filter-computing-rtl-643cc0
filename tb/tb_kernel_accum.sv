// tb_kernel_accum -- self-checking test of the rectify-and-sum kernel bank.
// Random signed filter outputs are added to random filters; negative ones
// must be dropped (half-wave rectification), `clear` must zero everything,
// `phi` must be the upper 10 bits. A second instance with a 12-bit
// accumulator is driven into saturation.
module tb_kernel_accum;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, acc_en;
  logic [4:0] acc_sel, rd_sel;
  logic signed [9:0] acc_y;
  logic [9:0] phi;
  logic [23:0] acc [25];
  kernel_accum #(.NF(25), .ACC_W(24), .W(10), .PHI_W(10)) dut (
    .clk, .rst_n, .clear, .acc_en, .acc_sel, .acc_y, .rd_sel, .phi, .acc);

  logic [2:0] s_sel;
  logic [9:0] s_phi;
  logic [11:0] s_acc [5];
  kernel_accum #(.NF(5), .ACC_W(12), .W(10), .PHI_W(10)) dut_s (
    .clk, .rst_n, .clear(1'b0), .acc_en, .acc_sel(s_sel), .acc_y, .rd_sel(s_sel), .phi(s_phi), .acc(s_acc));

  longint m [25];
  longint ms [5];
  int sat_hits = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; acc_en = 0; acc_sel = 0; rd_sel = 0; acc_y = '0; s_sel = 0;
    foreach (m[i]) m[i] = 0;
    foreach (ms[i]) ms[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      clear  = (t % 7000 == 6999);
      acc_en = ($urandom_range(0, 4) != 0);
      acc_sel = 5'($urandom_range(0, 24));
      s_sel   = 3'($urandom_range(0, 4));
      acc_y  = 10'($urandom_range(0, 1023));
      rd_sel = 5'($urandom_range(0, 24));
      @(posedge clk);
      if (clear) foreach (m[i]) m[i] = 0;
      else if (acc_en && acc_y > 0) m[acc_sel] += acc_y;
      if (acc_en && acc_y > 0) begin
        ms[s_sel] += acc_y;
        if (ms[s_sel] > 4095) begin ms[s_sel] = 4095; sat_hits++; end
      end
      @(negedge clk);
      checks++;
      if (acc[acc_sel] != 24'(m[acc_sel])) begin failures++; $display("acc[%0d]=%0d expected %0d", acc_sel, acc[acc_sel], m[acc_sel]); end
      checks++;
      if (phi != 10'(m[rd_sel] >> 14)) begin failures++; $display("phi[%0d]=%0d expected %0d", rd_sel, phi, m[rd_sel] >> 14); end
      checks++;
      if (s_acc[s_sel] != 12'(ms[s_sel])) begin failures++; $display("sat acc[%0d]=%0d expected %0d", s_sel, s_acc[s_sel], ms[s_sel]); end
    end
    checks++;
    if (sat_hits == 0) begin failures++; $display("saturation never reached"); end
    $display("saturating adds: %0d", sat_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
