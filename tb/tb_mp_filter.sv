// tb_mp_filter -- self-checking test of the MP-domain FIR output unit.
// Random 16-tap windows and coefficients (and 6-tap ones on a second
// instance) are compared with MP([h+x,-h-x]) - MP([h-x,-h+x]) clamped to
// 10 bits from the reference model (directed correlated windows drive the
// output into the clamp); latency must be 2*(GW+2)+3 cycles.
module tb_mp_filter;
  import mfic_ref_pkg::*;

  localparam int W = 10, GW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int clamps = 0;

  logic start, busy, done;
  logic signed [W-1:0] x [16], h [16], y;
  logic [GW-1:0] gamma;
  mp_filter #(.M(16), .W(W), .GW(GW)) dut (.clk, .rst_n, .start, .x, .h, .gamma, .busy, .done, .y);

  logic start6, busy6, done6;
  logic signed [W-1:0] x6 [6], h6 [6], y6;
  mp_filter #(.M(6), .W(W), .GW(GW)) dut6 (.clk, .rst_n, .start(start6), .x(x6), .h(h6), .gamma,
                                          .busy(busy6), .done(done6), .y(y6));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xr[], hr[], xr6[], hr6[];
    int e, cyc;
    xr = new[16]; hr = new[16]; xr6 = new[6]; hr6 = new[6];
    start = 0; start6 = 0; gamma = 0;
    foreach (x[i]) begin x[i] = '0; h[i] = '0; end
    foreach (x6[i]) begin x6[i] = '0; h6[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      for (int k = 0; k < 16; k++) begin
        xr[k] = int'($urandom_range(0, 1023)) - 512;
        hr[k] = (t % 2) ? int'($urandom_range(0, 1023)) - 512 : int'($urandom_range(0, 510)) - 255;
        if (t % 6 == 5) begin
          // strongly correlated window: the exact output exceeds 10 bits
          xr[k] = (t % 12 == 5) ? 500 : -500;
          hr[k] = 480;
        end
        x[k] = W'(xr[k]); h[k] = W'(hr[k]);
      end
      for (int k = 0; k < 6; k++) begin
        xr6[k] = int'($urandom_range(0, 1023)) - 512;
        hr6[k] = int'($urandom_range(0, 510)) - 255;
        x6[k] = W'(xr6[k]); h6[k] = W'(hr6[k]);
      end
      gamma = GW'($urandom_range(0, 1023));
      if (t % 10 == 0) gamma = '0;
      @(negedge clk); start = 1; start6 = 1; @(negedge clk); start = 0; start6 = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      e = filt_ref(xr, hr, int'(gamma));
      if (e == 511 || e == -512) clamps++;
      checks++;
      if (int'(y) != e) begin
        failures++;
        $display("16-tap gamma %0d: got %0d expected %0d", gamma, y, e);
      end
      checks++;
      if (cyc != 2 * (GW + 2) + 3) begin
        failures++;
        $display("latency %0d expected %0d", cyc, 2 * (GW + 2) + 3);
      end
      e = filt_ref(xr6, hr6, int'(gamma));
      checks++;
      if (int'(y6) != e) begin
        failures++;
        $display("6-tap gamma %0d: got %0d expected %0d", gamma, y6, e);
      end
    end
    checks++;
    if (clamps == 0) begin failures++; $display("output clamp never exercised"); end
    $display("clamped outputs: %0d", clamps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
