// tb_mp_core -- self-checking test of the parallel Margin Propagation unit.
// Two instances: a 32-input one (band-pass filter size) and a 2-input one
// (the normalisation MP). Random inputs and margins, including gamma = 0,
// equal inputs and extreme values, are checked against the sort-and-divide
// reference; the start-to-done latency must be GW+2 cycles.
module tb_mp_core;
  import mfic_ref_pkg::*;

  localparam int N = 32, LW = 12, GW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start_a, busy_a, done_a;
  logic signed [LW-1:0] la [N];
  logic [GW-1:0] ga;
  logic signed [LW:0] za;
  mp_core #(.N(N), .LW(LW), .GW(GW)) dut_a (.clk, .rst_n, .start(start_a), .l_in(la), .gamma(ga),
                                           .busy(busy_a), .done(done_a), .z(za));

  logic start_b, busy_b, done_b;
  logic signed [12:0] lb [2];
  logic [GW-1:0] gb;
  logic signed [13:0] zb;
  mp_core #(.N(2), .LW(13), .GW(GW)) dut_b (.clk, .rst_n, .start(start_b), .l_in(lb), .gamma(gb),
                                           .busy(busy_b), .done(done_b), .z(zb));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_a(input int mode);
    int ref_l[];
    int exp_z, cyc;
    ref_l = new[N];
    for (int i = 0; i < N; i++) begin
      int v;
      case (mode)
        0: v = int'($urandom_range(0, 4095)) - 2048;
        1: v = 100;                                         // all equal
        2: v = (i % 2) ? 2047 : -2048;                      // extremes
        default: v = int'($urandom_range(0, 63)) - 32;      // clustered
      endcase
      la[i] = LW'(v);
      ref_l[i] = v;
    end
    ga = (mode == 1) ? GW'(0) : GW'($urandom_range(0, 1023));
    if ($urandom_range(0, 9) == 0) ga = '0;
    @(negedge clk); start_a = 1; @(negedge clk); start_a = 0;
    // change the inputs: the unit must have copied them
    for (int i = 0; i < N; i++) la[i] = '0;
    cyc = 1;
    while (!done_a) begin @(negedge clk); cyc++; end
    exp_z = mp_ref(ref_l, int'(ga));
    checks++;
    if (int'(za) != exp_z) begin
      failures++;
      $display("mp_core N=32 mode %0d gamma %0d: got %0d expected %0d", mode, ga, za, exp_z);
    end
    checks++;
    if (cyc != GW + 2) begin
      failures++;
      $display("mp_core latency %0d, expected %0d", cyc, GW + 2);
    end
  endtask

  task automatic run_b();
    int ref_l[];
    int exp_z;
    ref_l = new[2];
    for (int i = 0; i < 2; i++) begin
      int v;
      v = int'($urandom_range(0, 2000)) - 1000;
      lb[i] = 13'(v);
      ref_l[i] = v;
    end
    gb = GW'($urandom_range(0, 8));
    @(negedge clk); start_b = 1; @(negedge clk); start_b = 0;
    while (!done_b) @(negedge clk);
    exp_z = mp_ref(ref_l, int'(gb));
    checks++;
    if (int'(zb) != exp_z) begin
      failures++;
      $display("mp_core N=2 gamma %0d in %0d %0d: got %0d expected %0d", gb, ref_l[0], ref_l[1], zb, exp_z);
    end
  endtask

  initial begin
    start_a = 0; start_b = 0; ga = 0; gb = 0;
    foreach (la[i]) la[i] = '0;
    foreach (lb[i]) lb[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) run_a(t % 4);
    for (int t = 0; t < 200; t++) run_b();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
