// tb_shift_regbank -- self-checking test of the sample window.
// Random pushes (and idle cycles) of random samples into a 16-deep and a
// 6-deep window; after every cycle each entry must equal the sample that
// many pushes back (zero before the first pushes).
module tb_shift_regbank;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push;
  logic signed [9:0] din;
  logic signed [9:0] q16 [16];
  logic signed [9:0] q6 [6];
  shift_regbank #(.DEPTH(16), .W(10)) dut16 (.clk, .rst_n, .push, .din, .q(q16));
  shift_regbank #(.DEPTH(6), .W(10)) dut6 (.clk, .rst_n, .push, .din, .q(q6));

  int hist[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; din = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      push = ($urandom_range(0, 3) != 0);
      din  = 10'($urandom_range(0, 1023));
      @(posedge clk);
      if (push) hist.push_front(int'(din));
      @(negedge clk);
      for (int k = 0; k < 16; k++) begin
        int e;
        e = (k < hist.size()) ? hist[k] : 0;
        checks++;
        if (int'(q16[k]) != e) begin failures++; $display("q16[%0d]=%0d expected %0d", k, q16[k], e); end
        if (k < 6) begin
          checks++;
          if (int'(q6[k]) != e) begin failures++; $display("q6[%0d]=%0d expected %0d", k, q6[k], e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
