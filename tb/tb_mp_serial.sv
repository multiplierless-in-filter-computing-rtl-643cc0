// tb_mp_serial -- self-checking test of the streamed Margin Propagation unit.
// A source answers every pass_start by streaming the same input set, two
// lanes per beat, with random lane masks (an odd count ends on a half-full
// beat as the classifier's bias does). Results are checked against the
// sort-and-divide reference and the run time against (GW+1)(B+2)+2 cycles.
module tb_mp_serial;
  import mfic_ref_pkg::*;

  localparam int LW = 12, GW = 10, MAXN = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, pass_start, in_valid, in_last, busy, done;
  logic [GW-1:0] gamma;
  logic signed [LW-1:0] in_data [2];
  logic [1:0] in_mask;
  logic signed [LW:0] z;

  mp_serial #(.LANES(2), .LW(LW), .GW(GW), .MAXN(MAXN)) dut (
    .clk, .rst_n, .start, .gamma, .pass_start, .in_valid, .in_last, .in_data, .in_mask,
    .busy, .done, .z);

  int beats_d [64][2];
  logic [1:0] mask_d [64];
  int nbeats;

  // stream source
  initial begin
    in_valid = 0; in_last = 0; in_mask = 0;
    in_data[0] = '0; in_data[1] = '0;
    forever begin
      @(posedge clk);
      if (pass_start) begin
        for (int b = 0; b < nbeats; b++) begin
          @(negedge clk);
          in_valid = 1; in_last = (b == nbeats - 1);
          in_data[0] = LW'(beats_d[b][0]); in_data[1] = LW'(beats_d[b][1]);
          in_mask = mask_d[b];
        end
        @(negedge clk);
        in_valid = 0; in_last = 0; in_mask = 0;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l[$];
    int ref_l[];
    int exp_z, cyc;
    start = 0; gamma = 0; nbeats = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      l.delete();
      nbeats = $urandom_range(1, 31);
      for (int b = 0; b < nbeats; b++) begin
        mask_d[b] = (b == nbeats - 1 && t % 2 == 0) ? 2'b01 : 2'b11;
        if (t % 5 == 4 && b != nbeats - 1) mask_d[b] = 2'($urandom_range(1, 3));
        for (int k = 0; k < 2; k++) begin
          beats_d[b][k] = (t % 3 == 0) ? int'($urandom_range(0, 4095)) - 2048
                                       : int'($urandom_range(0, 200)) - 100;
          if (mask_d[b][k]) l.push_back(beats_d[b][k]);
        end
      end
      ref_l = new[l.size()];
      foreach (l[i]) ref_l[i] = l[i];
      gamma = GW'($urandom_range(0, 1023));
      if (t % 7 == 0) gamma = '0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      exp_z = mp_ref(ref_l, int'(gamma));
      checks++;
      if (int'(z) != exp_z) begin
        failures++;
        $display("mp_serial n=%0d gamma=%0d: got %0d expected %0d", l.size(), gamma, z, exp_z);
      end
      checks++;
      if (cyc != (GW + 1) * (nbeats + 2) + 2) begin
        failures++;
        $display("mp_serial run took %0d cycles, expected %0d", cyc, (GW + 1) * (nbeats + 2) + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
