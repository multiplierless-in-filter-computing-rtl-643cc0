// tb_coef_rom -- self-checking test of the coefficient ROM.
// Reads every row of the band-pass ROM of the top octave and of the weight
// ROM and compares each value with the file read independently here, and
// with a few hand-checked values (the 16-tap coefficients are symmetric).
module tb_coef_rom;
  int checks = 0, failures = 0;

  logic [2:0] a1;
  logic signed [9:0] r1 [16];
  coef_rom #(.ROWS(5), .TAPS(16), .W(10), .INIT_FILE("rtl/rom1_bp.hex")) dut1 (.addr(a1), .row(r1));

  logic [4:0] aw;
  logic signed [9:0] rw [2];
  coef_rom #(.ROWS(31), .TAPS(2), .W(10), .INIT_FILE("rtl/weights.hex")) dutw (.addr(aw), .row(rw));

  logic [9:0] f1 [80];
  logic [9:0] fw [62];

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    $readmemh("rtl/rom1_bp.hex", f1);
    $readmemh("rtl/weights.hex", fw);
    for (int r = 0; r < 5; r++) begin
      a1 = 3'(r);
      #1;
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (r1[k] != $signed(f1[r*16+k])) begin failures++; $display("rom1 row %0d tap %0d", r, k); end
        checks++;
        if (r1[k] != r1[15-k]) begin failures++; $display("rom1 row %0d not symmetric at %0d", r, k); end
      end
    end
    a1 = 3'd0; #1;
    checks++;
    if (int'(r1[7]) != 255 || int'(r1[0]) != 21 || int'(r1[4]) != -164) begin
      failures++; $display("rom1 row 0 values %0d %0d %0d", r1[0], r1[4], r1[7]);
    end
    for (int r = 0; r < 31; r++) begin
      aw = 5'(r);
      #1;
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (rw[k] != $signed(fw[r*2+k])) begin failures++; $display("weights row %0d col %0d", r, k); end
      end
    end
    aw = 5'd30; #1;
    checks++;
    if (int'(rw[0]) != 20 || int'(rw[1]) != -20) begin failures++; $display("bias row %0d %0d", rw[0], rw[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
