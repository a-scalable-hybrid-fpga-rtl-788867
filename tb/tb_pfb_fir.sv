// tb_pfb_fir: drives pfb_fir (16 points, 3 taps) with random 8-bit samples
// and compares every output with a reference computed here from the
// Hamming-windowed sinc definition: y = sum_t h[(TAPS-1-t)*NFFT+i] x[n-t][i],
// rounded, shifted by IN_W+COEF_W-OUT_W and saturated. Also checks that the
// first TAPS-1 frames are suppressed, that the latency is one clock, and that
// full-scale alternating frames come out right.
module tb_pfb_fir;
  localparam int NFFT = 16, TAPS = 3, IN_W = 8, COEF_W = 18, OUT_W = 18;
  localparam int NFR = 12;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1, sync = 1'b0, in_valid = 1'b0;
  logic signed [IN_W-1:0]  in_x = '0;
  logic                    out_valid;
  logic signed [OUT_W-1:0] out_y;
  int checks = 0, failures = 0;

  pfb_fir #(.NFFT(NFFT), .TAPS(TAPS), .IN_W(IN_W), .COEF_W(COEF_W), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  int  h [TAPS*NFFT];
  int  xs [NFR*NFFT];
  longint expect_y [NFR*NFFT];

  function automatic longint ref_y(int n);
    longint acc = 0, r;
    int i = n % NFFT;
    for (int t = 0; t < TAPS; t++) acc += longint'(xs[n - t*NFFT]) * h[(TAPS-1-t)*NFFT + i];
    r = (acc + (1 <<< (IN_W+COEF_W-OUT_W-1))) >>> (IN_W+COEF_W-OUT_W);
    if (r > (1 <<< (OUT_W-1)) - 1) r = (1 <<< (OUT_W-1)) - 1;
    if (r < -(1 <<< (OUT_W-1))) r = -(1 <<< (OUT_W-1));
    return r;
  endfunction

  int n_in = 0, n_out = 0, first_out_cyc = -1, cyc = 0, first_in_cyc = -1;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && out_valid) begin
      automatic int n = n_out + (TAPS-1)*NFFT;
      if (first_out_cyc < 0) first_out_cyc <= cyc;
      checks++;
      if (longint'(out_y) != expect_y[n]) begin
        failures++;
        if (failures < 10) $display("FAIL: sample %0d got %0d want %0d", n, out_y, expect_y[n]);
      end
      n_out <= n_out + 1;
    end
  end

  initial begin
    for (int m = 0; m < TAPS*NFFT; m++) begin
      real x, s, w;
      x = (real'(m) - real'(TAPS*NFFT)/2.0) / real'(NFFT);
      s = (x == 0.0) ? 1.0 : $sin(PI*x)/(PI*x);
      w = 0.54 - 0.46*$cos(2.0*PI*real'(m)/real'(TAPS*NFFT));
      h[m] = $rtoi(s * w * real'((1 << (COEF_W-1)) - 1));
    end
    for (int n = 0; n < NFR*NFFT; n++) begin
      // last two frames at full scale, alternating sign
      if (n >= (NFR-2)*NFFT) xs[n] = ((n / NFFT) % 2 == 0) ? 127 : -128;
      else xs[n] = int'($urandom_range(255)) - 128;
    end
    for (int n = (TAPS-1)*NFFT; n < NFR*NFFT; n++) expect_y[n] = ref_y(n);

    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk); sync = 1'b1; @(negedge clk); sync = 1'b0;
    for (int n = 0; n < NFR*NFFT; n++) begin
      in_valid = 1'b1;
      in_x = IN_W'(xs[n]);
      if (n == (TAPS-1)*NFFT) first_in_cyc = cyc;
      @(negedge clk);
      // a gap every 7 samples checks valid gating
      if (n % 7 == 3) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != (NFR-TAPS+1)*NFFT) begin
      failures++;
      $display("FAIL: %0d outputs, want %0d", n_out, (NFR-TAPS+1)*NFFT);
    end
    checks++;
    if (first_out_cyc != first_in_cyc + 1) begin
      failures++;
      $display("FAIL: latency %0d, want 1", first_out_cyc - first_in_cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
