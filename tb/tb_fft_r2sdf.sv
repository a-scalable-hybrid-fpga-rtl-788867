// tb_fft_r2sdf: feeds three back-to-back frames of random complex samples
// through a 64-point fft_r2sdf (all bins, every stage halving) and compares
// each output bin with a direct DFT divided by 64, computed here in floating
// point, within 4 LSB. Also checks the bin numbering, the end-of-frame mark,
// the latency (NFFT-1 samples plus one clock per stage) and, with a second
// instance at HALF=1, that only the lower half of the bins is flagged valid.
module tb_fft_r2sdf;
  localparam int NFFT = 64, L = 6, DW = 18, NFR = 3;
  localparam real PI = 3.14159265358979323846;
  localparam int TOL = 4;

  logic clk = 1'b0, rst = 1'b1, sync = 1'b0, in_valid = 1'b0;
  logic signed [DW-1:0] in_re = '0, in_im = '0;
  logic [L-1:0] shift_sched = '1;
  logic out_valid, out_last, h_valid, h_last;
  logic signed [DW-1:0] out_re, out_im, h_re, h_im;
  logic [L-1:0] out_bin, h_bin;
  int checks = 0, failures = 0;

  fft_r2sdf #(.NFFT(NFFT), .DW(DW), .HALF(1'b0)) dut (.*);
  fft_r2sdf #(.NFFT(NFFT), .DW(DW), .HALF(1'b1)) dut_half (
    .clk, .rst, .sync, .shift_sched, .in_valid, .in_re, .in_im,
    .out_valid(h_valid), .out_re(h_re), .out_im(h_im), .out_bin(h_bin), .out_last(h_last));

  always #5 clk = ~clk;

  int xr [NFR*NFFT], xi [NFR*NFFT];
  real er [NFR][NFFT], ei [NFR][NFFT];
  int cyc = 0, first_in = -1, first_out = -1, n_out = 0, n_half = 0, n_last = 0, n_hlast = 0;
  bit seen [NFR][NFFT];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst && out_valid) begin
      automatic int f = n_out / NFFT;
      automatic int p = n_out % NFFT;
      automatic int b = 0;
      for (int i = 0; i < L; i++) b |= ((p >> i) & 1) << (L-1-i);
      if (first_out < 0) first_out <= cyc;
      check(int'(out_bin) == b, $sformatf("bin %0d at position %0d", out_bin, p));
      if (f < NFR) begin
        automatic real dr = real'(out_re) - er[f][out_bin];
        automatic real di = real'(out_im) - ei[f][out_bin];
        check(dr < TOL && dr > -TOL && di < TOL && di > -TOL,
              $sformatf("frame %0d bin %0d got (%0d,%0d) want (%f,%f)", f, out_bin, out_re, out_im,
                        er[f][out_bin], ei[f][out_bin]));
        seen[f][out_bin] = 1;
      end
      check(out_last == (p == NFFT-1), "out_last position");
      if (out_last) n_last <= n_last + 1;
      n_out <= n_out + 1;
    end
    if (!rst && h_valid) begin
      check(h_bin < NFFT/2, "HALF flags only the lower half");
      n_half <= n_half + 1;
      if (h_last) begin
        check(h_bin == NFFT/2 - 1, "HALF last bin");
        n_hlast <= n_hlast + 1;
      end
    end
  end

  initial begin
    for (int n = 0; n < NFR*NFFT; n++) begin
      xr[n] = int'($urandom_range(65535)) - 32768;
      xi[n] = int'($urandom_range(65535)) - 32768;
    end
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < NFFT; k++) begin
        automatic real sr = 0.0, si = 0.0;
        for (int n = 0; n < NFFT; n++) begin
          automatic real a = -2.0*PI*real'(n*k)/real'(NFFT);
          sr += real'(xr[f*NFFT+n])*$cos(a) - real'(xi[f*NFFT+n])*$sin(a);
          si += real'(xr[f*NFFT+n])*$sin(a) + real'(xi[f*NFFT+n])*$cos(a);
        end
        er[f][k] = sr / real'(NFFT);
        ei[f][k] = si / real'(NFFT);
      end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk); sync = 1'b1; @(negedge clk); sync = 1'b0;
    // three frames back to back, then one more of zeros to flush the pipeline
    for (int n = 0; n < (NFR+1)*NFFT; n++) begin
      in_valid = 1'b1;
      in_re = (n < NFR*NFFT) ? DW'(xr[n]) : '0;
      in_im = (n < NFR*NFFT) ? DW'(xi[n]) : '0;
      if (n == 0) first_in = cyc;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (L + 2) @(negedge clk);
    check(first_out - first_in == NFFT - 1 + L, $sformatf("latency %0d want %0d", first_out - first_in, NFFT-1+L));
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < NFFT; k++) check(seen[f][k], $sformatf("frame %0d bin %0d missing", f, k));
    check(n_last >= NFR, "end-of-frame marks");
    check(n_half == (n_out + 1) / 2 && n_hlast == n_last, $sformatf("HALF count %0d of %0d", n_half, n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
