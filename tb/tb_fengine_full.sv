// tb_fengine_full: one complete operation of the F-engine at its full size
// (8 inputs, 2-tap 8192-point PFB, 4096 channels, four ports with 615-channel
// sub-bands that together make a 60 MHz band, one spectrum per packet), with
// no parameter overridden.
//
// The board is armed and started on a PPS edge. Five ADC frames give three
// complete spectra: the first frame only fills the filter's delay line and the
// FFT needs the next frame's samples to push the last one out. Ports 0, 2 and 3
// send all three packets, each of 2+615 words. Port 1 is held
// off by the Ethernet side for two frames, so one of its packets is dropped
// and counted as an overflow. Every data byte of every packet is compared
// with a reference worked out here: the PFB from the windowed-sinc
// definition, a floating-point DFT divided by NFFT, the channel gain,
// rounding and clipping to 4 bits. One 4-bit step of difference is allowed
// (fixed-point FFT rounding), and at least 90% of the bytes must match
// exactly. Each input carries one tone per sub-band, sized to fill most of
// the 4-bit range. Elsewhere a high gain brings the noise up into the 4-bit
// range too.
module tb_fengine_full;
  import fx_pkg::*;
  localparam int NA = NA_DEF, NFFT = NFFT_DEF, TAPS = TAPS_DEF, DW = DW_DEF, NPORT = NPORT_DEF;
  localparam int BUFW = BUFW_DEF, NT_MAX = NT_MAX_DEF;
  localparam int NT = 1;
  localparam int NFRAMES = 5;            // ADC frames driven after the sync
  // four 615-channel sub-bands [Ch_s, Ch_f): 2460 channels, 60 MHz
  localparam int LOS [NPORT] = '{1229, 1844, 2459, 3074};
  localparam int HIS [NPORT] = '{1844, 2459, 3074, 3689};
  localparam int STALL_FROM = 2 * NFFT, STALL_TO = 4 * NFFT;     // port 1 held off
  localparam int WATCHDOG = (NFRAMES + 20) * NFFT * 2;

  localparam int NCH = NFFT / 2, L = $clog2(NFFT), CW = $clog2(NCH);
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1;
  logic adc_valid = 1'b0;
  logic signed [7:0] adc [NA];
  logic pps = 1'b0, arm = 1'b0;
  logic [L-1:0] fft_shift = '1;
  logic [15:0] fid = 16'h00c3;
  logic [CW-1:0] ch_lo [NPORT];
  logic [CW:0]   ch_hi [NPORT];
  logic [$clog2(NT_MAX+1)-1:0] nt = ($clog2(NT_MAX+1))'(NT);
  logic gain_we = 1'b0;
  logic [$clog2(NA > 1 ? NA : 2)-1:0] gain_input = '0;
  logic [CW-1:0] gain_chan = '0;
  logic [GAIN_W-1:0] gain_val = '0;
  logic [63:0] tx_data [NPORT];
  logic tx_valid [NPORT], tx_eof [NPORT], tx_ready [NPORT];
  logic armed, running;
  logic [31:0] sat_count, ovf_count [NPORT];

  fengine_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // ---- stimulus and reference ------------------------------------------
  int  lo [NPORT], hi [NPORT];
  int  gain [NA][NCH];
  int  h [TAPS*NFFT];

  function automatic int tone_bin(int a);
    return (a % 2 == 0) ? LOS[0] + 100 + 37 * a : LOS[1] + 50 + 41 * a;
  endfunction

  // ADC sample of input a at sample n after the sync.
  function automatic int adc_sample(int a, int n);
    int noise = int'((32'(n) * 32'h9E3779B1 ^ 32'(a) * 32'h85EBCA77) >> 27) - 16;
    int v = $rtoi($floor(70.0 * $cos(2.0 * PI * real'(tone_bin(a) * n) / real'(NFFT) + real'(a)) + 0.5));
    v += noise;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return v;
  endfunction

  function automatic longint pfb_ref(int a, int n);
    longint acc = 0, r;
    int i = n % NFFT;
    for (int t = 0; t < TAPS; t++) acc += longint'(adc_sample(a, n - t*NFFT)) * h[(TAPS-1-t)*NFFT + i];
    r = (acc + 128) >>> 8;
    return r;
  endfunction

  // Tables filled once: PFB outputs per input and frame, and the DFT kernel.
  real ytab [NA][NFRAMES][NFFT];
  real ctab [NFFT], stab [NFFT];

  // Expected 4-bit components for input a, spectrum s, channel c.
  function automatic void ref_q(int a, int s, int c, output int qr, output int qi,
                                output real fr, output real fi);
    real sr = 0.0, si = 0.0;
    for (int i = 0; i < NFFT; i++) begin
      int k = (i * c) % NFFT;
      sr += ytab[a][s + TAPS - 1][i] * ctab[k];
      si += ytab[a][s + TAPS - 1][i] * stab[k];
    end
    fr = sr / real'(NFFT) * real'(gain[a][c]) / real'(1 << GAIN_FRAC) / real'(1 << (DW - QW));
    fi = si / real'(NFFT) * real'(gain[a][c]) / real'(1 << GAIN_FRAC) / real'(1 << (DW - QW));
    qr = $rtoi($floor(fr + 0.5));
    qi = $rtoi($floor(fi + 0.5));
    if (qr > 7) qr = 7;
    if (qr < -7) qr = -7;
    if (qi > 7) qi = 7;
    if (qi < -7) qi = -7;
  endfunction

  // ---- mechanism counters --------------------------------------------------
  int n_sync = 0, n_pkts [NPORT], n_multi = 0, n_bp = 0, n_gap = 0, n_bytes = 0, n_exact = 0;
  int n_tone_ok = 0, n_tone = 0, n_words = 0;
  int last_seq [NPORT];
  int n_chan_in = 0, n_chan_sel = 0;
  always @(posedge clk) begin
    if (!rst && dut.sync) n_sync <= n_sync + 1;
    if (!rst && dut.rq_valid[0]) n_chan_in <= n_chan_in + 1;
    if (!rst && dut.cs_valid) n_chan_sel <= n_chan_sel + 1;
  end

  // ---- ADC drive -------------------------------------------------------------
  int nsamp = 0;
  always @(negedge clk) begin
    // a sample is taken on the next edge when running and not in the sync cycle
    for (int a = 0; a < NA; a++) adc[a] = 8'(adc_sample(a, nsamp));
    if (running && !dut.sync && adc_valid) nsamp = nsamp + 1;
  end

  // ---- Ethernet side ---------------------------------------------------------
  always @(negedge clk) begin
    for (int p = 0; p < NPORT; p++)
      tx_ready[p] = (p == 1) ? !(nsamp >= STALL_FROM && nsamp < STALL_TO) : ($urandom_range(3) != 0);
    for (int p = 0; p < NPORT; p++) if (tx_valid[p] && !tx_ready[p]) n_bp++;
  end

  // One collector per port: parse packets and check every byte.
  for (genvar gp = 0; gp < NPORT; gp++) begin : g_rx
    initial begin
      int k, seq, len;
      k = 0;
      seq = 0;
      @(negedge rst);
      len = NT * (hi[gp] - lo[gp]);
      forever begin
        @(posedge clk);
        if (tx_valid[gp] && tx_ready[gp]) begin
          if (k == 0) begin
            seq = int'(tx_data[gp]);
            if (last_seq[gp] >= 0 && seq != last_seq[gp] + 1) n_gap++;
            check(seq > last_seq[gp], $sformatf("port %0d sequence %0d after %0d", gp, seq, last_seq[gp]));
            last_seq[gp] = seq;
            check(!tx_eof[gp], "eof on header");
          end else if (k == 1) begin
            check(tx_data[gp] == {48'd0, fid}, $sformatf("identifier %h", tx_data[gp]));
          end else begin
            automatic int d = k - 2;
            automatic int t = d / (hi[gp] - lo[gp]);
            automatic int c = lo[gp] + d % (hi[gp] - lo[gp]);
            automatic int s = seq * NT + t;
            n_words++;
            for (int a = 0; a < NA; a++) begin
              automatic logic [7:0] b = tx_data[gp][8*(NA-1-a) +: 8];
              automatic int gr = int'($signed(b[7:4])), gi = int'($signed(b[3:0]));
              automatic int qr, qi;
              automatic real fr, fi;
              ref_q(a, s, c, qr, qi, fr, fi);
              n_bytes++;
              if (gr == qr && gi == qi) n_exact++;
              check((gr - qr) <= 1 && (qr - gr) <= 1 && (gi - qi) <= 1 && (qi - gi) <= 1,
                    $sformatf("port %0d spectrum %0d ch %0d input %0d got (%0d,%0d) want (%f,%f)",
                              gp, s, c, a, gr, gi, fr, fi));
              if (c == tone_bin(a)) begin
                n_tone++;
                if (gr * gr + gi * gi >= 4) n_tone_ok++;
              end
            end
            check(tx_eof[gp] == (d == len - 1), "eof position");
          end
          if (tx_eof[gp]) begin
            check(k == len + 1, $sformatf("port %0d packet of %0d words, want %0d", gp, k + 1, len + 2));
            k = 0;
            n_pkts[gp]++;
            if (NT > 1) n_multi++;
          end else k++;
        end
      end
    end
  end

  // ---- main sequence -------------------------------------------------------
  initial begin
    for (int p = 0; p < NPORT; p++) begin
      lo[p] = LOS[p];
      hi[p] = HIS[p];
      ch_lo[p] = CW'(lo[p]);
      ch_hi[p] = (CW+1)'(hi[p]);
      n_pkts[p] = 0;
      last_seq[p] = -1;
      tx_ready[p] = 1'b1;
    end
    for (int m = 0; m < TAPS*NFFT; m++) begin
      real x, s, w;
      x = (real'(m) - real'(TAPS*NFFT)/2.0) / real'(NFFT);
      s = (x == 0.0) ? 1.0 : $sin(PI*x)/(PI*x);
      w = 0.54 - 0.46*$cos(2.0*PI*real'(m)/real'(TAPS*NFFT));
      h[m] = $rtoi(s * w * real'((1 << 17) - 1));
    end
    for (int k = 0; k < NFFT; k++) begin
      ctab[k] = $cos(-2.0 * PI * real'(k) / real'(NFFT));
      stab[k] = $sin(-2.0 * PI * real'(k) / real'(NFFT));
    end
    for (int a = 0; a < NA; a++)
      for (int f = 1; f < NFRAMES; f++)
        for (int i = 0; i < NFFT; i++) ytab[a][f][i] = real'(pfb_ref(a, f * NFFT + i));
    // gains: 5.0 on the tone channels, 160.0 elsewhere so the noise shows,
    // input 1 gets 40.0 on its tone so it clips
    for (int a = 0; a < NA; a++)
      for (int c = 0; c < NCH; c++)
        gain[a][c] = (c == tone_bin(a)) ? ((a == 1) ? 40 * 256 : 1280) : 160 * 256;
    repeat (4) @(negedge clk);
    rst = 1'b0;
    for (int a = 0; a < NA; a++)
      for (int c = 0; c < NCH; c++) begin
        gain_we = 1'b1;
        gain_input = ($bits(gain_input))'(a);
        gain_chan = CW'(c);
        gain_val = GAIN_W'(gain[a][c]);
        @(negedge clk);
      end
    gain_we = 1'b0;
    adc_valid = 1'b1;
    repeat (5) @(negedge clk);
    arm = 1'b1; @(negedge clk); arm = 1'b0;
    repeat (13) @(negedge clk);
    pps = 1'b1; repeat (4) @(negedge clk); pps = 1'b0;
    wait (nsamp >= NFRAMES * NFFT);
    adc_valid = 1'b0;
    repeat (4 * NFFT) @(negedge clk);

    check(n_sync == 1, $sformatf("PPS start happened %0d times", n_sync));
    for (int p = 0; p < NPORT; p++)
      if (p != 1) check(n_pkts[p] == NFRAMES - TAPS, $sformatf("port %0d sent %0d packets", p, n_pkts[p]));
    check(n_pkts[1] >= 1, $sformatf("port 1 sent %0d packets", n_pkts[1]));
    check(n_bp > 0, "backpressure");
    check(ovf_count[1] > 0, $sformatf("overflow %0d, sequence gaps %0d", ovf_count[1], n_gap));
    for (int p = 0; p < NPORT; p++)
      if (p != 1) check(ovf_count[p] == 0, $sformatf("no overflow on free-running port %0d", p));
    check(sat_count > 0, "4-bit clipping");
    check(n_chan_sel > 0 && n_chan_sel < n_chan_in, "channel selection drops channels");
    check(n_exact * 10 >= n_bytes * 9, $sformatf("%0d of %0d bytes exact", n_exact, n_bytes));
    check(n_tone > 0 && n_tone_ok == n_tone, $sformatf("tone present in %0d of %0d", n_tone_ok, n_tone));
    // every spectrum slot accounted for on port 1: sent + dropped
    check(last_seq[1] + 1 == n_pkts[1] + int'(ovf_count[1]), "port 1 slots = sent + dropped");
    $display("mechanisms: pps_start=%0d packets=%0d/%0d multi_spectrum=%0d backpressure=%0d overflow=%0d seq_gaps=%0d clipped=%0d dropped_channels=%0d",
             n_sync, n_pkts[0], n_pkts[1], n_multi, n_bp, ovf_count[1], n_gap, sat_count,
             n_chan_in - n_chan_sel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
