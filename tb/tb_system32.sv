// tb_system32: the 32-input field system in miniature: four F-engine boards
// of eight inputs each, with the filter bank cut to 64 points to keep the run
// short. The boards share one PPS but are armed at different times, and
// their Ethernet sides accept words at different random rates. So packets
// with the same sequence number leave the four boards at different moments.
//
// Behind the boards sits a model of the receiving servers, one per port,
// written for this test only. Its capture step places every packet by
// (sequence number, F-engine id) and counts packets of one slot that arrive
// out of board order. Its unpack step widens the 4-bit samples and orders
// each channel's 32 inputs as board*8 + input, completing the corner turn.
// Its X step sums the products x_i * conj(x_j) per channel over all spectra.
// The checks:
//   * every unpacked sample equals the reference (PFB formula, DFT, gain,
//     rounding, clip) for its global input within one 4-bit step, and at
//     least 90% are exact: the corner turn put it in the right place;
//   * all four boards' packets of one slot are present, and the slots of
//     every board and server are the same;
//   * in the channel of the tone common to all inputs, every one of the 496
//     cross products is strongly positive; in a noise-only channel the mean
//     cross product stays small.
module tb_system32;
  import fx_pkg::*;
  localparam int NB = 4, NA = 8, NI = NB * NA;
  localparam int NFFT = 64, TAPS = 2, DW = 18, NPORT = 2, BUFW = 64, NT_MAX = 4, NT = 1;
  localparam int NFRAMES = 30;
  localparam int LOS [NPORT] = '{4, 18};
  localparam int HIS [NPORT] = '{14, 30};
  localparam int TONE [NPORT] = '{7, 25};   // channels with a tone common to all inputs
  localparam int QUIET = 10;                // a channel with noise only
  localparam int NCH = NFFT / 2, L = $clog2(NFFT), CW = $clog2(NCH);
  localparam int MAXSEQ = NFRAMES;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1;
  logic adc_valid [NB];
  logic signed [7:0] adc [NB][NA];
  logic pps = 1'b0;
  logic arm [NB];
  logic [L-1:0] fft_shift = '1;
  logic [CW-1:0] ch_lo [NPORT];
  logic [CW:0]   ch_hi [NPORT];
  logic [$clog2(NT_MAX+1)-1:0] nt = ($clog2(NT_MAX+1))'(NT);
  logic gain_we = 1'b0;
  logic [2:0] gain_input = '0;
  logic [CW-1:0] gain_chan = '0;
  logic [GAIN_W-1:0] gain_val = '0;
  logic [63:0] tx_data [NB][NPORT];
  logic tx_valid [NB][NPORT], tx_eof [NB][NPORT], tx_ready [NB][NPORT];
  logic armed [NB], running [NB];
  logic [31:0] sat_count [NB], ovf_count [NB][NPORT];

  for (genvar b = 0; b < NB; b++) begin : g_board
    fengine_top #(.NA(NA), .NFFT(NFFT), .TAPS(TAPS), .DW(DW), .NPORT(NPORT), .BUFW(BUFW),
                  .NT_MAX(NT_MAX)) u_feng (
      .clk, .rst,
      .adc_valid (adc_valid[b]), .adc (adc[b]),
      .pps, .arm (arm[b]),
      .fft_shift, .fid (16'(b)), .ch_lo, .ch_hi, .nt,
      .gain_we, .gain_input, .gain_chan, .gain_val,
      .tx_data (tx_data[b]), .tx_valid (tx_valid[b]), .tx_eof (tx_eof[b]), .tx_ready (tx_ready[b]),
      .armed (armed[b]), .running (running[b]), .sat_count (sat_count[b]), .ovf_count (ovf_count[b]));
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // ---- signals and reference -----------------------------------------------
  int h [TAPS*NFFT];
  localparam int GAIN = 10 * 256;

  // Sample n of global input g: two tones common to all inputs, own noise.
  function automatic int adc_sample(int g, int n);
    logic [31:0] hsh = 32'(n) * 32'h9E3779B1 + 32'(g) * 32'h7F4A7C15;
    int noise, r;
    real v;
    hsh = hsh ^ (hsh >> 15);
    hsh = hsh * 32'h85EBCA77;
    hsh = hsh ^ (hsh >> 13);
    noise = int'(hsh >> 26) - 32;
    v = 40.0 * $cos(2.0 * PI * real'(TONE[0] * n) / real'(NFFT))
           + 40.0 * $cos(2.0 * PI * real'(TONE[1] * n) / real'(NFFT) + 1.0);
    r = $rtoi($floor(v + 0.5)) + noise;
    return (r > 127) ? 127 : (r < -128) ? -128 : r;
  endfunction

  function automatic longint pfb_ref(int g, int n);
    longint acc = 0;
    int i = n % NFFT;
    for (int t = 0; t < TAPS; t++) acc += longint'(adc_sample(g, n - t*NFFT)) * h[(TAPS-1-t)*NFFT + i];
    return (acc + 128) >>> 8;
  endfunction

  function automatic void ref_q(int g, int s, int c, output int qr, output int qi);
    real sr = 0.0, si = 0.0, fr, fi;
    for (int i = 0; i < NFFT; i++) begin
      real y = real'(pfb_ref(g, (s + TAPS - 1) * NFFT + i));
      sr += y * $cos(-2.0 * PI * real'(i * c) / real'(NFFT));
      si += y * $sin(-2.0 * PI * real'(i * c) / real'(NFFT));
    end
    fr = sr / real'(NFFT) * real'(GAIN) / real'(1 << (GAIN_FRAC + DW - QW));
    fi = si / real'(NFFT) * real'(GAIN) / real'(1 << (GAIN_FRAC + DW - QW));
    qr = $rtoi($floor(fr + 0.5));
    qi = $rtoi($floor(fi + 0.5));
    qr = (qr > 7) ? 7 : (qr < -7) ? -7 : qr;
    qi = (qi > 7) ? 7 : (qi < -7) ? -7 : qi;
  endfunction

  // ---- ADC drive: each board counts its own samples from its own sync ------
  int nsamp [NB];
  always @(negedge clk) begin
    for (int b = 0; b < NB; b++) begin
      for (int a = 0; a < NA; a++) adc[b][a] = 8'(adc_sample(b * NA + a, nsamp[b]));
      if (running[b] && !g_board[0].u_feng.sync && adc_valid[b]) nsamp[b] = nsamp[b] + 1;
    end
    for (int b = 0; b < NB; b++)
      for (int p = 0; p < NPORT; p++)
        // the fastest board changes every four frames
        tx_ready[b][p] = ($urandom_range(99) < 50 + 15 * ((b + nsamp[0] / (4 * NFFT)) % NB));
  end

  // ---- server model: capture by (sequence, F-engine id) ------------------
  // cap[p][seq][fid][word] holds the data words of one packet.
  logic [63:0] cap [NPORT][MAXSEQ][NB][BUFW];
  bit          got [NPORT][MAXSEQ][NB];
  int          max_seq_seen [NPORT];
  real         vq = 0.0;
  int          last_fid [NPORT][MAXSEQ];
  int          n_overtake = 0, n_reorder = 0, n_packets = 0;

  for (genvar gb = 0; gb < NB; gb++) begin : g_cap_b
    for (genvar gp = 0; gp < NPORT; gp++) begin : g_cap_p
      initial begin
        int k, seq, fid;
        k = 0; seq = 0; fid = 0;
        @(negedge rst);
        forever begin
          @(posedge clk);
          if (tx_valid[gb][gp] && tx_ready[gb][gp]) begin
            if (k == 0) seq = int'(tx_data[gb][gp]);
            else if (k == 1) begin
              fid = int'(tx_data[gb][gp][15:0]);
              check(fid == gb, "identifier carries the board's F-engine id");
            end else if (seq < MAXSEQ) cap[gp][seq][fid][k - 2] = tx_data[gb][gp];
            if (tx_eof[gb][gp]) begin
              if (seq < MAXSEQ) begin
                check(!got[gp][seq][fid], "no duplicate packet");
                got[gp][seq][fid] = 1;
                if (seq < max_seq_seen[gp]) n_overtake++;
                if (fid < last_fid[gp][seq]) n_reorder++;
                last_fid[gp][seq] = fid;
                if (seq > max_seq_seen[gp]) max_seq_seen[gp] = seq;
              end
              n_packets++;
              k = 0;
            end else k++;
          end
        end
      end
    end
  end

  // ---- main sequence -----------------------------------------------------------
  initial begin
    for (int p = 0; p < NPORT; p++) begin
      ch_lo[p] = CW'(LOS[p]);
      ch_hi[p] = (CW+1)'(HIS[p]);
      max_seq_seen[p] = -1;
      for (int q = 0; q < MAXSEQ; q++) last_fid[p][q] = -1;
    end
    for (int b = 0; b < NB; b++) begin
      arm[b] = 1'b0;
      adc_valid[b] = 1'b0;
      nsamp[b] = 0;
    end
    for (int m = 0; m < TAPS*NFFT; m++) begin
      real x, s, w;
      x = (real'(m) - real'(TAPS*NFFT)/2.0) / real'(NFFT);
      s = (x == 0.0) ? 1.0 : $sin(PI*x)/(PI*x);
      w = 0.54 - 0.46*$cos(2.0*PI*real'(m)/real'(TAPS*NFFT));
      h[m] = $rtoi(s * w * real'((1 << 17) - 1));
    end
    repeat (4) @(negedge clk);
    rst = 1'b0;
    for (int a = 0; a < NA; a++)
      for (int c = 0; c < NCH; c++) begin
        gain_we = 1'b1; gain_input = 3'(a); gain_chan = CW'(c); gain_val = GAIN_W'(GAIN);
        @(negedge clk);
      end
    gain_we = 1'b0;
    // arm the boards at different times, then one PPS for all
    for (int b = 0; b < NB; b++) begin
      adc_valid[b] = 1'b1;
      arm[b] = 1'b1; @(negedge clk); arm[b] = 1'b0;
      repeat (17 * (b + 1)) @(negedge clk);
    end
    pps = 1'b1; repeat (4) @(negedge clk); pps = 1'b0;
    wait (nsamp[0] >= NFRAMES * NFFT);
    for (int b = 0; b < NB; b++) adc_valid[b] = 1'b0;
    repeat (8 * NFFT) @(negedge clk);

    begin
      int nslots, n_exact, n_vals;
      real vr [2][NI][NI], vi [2][NI][NI];
      nslots = max_seq_seen[0] + 1;
      check(nslots >= NFRAMES - TAPS - 2, $sformatf("%0d packet slots", nslots));
      check(max_seq_seen[1] == max_seq_seen[0], "both servers saw the same slots");
      n_exact = 0; n_vals = 0;
      for (int p = 0; p < NPORT; p++) begin
        automatic int nch = HIS[p] - LOS[p];
        for (int s = 0; s < nslots; s++) begin
          for (int b = 0; b < NB; b++) check(got[p][s][b], $sformatf("server %0d slot %0d board %0d present", p, s, b));
          for (int c = 0; c < nch; c++) begin
            // unpack: the 32 inputs of this channel, ordered board*8 + input
            int xr [NI], xi [NI];
            for (int b = 0; b < NB; b++)
              for (int a = 0; a < NA; a++) begin
                logic [7:0] byt;
                byt = cap[p][s][b][c][8*(NA-1-a) +: 8];
                xr[b*NA + a] = int'($signed(byt[7:4]));
                xi[b*NA + a] = int'($signed(byt[3:0]));
              end
            for (int g = 0; g < NI; g++) begin
              int qr, qi;
              ref_q(g, s, LOS[p] + c, qr, qi);
              n_vals++;
              if (qr == xr[g] && qi == xi[g]) n_exact++;
              check(qr - xr[g] <= 1 && xr[g] - qr <= 1 && qi - xi[g] <= 1 && xi[g] - qi <= 1,
                    $sformatf("server %0d slot %0d ch %0d input %0d got (%0d,%0d) want (%0d,%0d)",
                              p, s, LOS[p] + c, g, xr[g], xi[g], qr, qi));
            end
            // X step for the tone channels and the quiet channel
            if (LOS[p] + c == TONE[p] || LOS[p] + c == QUIET) begin
              automatic bit tone = (LOS[p] + c == TONE[p]);
              automatic int k = tone ? 0 : 1;
              if (s == 0) for (int i = 0; i < NI; i++) for (int j = 0; j < NI; j++) begin vr[k][i][j] = 0; vi[k][i][j] = 0; end
              for (int i = 0; i < NI; i++)
                for (int j = i + 1; j < NI; j++) begin
                  vr[k][i][j] += real'(xr[i] * xr[j] + xi[i] * xi[j]);
                  vi[k][i][j] += real'(xi[i] * xr[j] - xr[i] * xi[j]);
                end
              if (s == nslots - 1) begin
                automatic int nstrong = 0;
                automatic real sum = 0.0;
                for (int i = 0; i < NI; i++)
                  for (int j = i + 1; j < NI; j++) begin
                    if (vr[k][i][j] / real'(nslots) > 4.0) nstrong++;
                    sum += vr[k][i][j] / real'(nslots);
                  end
                sum = sum / real'(NI * (NI - 1) / 2);
                if (!tone) vq = sum;
                if (tone) check(nstrong == NI * (NI - 1) / 2,
                                $sformatf("tone channel %0d: %0d of %0d pairs correlate", TONE[p], nstrong, NI*(NI-1)/2));
                else check(vq < 1.0 && vq > -1.0, $sformatf("quiet channel mean cross product %f", vq));
              end
            end
          end
        end
      end
      check(n_exact * 10 >= n_vals * 9, $sformatf("%0d of %0d samples exact", n_exact, n_vals));
      for (int b = 0; b < NB; b++)
        for (int p = 0; p < NPORT; p++) check(ovf_count[b][p] == 0, $sformatf("board %0d port %0d dropped %0d packets", b, p, ovf_count[b][p]));
      check(n_reorder > 0, "packets of one slot arrived out of board order");
      $display("system: boards=%0d inputs=%0d packets=%0d slots=%0d out_of_board_order=%0d overtaking=%0d exact=%0d/%0d quiet=%f",
               NB, NI, n_packets, nslots, n_reorder, n_overtake, n_exact, n_vals, vq);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NFRAMES + 30) * NFFT * 2) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
