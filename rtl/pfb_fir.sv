// pfb_fir: polyphase filter bank front end for one ADC input.
//
// The F-engine channelises each input with a TAPS-tap, NFFT-point polyphase
// filter bank (2 taps and 8192 points in the field system, as in the paper):
// this FIR part, followed by an NFFT-point FFT (fft_r2sdf). Sample i of
// frame n leaves as
//     y = sum_{t=0}^{TAPS-1} h[(TAPS-1-t)*NFFT + i] * x[frame n-t][i]
// so the oldest frame meets the start of the window. The prototype filter is
// a Hamming-windowed sinc of length TAPS*NFFT. It is computed into ROMs at
// start-up, one ROM of NFFT coefficients per tap, COEF_W-bit signed, with the
// peak scaled to 2^(COEF_W-1)-1. The window choice is this design's: the paper
// names only the PFB, its taps and its length.
//
// The delay line is TAPS-1 circular memories of NFFT samples. The sum is
// rounded, shifted right by IN_W+COEF_W-OUT_W, so an 8-bit full-scale input
// reaches half of the 18-bit output range, and saturated to OUT_W bits.
// Timing: one sample per clock when in_valid is high. The output register
// gives 1 clock of latency. out_valid stays low through the first TAPS-1
// frames after `sync`, while the delay line still holds stale samples.
module pfb_fir #(
  parameter int unsigned NFFT   = 8192,
  parameter int unsigned TAPS   = 2,
  parameter int unsigned IN_W   = 8,
  parameter int unsigned COEF_W = 18,
  parameter int unsigned OUT_W  = 18
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    sync,      // clears the frame position
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_x,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_y
);
  localparam int unsigned AW    = $clog2(NFFT);
  localparam int unsigned SHIFT = IN_W + COEF_W - OUT_W;
  localparam int unsigned SUM_W = IN_W + COEF_W + $clog2(TAPS) + 1;

  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [IN_W-1:0]   samp_t;

  coef_t coef [TAPS][NFFT];
  samp_t dline [TAPS > 1 ? TAPS-1 : 1][NFFT];

  // Prototype filter h[m] = sinc((m - L/2)/NFFT) * hamming(m), L = TAPS*NFFT.
  function automatic coef_t proto(input int m);
    if (2 * m == int'(TAPS * NFFT)) return coef_t'((1 << (COEF_W - 1)) - 1);
    return coef_t'($rtoi(
      $sin(3.14159265358979323846 * (real'(m) - real'(TAPS * NFFT) / 2.0) / real'(NFFT)) /
      (3.14159265358979323846 * (real'(m) - real'(TAPS * NFFT) / 2.0) / real'(NFFT)) *
      (0.54 - 0.46 * $cos(2.0 * 3.14159265358979323846 * real'(m) / real'(TAPS * NFFT))) *
      real'((1 << (COEF_W - 1)) - 1)));
  endfunction

  initial begin
    for (int t = 0; t < TAPS; t++)
      for (int i = 0; i < NFFT; i++) coef[t][i] = proto(t * NFFT + i);
  end

  logic [AW-1:0]             pos;          // sample index within the frame
  logic [$clog2(TAPS+1)-1:0] frames_seen;  // saturates at TAPS-1
  logic                      primed;

  assign primed = (frames_seen >= ($clog2(TAPS+1))'(TAPS - 1));

  // Taps: delay d=0 is the current sample, delay d>=1 comes from dline[d-1].
  logic signed [SUM_W-1:0] acc;
  always_comb begin
    acc = SUM_W'(in_x) * SUM_W'(coef[TAPS-1][pos]);
    for (int d = 1; d < TAPS; d++)
      acc += SUM_W'(dline[d-1][pos]) * SUM_W'(coef[TAPS-1-d][pos]);
  end

  localparam logic signed [SUM_W-1:0] YMAX = SUM_W'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] YMIN = -SUM_W'(1 << (OUT_W - 1));
  logic signed [SUM_W-1:0] rounded;
  assign rounded = (acc + SUM_W'(1 << (SHIFT - 1))) >>> SHIFT;

  always_ff @(posedge clk) begin
    if (rst || sync) begin
      pos         <= '0;
      frames_seen <= '0;
      out_valid   <= 1'b0;
    end else begin
      out_valid <= in_valid && primed;
      if (in_valid) begin
        if (rounded > YMAX)      out_y <= YMAX[OUT_W-1:0];
        else if (rounded < YMIN) out_y <= YMIN[OUT_W-1:0];
        else                     out_y <= rounded[OUT_W-1:0];
        pos <= pos + 1'b1;
        if (pos == AW'(NFFT - 1) && !primed) frames_seen <= frames_seen + 1'b1;
      end
    end
  end

  // Shift the delay line: dline[0] takes the new sample, dline[d] the old dline[d-1].
  always_ff @(posedge clk) begin
    if (in_valid && !(rst || sync)) begin
      for (int d = TAPS - 2; d >= 1; d--) dline[d][pos] <= dline[d-1][pos];
      if (TAPS > 1) dline[0][pos] <= in_x;
    end
  end
endmodule
